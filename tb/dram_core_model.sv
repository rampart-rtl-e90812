// dram_core_model: behavioural model of one x4 DRAM core with RowHammer
// disturbance, for simulation only (not synthesizable).
//
// Storage is sparse (associative array keyed by bank/row/burst address), one 64-bit
// burst (16 beats x 4 DQ) per location, reading 0 where nothing was written. Every
// activation or refresh of a row restores that row and disturbs its two physical
// neighbours. A row disturbed HC times since it was last restored flips every bit
// of every burst written in it: the worst case a single successful attack can do.
// Read data appears on rdata one clock after a read command.
module dram_core_model #(
  parameter int NUM_BANKS = 32,
  parameter int ROW_BITS  = 16,
  parameter int COL_BITS  = 7,
  parameter int HC        = 64
) (
  input  logic                         clk,
  input  logic                         act,
  input  logic                         rd,
  input  logic                         wr,
  input  logic [$clog2(NUM_BANKS)-1:0] bank,
  input  logic [ROW_BITS-1:0]          row,
  input  logic [COL_BITS-1:0]          col,
  input  logic [63:0]                  wdata,
  output logic [63:0]                  rdata,
  input  logic                         ref_v,
  input  logic [$clog2(NUM_BANKS)-1:0] ref_bank,
  input  logic [ROW_BITS-1:0]          ref_row,
  output int                           flips
);

  logic [63:0] mem [longint];
  int          disturb [longint];
  logic [ROW_BITS-1:0] open_row [NUM_BANKS];

  initial flips = 0;

  function automatic longint rkey(input int b, input longint r);
    return (longint'(b) << ROW_BITS) | r;
  endfunction

  function automatic longint mkey(input int b, input longint r, input int c);
    return (rkey(b, r) << COL_BITS) | longint'(c);
  endfunction

  task automatic restore_and_disturb(input int b, input longint r);
    disturb[rkey(b, r)] = 0;
    for (int d = -1; d <= 1; d += 2) begin
      longint n;
      n = r + longint'(d);
      if (n >= 0 && n < (longint'(1) << ROW_BITS)) begin
        longint k;
        k = rkey(b, n);
        if (!disturb.exists(k)) disturb[k] = 0;
        disturb[k]++;
        if (disturb[k] == HC) begin
          flips++;
          disturb[k] = 0;
          foreach (mem[m]) if ((m >> COL_BITS) == k) mem[m] = ~mem[m];
        end
      end
    end
  endtask

  always @(posedge clk) begin
    if (act) begin
      open_row[bank] <= row;
      restore_and_disturb(int'(bank), longint'(row));
    end
    if (ref_v) restore_and_disturb(int'(ref_bank), longint'(ref_row));
    if (wr) mem[mkey(int'(bank), longint'(open_row[bank]), int'(col))] = wdata;
    if (rd) begin
      longint k;
      k = mkey(int'(bank), longint'(open_row[bank]), int'(col));
      rdata <= mem.exists(k) ? mem[k] : 64'd0;
    end
  end

endmodule
