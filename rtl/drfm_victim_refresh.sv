// drfm_victim_refresh: DRAM-side DRFM storage and BRC-VL victim refresh.
//
// When a precharge arrives with the DRFM bit set, the DRAM saves the row that was
// open in that bank (already permuted, i.e. the row inside the bank) and the victim
// level sent with the precharge. At the next RFM that covers the bank, the DRAM
// refreshes the two rows at distance <level> from the saved row: rows R-1 and R+1
// for level 1, rows R-2 and R+2 for level 2. Only two rows are refreshed per bank,
// which is what makes a BRC-VL RFM shorter than a DDR5 BRC one. Because the saved
// row is the bank row, the refreshed rows are the physical neighbours in this DRAM,
// which correspond to different controller addresses in every DRAM of the rank.
//
// An RFMsb covers bank index rfm_bi in every bank group; an RFMab covers all banks.
// Covered banks with a saved target are walked in ascending bank order, one refresh
// per clock on ref_valid/ref_bank/ref_row; rows that would fall off either end of
// the bank are skipped. The saved target is consumed by the RFM. A newer DRFM
// precharge to the same bank replaces an unconsumed target. The walking order, the
// edge handling and the overwrite rule are choices of this design.
//
// Timing: a command in cycle t is stored at the edge ending t; refreshes start the
// cycle after the RFM and take two cycles per covered bank with a target.
module drfm_victim_refresh
  import rampart_pkg::*;
#(
  parameter int NUM_BANKS    = 32,
  parameter int BANKS_PER_BG = 4,
  parameter int ROW_BITS     = 16
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // precharge of bank pre_bank, whose open bank row is pre_row
  input  logic                         pre_valid,
  input  logic [$clog2(NUM_BANKS)-1:0] pre_bank,
  input  logic [ROW_BITS-1:0]          pre_row,
  input  logic                         pre_drfm,
  input  vl_t                          pre_vl,
  // refresh management
  input  logic                         rfm_valid,
  input  logic                         rfm_all,
  input  logic [$clog2(BANKS_PER_BG)-1:0] rfm_bi,
  output logic                         busy,
  // refresh requests to the core
  output logic                         ref_valid,
  output logic [$clog2(NUM_BANKS)-1:0] ref_bank,
  output logic [ROW_BITS-1:0]          ref_row
);

  localparam int BW = $clog2(NUM_BANKS);

  logic [ROW_BITS-1:0] tgt_row [NUM_BANKS];
  vl_t                 tgt_vl  [NUM_BANKS];
  logic [NUM_BANKS-1:0] tgt_valid;
  logic [NUM_BANKS-1:0] pending;   // banks still to refresh in the current RFM
  logic                 upper;     // 0: refresh R-d next, 1: refresh R+d next

  // lowest pending bank
  logic [BW-1:0] cur;
  logic          any;
  always_comb begin
    cur = '0;
    any = 1'b0;
    for (int b = NUM_BANKS - 1; b >= 0; b--)
      if (pending[b]) begin
        cur = BW'(b);
        any = 1'b1;
      end
  end

  logic [ROW_BITS:0] vdist, lo_row, hi_row;
  logic              lo_ok, hi_ok;
  always_comb begin
    vdist   = (ROW_BITS+1)'(tgt_vl[cur]);
    lo_row = {1'b0, tgt_row[cur]} - vdist;
    hi_row = {1'b0, tgt_row[cur]} + vdist;
    lo_ok  = ({1'b0, tgt_row[cur]} >= vdist);
    hi_ok  = !hi_row[ROW_BITS];
  end

  assign busy = any;

  always_comb begin
    ref_valid = 1'b0;
    ref_bank  = cur;
    ref_row   = upper ? hi_row[ROW_BITS-1:0] : lo_row[ROW_BITS-1:0];
    if (any) ref_valid = upper ? hi_ok : lo_ok;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tgt_valid <= '0;
      pending   <= '0;
      upper     <= 1'b0;
      for (int b = 0; b < NUM_BANKS; b++) begin
        tgt_row[b] <= '0;
        tgt_vl[b]  <= vl_t'(1);
      end
    end else begin
      // walk the pending banks
      if (any) begin
        if (!upper) upper <= 1'b1;
        else begin
          upper        <= 1'b0;
          pending[cur] <= 1'b0;
        end
      end
      if (rfm_valid && !any) begin
        for (int b = 0; b < NUM_BANKS; b++)
          if (tgt_valid[b] && (rfm_all || (b % BANKS_PER_BG) == int'(rfm_bi))) begin
            pending[b]   <= 1'b1;
            tgt_valid[b] <= 1'b0;
          end
      end
      if (pre_valid && pre_drfm) begin
        tgt_row[pre_bank]   <= pre_row;
        tgt_vl[pre_bank]    <= pre_vl;
        tgt_valid[pre_bank] <= 1'b1;
      end
    end
  end

endmodule
