// dram_interface: the interface logic of one DRAM with RAMPART remapping.
//
// It sits between the command/address pins and the DRAM core. The command decoder
// splits the command bundle into core operations. For an activate, the controller
// row address goes through the row address permutation, rotated left by this DRAM's
// shift value, and the result selects the row inside the bank; the rest of the
// DRAM core never sees the controller address. Read and write commands pass the
// burst address through unchanged (RAMPART remaps rows only). The interface keeps
// the open bank row of every bank, so that a precharge carrying the DRFM bit can
// hand that row and the victim level to the DRFM / BRC-VL refresh unit, which turns
// the next RFM into refreshes of the physical neighbours.
//
// The block split follows the DRAM interface of the design (command decode, shift
// value, row address permutation). The command bundle in place of DDR5 pin
// encodings, the open-row table and the one-command-per-clock core interface are
// choices of this design. DQ data does not pass through this block.
//
// Timing: core_* outputs are combinational from cmd (same cycle); refreshes follow
// an RFM from the next cycle on.
module dram_interface
  import rampart_pkg::*;
#(
  parameter int NUM_BANKS    = 32,
  parameter int BANKS_PER_BG = 4,
  parameter int ROW_BITS     = 16,
  parameter int COL_BITS     = 7,
  parameter int ID_W         = 4,
  parameter int SHIFT_PER_ID = 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [ID_W-1:0]              fuse_id,
  input  logic                         prog_en,
  input  logic [ID_W-1:0]              prog_id,
  output logic [$clog2(ROW_BITS)-1:0]  shift,
  input  dram_cmd_t                    cmd,
  // core side
  output logic                         core_act,
  output logic                         core_pre,
  output logic                         core_rd,
  output logic                         core_wr,
  output logic [$clog2(NUM_BANKS)-1:0] core_bank,
  output logic [ROW_BITS-1:0]          core_row,
  output logic [COL_BITS-1:0]          core_col,
  output logic                         core_ref,
  output logic [$clog2(NUM_BANKS)-1:0] core_ref_bank,
  output logic [ROW_BITS-1:0]          core_ref_row,
  output logic                         rfm_busy
);

  localparam int BW = $clog2(NUM_BANKS);

  logic [ID_W-1:0] id_unused;
  shift_value_reg #(.ROW_BITS(ROW_BITS), .ID_W(ID_W), .SHIFT_PER_ID(SHIFT_PER_ID)) u_shift (
    .clk, .rst_n, .fuse_id, .prog_en, .prog_id, .id(id_unused), .shift
  );

  logic [ROW_BITS-1:0] bank_row;
  row_addr_permute #(.ROW_BITS(ROW_BITS)) u_perm (
    .ctrl_row(cmd.row[ROW_BITS-1:0]), .shift, .bank_row
  );

  // command decode
  logic [BW-1:0] bank;
  assign bank      = cmd.bank[BW-1:0];
  assign core_act  = (cmd.cmd == CMD_ACT);
  assign core_pre  = (cmd.cmd == CMD_PRE);
  assign core_rd   = (cmd.cmd == CMD_RD);
  assign core_wr   = (cmd.cmd == CMD_WR);
  assign core_bank = bank;
  assign core_row  = bank_row;
  assign core_col  = cmd.col[COL_BITS-1:0];

  logic [ROW_BITS-1:0] open_row [NUM_BANKS];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < NUM_BANKS; b++) open_row[b] <= '0;
    end else if (core_act) begin
      open_row[bank] <= bank_row;
    end
  end

  drfm_victim_refresh #(.NUM_BANKS(NUM_BANKS), .BANKS_PER_BG(BANKS_PER_BG), .ROW_BITS(ROW_BITS)) u_drfm (
    .clk, .rst_n,
    .pre_valid(core_pre), .pre_bank(bank), .pre_row(open_row[bank]),
    .pre_drfm(cmd.drfm), .pre_vl(cmd.vl),
    .rfm_valid(cmd.cmd == CMD_RFMSB || cmd.cmd == CMD_RFMAB),
    .rfm_all(cmd.cmd == CMD_RFMAB),
    .rfm_bi(cmd.bank[$clog2(BANKS_PER_BG)-1:0]),
    .busy(rfm_busy),
    .ref_valid(core_ref), .ref_bank(core_ref_bank), .ref_row(core_ref_row)
  );

endmodule
