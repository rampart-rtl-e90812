// brcvl_selection_logic: the controller's BRC-VL selection logic for one rank.
//
// Four parts, as in the design's 32-bank example: a 16-bit LFSR shared by all
// banks; target row selection per bank (one target activate per RAAIMT window and a
// victim level, level 2 with probability ~1/RAAIMT); Bank Activate Counters; and a
// tracker that signals when a same-bank RFM is needed and which banks must stall.
// The scheduler reports every activate and precharge it issues, gets back the DRFM
// bit and victim level to put on each precharge, and reports each RFMsb it issues.
//
// Interface: act_*/pre_* describe the command issued this cycle; pre_drfm/pre_vl are
// combinational for that precharge. rfm_req/rfm_bi ask for an RFMsb; rfm_issue
// (same cycle as the RFMsb command, with bank index rfm_bi) lowers the covered
// BACs by RAAIMT at that edge. With rfm_ab set the RFMs are all-bank (RFMab): any
// BAC at RAAIMT asks for one and it lowers every BAC. act_block[b] forbids
// activates to bank b.
module brcvl_selection_logic
  import rampart_pkg::*;
#(
  parameter int          NUM_BANKS    = 32,
  parameter int          BANKS_PER_BG = 4,
  parameter int          BAC_W        = 10,
  parameter int          RAAIMT_W     = 9,
  parameter logic [15:0] SEED         = 16'hACE1
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic [RAAIMT_W-1:0]             raaimt,
  input  logic                            act_valid,
  input  logic [$clog2(NUM_BANKS)-1:0]    act_bank,
  input  logic                            pre_valid,
  input  logic [$clog2(NUM_BANKS)-1:0]    pre_bank,
  output logic                            pre_drfm,
  output vl_t                             pre_vl,
  output logic                            rfm_req,
  output logic [$clog2(BANKS_PER_BG)-1:0] rfm_bi,
  input  logic                            rfm_issue,
  input  logic                            rfm_ab,
  output logic [NUM_BANKS-1:0]            act_block,
  output logic                            act_is_target,
  output vl_t                             act_target_vl,
  output logic [BAC_W-1:0]                bac [NUM_BANKS]
);

  logic [15:0]          rnd;
  logic [NUM_BANKS-1:0] dec_mask;

  brcvl_lfsr #(.SEED(SEED)) u_lfsr (.clk, .rst_n, .rnd);

  brcvl_target_select #(.NUM_BANKS(NUM_BANKS), .RAAIMT_W(RAAIMT_W)) u_sel (
    .clk, .rst_n, .rnd, .raaimt, .act_valid, .act_bank, .pre_valid, .pre_bank,
    .pre_drfm, .pre_vl, .act_is_target, .act_target_vl
  );

  bank_activate_counters #(.NUM_BANKS(NUM_BANKS), .BAC_W(BAC_W), .RAAIMT_W(RAAIMT_W)) u_bac (
    .clk, .rst_n, .act_valid, .act_bank, .dec_mask, .raaimt, .bac
  );

  rfm_tracker #(.NUM_BANKS(NUM_BANKS), .BANKS_PER_BG(BANKS_PER_BG), .BAC_W(BAC_W),
                .RAAIMT_W(RAAIMT_W)) u_trk (
    .clk, .rst_n, .bac, .raaimt, .rfm_req, .rfm_bi, .rfm_issue, .rfm_ab, .dec_mask, .act_block
  );

endmodule
