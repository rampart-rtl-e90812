// rampart_system: one rank of a server memory channel protected by RAMPART row
// remapping, SDDC ECC, patrol scrub and BRC-VL refresh management.
//
// Controller side: a closed-page command sequencer, the BRC-VL selection logic
// (LFSR, per-bank target selection, Bank Activate Counters, RFM tracker), sixteen
// RS(10,8) encoders and decoders (one per beat of a burst) and a patrol scrubber.
// DRAM side: ten DRAM interfaces (eight data, two check DRAMs), each with its own
// RAMPART shift value, permuting activate row addresses and turning DRFM targets
// into victim-row refreshes at RFM. The DRAM cores (arrays, sense amplifiers) are
// not part of this RTL; their command and data signals are ports, per DRAM.
//
// Why it works: all DRAMs receive the same controller row address, but each one
// rotates it by a different amount, so a hammered row disturbs a different set of
// controller addresses in every DRAM. A read of any victim address then sees
// errors in one DRAM only, i.e. one RS symbol per beat, which SDDC corrects; the
// corrected line is written back at once (demand scrub) or when the patrol
// scrubber reaches it.
//
// Data layout: line bit 32*b + 4*k + j is DQ j of DRAM k in beat b (k = 0..7);
// core_wdata[k][4*b + j] / core_rdata[k][4*b + j] is DQ j of DRAM k in beat b,
// k = 0..9, with DRAMs 8 and 9 carrying the check symbols.
//
// Configuration: raaimt sets the RAAIMT window and RFM threshold; rfm_ab selects
// all-bank RFMs (RFMab) instead of same-bank ones (RFMsb); rfm_postpone lets RFMs
// wait until a bank is blocked; scrub_en/scrub_interval run the patrol scrubber;
// fuse_id, or prog_id with prog_en, give each DRAM its RAMPART ID.
//
// Timing: core_* command outputs and core_wdata are valid in the cycle of the
// command; core_rdata must be returned one clock after a read command.
module rampart_system
  import rampart_pkg::*;
#(
  parameter int          NUM_DRAMS    = 10,
  parameter int          NUM_BANKS    = 32,
  parameter int          BANKS_PER_BG = 4,
  parameter int          ROW_BITS     = 16,
  parameter int          COL_BITS     = 7,
  parameter int          ID_W         = 4,
  parameter int          SHIFT_PER_ID = 1,
  parameter int          RAAIMT_W     = 9,
  parameter int          BAC_W        = 10,
  parameter int          T_RFM        = 364,
  parameter int          T_RFM_AB     = 364,
  parameter logic [15:0] SEED         = 16'hACE1
) (
  input  logic                            clk,
  input  logic                            rst_n,
  // configuration
  input  logic [RAAIMT_W-1:0]             raaimt,
  input  logic                            rfm_postpone,
  input  logic                            rfm_ab,
  input  logic                            scrub_en,
  input  logic [31:0]                     scrub_interval,
  input  logic [ID_W-1:0]                 fuse_id [NUM_DRAMS],
  input  logic                            prog_en,
  input  logic [ID_W-1:0]                 prog_id [NUM_DRAMS],
  // host port, one 64-byte line per request
  input  logic                            req_valid,
  output logic                            req_ready,
  input  logic                            req_we,
  input  logic [$clog2(NUM_BANKS)-1:0]    req_bank,
  input  logic [ROW_BITS-1:0]             req_row,
  input  logic [COL_BITS-1:0]             req_col,
  input  logic [LINE_BITS-1:0]            req_wdata,
  output logic                            resp_valid,
  output logic [LINE_BITS-1:0]            resp_rdata,
  output logic                            resp_corrected,
  output logic                            resp_uncorrectable,
  // DRAM cores
  output logic                            core_act   [NUM_DRAMS],
  output logic                            core_pre   [NUM_DRAMS],
  output logic                            core_rd    [NUM_DRAMS],
  output logic                            core_wr    [NUM_DRAMS],
  output logic [$clog2(NUM_BANKS)-1:0]    core_bank  [NUM_DRAMS],
  output logic [ROW_BITS-1:0]             core_row   [NUM_DRAMS],
  output logic [COL_BITS-1:0]             core_col   [NUM_DRAMS],
  output logic [DRAM_BURST_W-1:0]         core_wdata [NUM_DRAMS],
  input  logic [DRAM_BURST_W-1:0]         core_rdata [NUM_DRAMS],
  output logic                            core_ref      [NUM_DRAMS],
  output logic [$clog2(NUM_BANKS)-1:0]    core_ref_bank [NUM_DRAMS],
  output logic [ROW_BITS-1:0]             core_ref_row  [NUM_DRAMS],
  output logic [$clog2(ROW_BITS)-1:0]     dram_shift    [NUM_DRAMS],
  // events, one clock each
  output logic                            ev_rfm,
  output logic                            ev_drfm_pre,
  output vl_t                             ev_drfm_vl,
  output logic                            ev_stall,
  output logic                            ev_demand_scrub,
  output logic                            ev_scrub_read,
  output logic                            ev_scrub_pass,
  output logic [3:0]                      ev_err_dram
);

  localparam int BW  = $clog2(NUM_BANKS);
  localparam int BIW = $clog2(BANKS_PER_BG);

  // ---- BRC-VL selection logic ----------------------------------------------------
  logic                 act_valid, pre_valid, pre_drfm, rfm_req, rfm_issue;
  logic                 act_is_target;
  vl_t                  pre_vl, act_target_vl;
  logic [BW-1:0]        act_bank, pre_bank;
  logic [BIW-1:0]       rfm_bi;
  logic [NUM_BANKS-1:0] act_block;
  logic [BAC_W-1:0]     bac [NUM_BANKS];

  brcvl_selection_logic #(.NUM_BANKS(NUM_BANKS), .BANKS_PER_BG(BANKS_PER_BG), .BAC_W(BAC_W),
                          .RAAIMT_W(RAAIMT_W), .SEED(SEED)) u_brcvl (
    .clk, .rst_n, .raaimt, .act_valid, .act_bank, .pre_valid, .pre_bank, .pre_drfm, .pre_vl,
    .rfm_req, .rfm_bi, .rfm_issue, .rfm_ab, .act_block, .act_is_target, .act_target_vl, .bac
  );

  // ---- patrol scrub ----------------------------------------------------------------
  logic                scr_valid, scr_ready;
  logic [BW-1:0]       scr_bank;
  logic [ROW_BITS-1:0] scr_row;
  logic [COL_BITS-1:0] scr_col;

  patrol_scrub #(.NUM_BANKS(NUM_BANKS), .ROW_BITS(ROW_BITS), .COL_BITS(COL_BITS)) u_scrub (
    .clk, .rst_n, .enable(scrub_en), .interval(scrub_interval),
    .req_valid(scr_valid), .req_ready(scr_ready), .req_bank(scr_bank), .req_row(scr_row),
    .req_col(scr_col), .pass_done(ev_scrub_pass)
  );

  // ---- sequencer -------------------------------------------------------------------
  dram_cmd_t         cmd;
  logic [LINE_BITS-1:0] wr_line, rd_line;
  logic              rd_corrected, rd_uncorrectable;

  mc_sequencer #(.NUM_BANKS(NUM_BANKS), .BANKS_PER_BG(BANKS_PER_BG), .ROW_BITS(ROW_BITS),
                 .COL_BITS(COL_BITS), .LINE_W(LINE_BITS), .T_RFM(T_RFM), .T_RFM_AB(T_RFM_AB)) u_seq (
    .clk, .rst_n, .rfm_postpone, .rfm_ab,
    .req_valid, .req_ready, .req_we, .req_bank, .req_row, .req_col, .req_wdata,
    .resp_valid, .resp_rdata, .resp_corrected, .resp_uncorrectable,
    .scr_valid, .scr_ready, .scr_bank, .scr_row, .scr_col,
    .act_valid, .act_bank, .pre_valid, .pre_bank, .pre_drfm, .pre_vl,
    .rfm_req, .rfm_bi, .rfm_issue, .act_block,
    .cmd, .wr_line, .rd_line, .rd_corrected, .rd_uncorrectable,
    .ev_stall, .ev_demand_scrub, .ev_scrub_read
  );

  assign ev_rfm      = rfm_issue;
  assign ev_drfm_pre = pre_valid && pre_drfm;
  assign ev_drfm_vl  = pre_vl;

  // ---- SDDC encode / decode, one RS(10,8) codeword per beat -----------------------
  logic [BURST-1:0] beat_corr, beat_unc;
  logic [3:0]       beat_err [BURST];

  for (genvar b = 0; b < BURST; b++) begin : g_beat
    logic [39:0] wcode, rcode;
    sddc_encoder u_enc (.data(wr_line[32*b +: 32]), .code(wcode));
    for (genvar k = 0; k < NUM_DRAMS; k++) begin : g_sym
      assign core_wdata[k][4*b +: 4] = wcode[4*k +: 4];
      assign rcode[4*k +: 4]         = core_rdata[k][4*b +: 4];
    end
    sddc_decoder u_dec (.code(rcode), .data(rd_line[32*b +: 32]), .corrected(beat_corr[b]),
                        .err_dram(beat_err[b]), .uncorrectable(beat_unc[b]));
  end

  // A burst is uncorrectable if any beat is, or if beats blame different DRAMs.
  always_comb begin
    logic       mixed;
    logic [3:0] who;
    mixed = 1'b0;
    who   = '0;
    for (int b = BURST - 1; b >= 0; b--) if (beat_corr[b]) who = beat_err[b];
    for (int b = 0; b < BURST; b++) if (beat_corr[b] && beat_err[b] != who) mixed = 1'b1;
    rd_corrected     = |beat_corr;
    rd_uncorrectable = (|beat_unc) || mixed;
    ev_err_dram      = who;
  end

  // ---- the rank of DRAM interfaces ---------------------------------------------
  for (genvar k = 0; k < NUM_DRAMS; k++) begin : g_dram
    logic rfm_busy;
    dram_interface #(.NUM_BANKS(NUM_BANKS), .BANKS_PER_BG(BANKS_PER_BG), .ROW_BITS(ROW_BITS),
                     .COL_BITS(COL_BITS), .ID_W(ID_W), .SHIFT_PER_ID(SHIFT_PER_ID)) u_if (
      .clk, .rst_n, .fuse_id(fuse_id[k]), .prog_en, .prog_id(prog_id[k]), .shift(dram_shift[k]),
      .cmd,
      .core_act(core_act[k]), .core_pre(core_pre[k]), .core_rd(core_rd[k]), .core_wr(core_wr[k]),
      .core_bank(core_bank[k]), .core_row(core_row[k]), .core_col(core_col[k]),
      .core_ref(core_ref[k]), .core_ref_bank(core_ref_bank[k]), .core_ref_row(core_ref_row[k]),
      .rfm_busy
    );
  end

endmodule
