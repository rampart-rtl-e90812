// tb_attack_models: the two RowHammer attack patterns of the design's security
// analysis, run on the whole rank (rampart_system at its default sizes) with ten
// behavioural DRAM cores.
//
//  * Low-frequency attack: every RAAIMT window of bank 3 holds one activate of the
//    aggressor row R = 0x1000 at a random position and RAAIMT-1 decoy activates to
//    random rows far from R.
//  * High-frequency attack: every activate of the window goes to R.
//
// Each pattern is run for RAAIMT = 16 and 24, with a reset before each run so
// windows start aligned. In DRAM 0 (shift 0) a refresh of bank row R-1 means the
// aggressor was the target at level 1, and a refresh of R-2 means level 2. With N =
// RAAIMT and W windows, the expected counts are:
//   low frequency:  W (N-1)/N^2 level-1 and W/N^2 level-2 refreshes;
//   high frequency: W (N-1)/N level-1 and W/N level-2 refreshes.
// Each count must lie within four standard deviations (binomial) of its mean.
//
// Also checked in every run:
//  * exactly one RFM and one DRFM precharge per window;
//  * every victim refresh in every DRAM lands at +-level from that DRAM's permuted
//    target row;
//  * no activate reaches a DRAM within T_RFM = 364 clocks (tDRFMsb, 130 ns at
//    2.8 GHz) after an RFM.
// The bit flips the cores record are printed as information only. The cores use a
// hammer count of 64, far below that of real DRAMs.
module tb_attack_models;
  timeunit 1ns;
  timeprecision 1ps;
  import rampart_pkg::*;

  localparam int ND    = 10;
  localparam int HC    = 64;
  localparam int T_RFM = 364;
  localparam int BANK  = 3;
  localparam int AGG   = 'h1000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic [8:0]  raaimt;
  logic        rfm_postpone, rfm_ab, scrub_en, prog_en;
  logic [31:0] scrub_interval;
  logic [3:0]  fuse_id [ND], prog_id [ND];
  logic        req_valid, req_ready, req_we;
  logic [4:0]  req_bank;
  logic [15:0] req_row;
  logic [6:0]  req_col;
  logic [511:0] req_wdata, resp_rdata;
  logic        resp_valid, resp_corrected, resp_uncorrectable;
  logic        core_act [ND], core_pre [ND], core_rd [ND], core_wr [ND], core_ref [ND];
  logic [4:0]  core_bank [ND], core_ref_bank [ND];
  logic [15:0] core_row [ND], core_ref_row [ND];
  logic [6:0]  core_col [ND];
  logic [63:0] core_wdata [ND], core_rdata [ND];
  logic [3:0]  dram_shift [ND];
  logic        ev_rfm, ev_drfm_pre, ev_stall, ev_demand_scrub, ev_scrub_read, ev_scrub_pass;
  vl_t         ev_drfm_vl;
  logic [3:0]  ev_err_dram;
  int          flips [ND];

  rampart_system dut (.*);

  for (genvar k = 0; k < ND; k++) begin : g_core
    dram_core_model #(.HC(HC)) u_core (
      .clk, .act(core_act[k]), .rd(core_rd[k]), .wr(core_wr[k]), .bank(core_bank[k]),
      .row(core_row[k]), .col(core_col[k]), .wdata(core_wdata[k]), .rdata(core_rdata[k]),
      .ref_v(core_ref[k]), .ref_bank(core_ref_bank[k]), .ref_row(core_ref_row[k]),
      .flips(flips[k])
    );
  end

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---- monitors ----------------------------------------------------------------------
  int n_rfm, n_drfm, n_l1, n_l2, n_bad_ref, n_early_act, since_rfm;
  logic [15:0] last_row [ND][32];
  logic [15:0] tgt_row  [ND][32];
  int          tgt_vl   [ND][32];

  always @(posedge clk) if (rst_n) begin
    if (ev_rfm) begin
      n_rfm++;
      since_rfm = 0;
    end else if (since_rfm < 1000000) begin
      since_rfm++;
    end
    if (ev_drfm_pre) n_drfm++;
    if (core_act[0] && since_rfm < T_RFM) n_early_act++;
    for (int k = 0; k < ND; k++) begin
      if (core_act[k]) last_row[k][core_bank[k]] = core_row[k];
      if (core_pre[k] && ev_drfm_pre) begin
        tgt_row[k][core_bank[k]] = last_row[k][core_bank[k]];
        tgt_vl[k][core_bank[k]]  = int'(ev_drfm_vl);
      end
      if (core_ref[k]) begin
        int t, r, v;
        t = int'(tgt_row[k][core_ref_bank[k]]);
        v = tgt_vl[k][core_ref_bank[k]];
        r = int'(core_ref_row[k]);
        if (!(r == t - v || r == t + v)) n_bad_ref++;
      end
    end
    if (core_ref[0] && core_ref_bank[0] == 5'(BANK)) begin
      if (core_ref_row[0] == 16'(AGG - 1)) n_l1++;
      if (core_ref_row[0] == 16'(AGG - 2)) n_l2++;
    end
  end

  // ---- host writes (closed page: one activate each) -------------------------------
  task automatic write_row(input int row);
    @(negedge clk);
    req_valid = 1'b1; req_we = 1'b1; req_bank = 5'(BANK); req_row = 16'(row);
    req_col = 7'($urandom_range(127)); req_wdata = '0;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    @(negedge clk);
    req_valid = 1'b0;
  endtask

  // expected count within 4 binomial standard deviations (+1 for small means)
  task automatic rate(input int got, input int w, input real p, input string what);
    real mu, sd;
    mu = w * p;
    sd = $sqrt(w * p * (1.0 - p));
    $display("  %s: %0d (expected %0.1f +- %0.1f)", what, got, mu, sd);
    check(real'(got) >= mu - 4.0 * sd - 1.0 && real'(got) <= mu + 4.0 * sd + 1.0, what);
  endtask

  task automatic run(input bit high_freq, input int n, input int w);
    // reset so that BACs and RAAIMT windows start together
    @(negedge clk);
    rst_n = 1'b0; raaimt = 9'(n);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (3) @(negedge clk);
    n_rfm = 0; n_drfm = 0; n_l1 = 0; n_l2 = 0; n_bad_ref = 0; n_early_act = 0;
    since_rfm = 1000000;
    for (int i = 0; i < w; i++) begin
      int pos;
      pos = $urandom_range(n - 1);
      for (int j = 0; j < n; j++) begin
        if (high_freq || j == pos) write_row(AGG);
        else write_row(int'($urandom_range('h7fff, 'h4000)));
      end
    end
    // let the last RFM finish
    repeat (T_RFM + 50) @(negedge clk);
    $display("%s attack, RAAIMT %0d, %0d windows: rfm=%0d drfm=%0d DRAM 0 flips so far=%0d",
             high_freq ? "high-frequency" : "low-frequency", n, w, n_rfm, n_drfm, flips[0]);
    check(n_rfm == w, "one RFM per window");
    check(n_drfm == w, "one DRFM precharge per window");
    check(n_bad_ref == 0, "victim refreshes at +-level from the permuted target");
    check(n_early_act == 0, "no activate within T_RFM of an RFM");
    if (high_freq) begin
      rate(n_l1, w, real'(n - 1) / real'(n), "aggressor R+-1 refreshed");
      rate(n_l2, w, 1.0 / real'(n), "aggressor R+-2 refreshed");
    end else begin
      rate(n_l1, w, real'(n - 1) / real'(n * n), "aggressor R+-1 refreshed");
      rate(n_l2, w, 1.0 / real'(n * n), "aggressor R+-2 refreshed");
    end
  endtask

  initial begin
    req_valid = 1'b0; req_we = 1'b0; req_bank = '0; req_row = '0; req_col = '0;
    req_wdata = '0; raaimt = 9'd16; rfm_postpone = 1'b0; rfm_ab = 1'b0; scrub_en = 1'b0;
    scrub_interval = 32'd1000; prog_en = 1'b0;
    for (int k = 0; k < ND; k++) begin
      fuse_id[k] = 4'(k); prog_id[k] = '0;
    end
    run(1'b0, 16, 1500);
    run(1'b0, 24, 1500);
    run(1'b1, 16, 600);
    run(1'b1, 24, 600);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (6000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
