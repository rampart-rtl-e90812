// tb_rampart_system: end-to-end test of the protected rank at its default sizes
// (10 DRAMs, 32 banks, 16-bit rows, RFM time 364 clocks).
//
// Ten behavioural DRAM cores (hammer count 64) hang off the core ports. Phases:
//  1. fused IDs 0..9 give shifts 0..9;
//  2. RAMPART on: hammering controller row 0x0001 corrupts rows 0x0000/0x0002 in
//     DRAM 0 and 0x8000/0x8001 in DRAM 1; reads of those rows are corrected by SDDC
//     (blaming the right DRAM), written back by demand scrub, and read clean after;
//  3. mode switch: all IDs programmed to 0 (no remapping): the same attack corrupts
//     the victim row in every DRAM and the read is flagged uncorrectable;
//  4. BRC-VL at RAAIMT 16: RFMs, DRFM precharges of both victim levels, and every
//     victim refresh lands at distance 1 or 2 from the permuted target row;
//  5. RFM postponement: a bank reaches 2 x RAAIMT and its activates stall;
//     then all-bank RFMs: one RFM refreshes victims in banks of different bank
//     indices (seen at the core ports);
//  6. patrol scrub finds and repairs a corrupted line with no host read.
// Each mechanism is counted and must happen at least once.
module tb_rampart_system;
  timeunit 1ns;
  timeprecision 1ps;
  import rampart_pkg::*;

  localparam int ND = 10;
  localparam int HC = 64;

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
  int n_rfm = 0, n_drfm = 0, n_vl1 = 0, n_vl2 = 0, n_ref = 0, n_stall = 0;
  int n_demand = 0, n_scrub = 0, n_corr = 0, n_unc = 0, n_bad_ref = 0, n_rfmab = 0, n_ab_phase = 0;
  logic [3:0] ref_idx = '0;
  logic       ab_seen = 1'b0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // reference rotation, written bit by bit
  function automatic logic [15:0] rot(input logic [15:0] x, input int s);
    logic [15:0] r;
    for (int i = 0; i < 16; i++) r[(i + s) % 16] = x[i];
    return r;
  endfunction

  // last activated bank row per DRAM and bank; target saved at DRFM precharge
  logic [15:0] last_row [ND][32];
  logic [15:0] tgt_row  [ND][32];
  int          tgt_vl   [ND][32];

  always @(posedge clk) if (rst_n) begin
    if (ev_rfm) begin
      n_rfm++;
      ref_idx = '0;
      ab_seen = 1'b0;
    end
    // refreshes of one RFM in banks of two bank indices: an all-bank RFM
    if (core_ref[0]) begin
      ref_idx[core_ref_bank[0] % 4] = 1'b1;
      if ($countones(ref_idx) > 1 && !ab_seen) begin
        n_rfmab++;
        ab_seen = 1'b1;
      end
    end
    if (ev_drfm_pre) begin
      n_drfm++;
      if (ev_drfm_vl == 2) n_vl2++; else n_vl1++;
    end
    if (ev_stall) n_stall++;
    if (ev_demand_scrub) n_demand++;
    if (ev_scrub_read) n_scrub++;
    for (int k = 0; k < ND; k++) begin
      if (core_act[k]) last_row[k][core_bank[k]] = core_row[k];
      if (core_pre[k] && ev_drfm_pre) begin
        tgt_row[k][core_bank[k]] = last_row[k][core_bank[k]];
        tgt_vl[k][core_bank[k]]  = int'(ev_drfm_vl);
      end
      if (core_ref[k]) begin
        int t, r;
        n_ref++;
        t = int'(tgt_row[k][core_ref_bank[k]]);
        r = int'(core_ref_row[k]);
        if (!(r == t - tgt_vl[k][core_ref_bank[k]] || r == t + tgt_vl[k][core_ref_bank[k]]))
          n_bad_ref++;
      end
    end
  end

  // ---- host access tasks ------------------------------------------------------------
  logic [511:0] last_data;
  logic         last_corr, last_unc;

  task automatic access(input bit we, input int bank, input int row, input int col,
                        input logic [511:0] data);
    @(negedge clk);
    req_valid = 1'b1; req_we = we; req_bank = 5'(bank); req_row = 16'(row);
    req_col = 7'(col); req_wdata = data;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    @(negedge clk);
    req_valid = 1'b0;
    if (!we) begin
      while (!resp_valid) @(negedge clk);
      last_data = resp_rdata; last_corr = resp_corrected; last_unc = resp_uncorrectable;
      if (resp_corrected) n_corr++;
      if (resp_uncorrectable) n_unc++;
    end
  endtask

  task automatic idle(input int n);
    repeat (n) @(negedge clk);
  endtask

  function automatic logic [511:0] rnd_line();
    logic [511:0] d;
    for (int i = 0; i < 16; i++) d[32*i +: 32] = $urandom;
    return d;
  endfunction

  logic [511:0] d0, d2, d8000, d8001, du, ds;

  initial begin
    raaimt = 9'd256; rfm_postpone = 1'b0; rfm_ab = 1'b0; scrub_en = 1'b0; scrub_interval = 32'd4;
    prog_en = 1'b0; req_valid = 1'b0; req_we = 1'b0; req_bank = '0; req_row = '0;
    req_col = '0; req_wdata = '0;
    for (int k = 0; k < ND; k++) begin fuse_id[k] = 4'(k); prog_id[k] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    idle(3);

    // 1. shifts from the fused IDs
    for (int k = 0; k < ND; k++) check(dram_shift[k] == 4'(k), $sformatf("shift of DRAM %0d", k));

    // 2. attack with RAMPART on
    d0 = rnd_line(); d2 = rnd_line(); d8000 = rnd_line(); d8001 = rnd_line();
    access(1, 3, 'h0000, 5, d0);
    access(1, 3, 'h0002, 5, d2);
    access(1, 3, 'h8000, 5, d8000);
    access(1, 3, 'h8001, 5, d8001);
    access(0, 3, 'h0000, 5, '0);
    check(!last_corr && !last_unc && last_data == d0, "clean read n_before attack");
    for (int i = 0; i < HC + 2; i++) access(0, 3, 'h0001, 0, '0);
    check(flips[0] >= 2 && flips[1] >= 2, "attack flipped rows in DRAM 0 and 1");
    access(0, 3, 'h0000, 5, '0);
    check(last_corr && !last_unc && last_data == d0, "row 0x0000 corrected");
    access(0, 3, 'h0000, 5, '0);
    check(!last_corr && !last_unc && last_data == d0, "row 0x0000 clean after demand scrub");
    access(0, 3, 'h8001, 5, '0);
    check(last_corr && !last_unc && last_data == d8001, "row 0x8001 corrected");
    access(0, 3, 'h8000, 5, '0);
    check(last_corr && !last_unc && last_data == d8000, "row 0x8000 corrected");
    access(0, 3, 'h0002, 5, '0);
    check(last_corr && !last_unc && last_data == d2, "row 0x0002 corrected");
    check(n_demand >= 3, "demand scrubs issued");

    // 3. remapping off: same row address is a victim in every DRAM
    @(negedge clk); prog_en = 1'b1; @(negedge clk); prog_en = 1'b0;
    idle(2);
    for (int k = 0; k < ND; k++) check(dram_shift[k] == 4'd0, "shift cleared");
    du = rnd_line();
    access(1, 7, 'h0100, 1, du);
    for (int i = 0; i < HC + 2; i++) access(0, 7, 'h0101, 0, '0);
    access(0, 7, 'h0100, 1, '0);
    check(last_unc, "without RAMPART the victim is uncorrectable");
    for (int k = 0; k < ND; k++) prog_id[k] = 4'(k);
    @(negedge clk); prog_en = 1'b1; @(negedge clk); prog_en = 1'b0;
    idle(2);
    for (int k = 0; k < ND; k++) check(dram_shift[k] == 4'(k), "shift restored");

    // 4. BRC-VL at RAAIMT 16
    raaimt = 9'd16;
    for (int i = 0; i < 2400; i++)
      access(0, ($urandom % 4) * 4 + 1, 'h1000 + ($urandom % 4096), 0, '0);
    idle(400);

    // 5. postpone RFMs: a bank hammered back to back stalls at 2 x RAAIMT
    rfm_postpone = 1'b1;
    for (int i = 0; i < 80; i++) access(0, 9, 'h2000 + (i % 8) * 16, 0, '0);
    rfm_postpone = 1'b0;
    idle(400);
    begin
      int n_before;
      n_before = n_rfmab;
      rfm_ab = 1'b1;
      for (int i = 0; i < 128; i++) access(0, i % 4, 'h3000 + ($urandom % 4096), 0, '0);
      idle(400);
      rfm_ab = 1'b0;
      check(n_rfmab > n_before, "all-bank RFM refreshed several bank indices");
      n_ab_phase = n_rfmab - n_before;
      idle(400);
    end

    // 6. patrol scrub repairs a corrupted line without a host read
    raaimt = 9'd256;
    idle(400);
    ds = rnd_line();
    access(1, 0, 'h0000, 0, ds);
    for (int i = 0; i < HC + 2; i++) access(0, 0, 'h0001, 3, '0);
    begin
      int n_before;
      n_before = n_demand;
      scrub_en = 1'b1;
      idle(200);
      scrub_en = 1'b0;
      idle(20);
      check(n_demand > n_before, "patrol scrub triggered a write-back");
    end
    access(0, 0, 'h0000, 0, '0);
    check(!last_corr && !last_unc && last_data == ds, "scrubbed line reads clean");

    // mechanism coverage
    $display("rfm=%0d rfmab=%0d drfm=%0d vl1=%0d vl2=%0d refreshes=%0d stall=%0d demand=%0d scrub=%0d corr=%0d unc=%0d",
             n_rfm, n_rfmab, n_drfm, n_vl1, n_vl2, n_ref, n_stall, n_demand, n_scrub, n_corr, n_unc);
    check(n_rfmab == n_ab_phase, "same-bank RFMs stay within one bank index");
    check(n_rfm > 0, "RFMsb issued");
    check(n_vl1 > 0, "level-1 DRFM target");
    check(n_vl2 > 0, "level-2 DRFM target");
    check(n_ref > 0, "victim refreshes");
    check(n_bad_ref == 0, "victim refresh rows at +-level of the permuted target");
    check(n_stall > 0, "activate stall at 2 x RAAIMT");
    check(n_scrub > 0, "patrol scrub reads");
    check(n_corr > 0 && n_unc > 0, "corrected and uncorrectable reads");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
