// tb_mc_sequencer: command sequences of the closed-page sequencer, with the
// selection logic and the SDDC decoder played by the testbench (RFM time 8,
// all-bank RFM time 12).
// Checked: write = ACT, WR (with the line), PRE; read = ACT, RD, one clock, PRE,
// with the response three clocks after acceptance; the PRE carries the DRFM bit and
// level it is given; a corrected read is followed by a write-back of the corrected
// line (demand scrub), an uncorrectable one is not; an RFM request produces an
// RFMsb with the requested bank index and an 8-clock pause, or with rfm_ab an
// RFMab and a 12-clock pause; host before scrub;
// with postponement an RFM waits behind a request to an open bank and a request
// to a blocked bank stalls until the RFM has been issued.
module tb_mc_sequencer;
  timeunit 1ns;
  timeprecision 1ps;
  import rampart_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic rfm_postpone = 0, rfm_ab = 0, req_valid = 0, req_ready, req_we = 0;
  logic [4:0] req_bank = 0, scr_bank = 0, act_bank, pre_bank;
  logic [15:0] req_row = 0, scr_row = 0;
  logic [6:0] req_col = 0, scr_col = 0;
  logic [511:0] req_wdata = 0, resp_rdata, wr_line, rd_line = 0;
  logic resp_valid, resp_corrected, resp_uncorrectable;
  logic scr_valid = 0, scr_ready, act_valid, pre_valid, pre_drfm = 0, rfm_req = 0, rfm_issue;
  vl_t pre_vl = 1;
  logic [1:0] rfm_bi = 0;
  logic [31:0] act_block = 0;
  dram_cmd_t cmd;
  logic rd_corrected = 0, rd_uncorrectable = 0, ev_stall, ev_demand_scrub, ev_scrub_read;
  int checks = 0, failures = 0, cyc = 0, stalls = 0;

  mc_sequencer #(.T_RFM(8), .T_RFM_AB(12)) dut (.*);

  typedef struct { int t; dram_cmd_t c; logic [511:0] w; } ent_t;
  ent_t log_q[$];
  int acc_t, resp_t;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (cmd.cmd != CMD_NOP) log_q.push_back('{cyc, cmd, wr_line});
    if (req_ready) acc_t = cyc;
    if (resp_valid) resp_t = cyc;
    if (ev_stall) stalls++;
    if (cmd.cmd == CMD_ACT && !(act_valid && act_bank == cmd.bank)) begin failures++; $display("FAIL: act_valid"); end
    if (cmd.cmd == CMD_PRE && !(pre_valid && pre_bank == cmd.bank)) begin failures++; $display("FAIL: pre_valid"); end
  end

  task automatic c(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", m); end
  endtask

  task automatic host(input bit we, input int b, input int r, input int col, input logic [511:0] d);
    @(negedge clk);
    req_valid = 1; req_we = we; req_bank = 5'(b); req_row = 16'(r); req_col = 7'(col); req_wdata = d;
    @(posedge clk); while (!req_ready) @(posedge clk);
    @(negedge clk); req_valid = 0;
  endtask

  task automatic expect_cmd(input int i, input cmd_e op, input int bank, input int dt, input string m);
    c(log_q.size() > i && log_q[i].c.cmd == op && int'(log_q[i].c.bank) == bank &&
      (dt < 0 || log_q[i].t - log_q[0].t == dt), $sformatf("%s: command %0d", m, i));
  endtask

  logic [511:0] d1, d2;
  initial begin
    d1 = {16{32'hDEAD_0001}}; d2 = {16{32'h1234_5678}};
    repeat (2) @(negedge clk);
    rst_n = 1;
    // write
    pre_drfm = 1; pre_vl = 2;
    host(1, 9, 'h4321, 7, d1);
    repeat (4) @(negedge clk);
    expect_cmd(0, CMD_ACT, 9, 0, "write"); expect_cmd(1, CMD_WR, 9, 1, "write"); expect_cmd(2, CMD_PRE, 9, 2, "write");
    c(log_q[0].c.row == 16'h4321 && log_q[1].c.col == 7 && log_q[1].w == d1, "write address and data");
    c(log_q[2].c.drfm && log_q[2].c.vl == 2, "PRE carries DRFM and level 2");
    log_q.delete();
    // read, corrected -> demand scrub
    pre_drfm = 0;
    rd_line = d2; rd_corrected = 1;
    host(0, 4, 'h0042, 3, '0);
    repeat (10) @(negedge clk);
    rd_corrected = 0;
    c(resp_t - acc_t == 3 && resp_rdata == d2 && resp_corrected, "read response 3 clocks after acceptance");
    expect_cmd(0, CMD_ACT, 4, 0, "read"); expect_cmd(1, CMD_RD, 4, 1, "read"); expect_cmd(2, CMD_PRE, 4, 3, "read");
    c(!log_q[2].c.drfm, "PRE without DRFM");
    expect_cmd(3, CMD_ACT, 4, 4, "demand scrub"); expect_cmd(4, CMD_WR, 4, 5, "demand scrub");
    expect_cmd(5, CMD_PRE, 4, 6, "demand scrub");
    c(log_q.size() == 6 && log_q[3].c.row == 16'h0042 && log_q[4].c.col == 3 && log_q[4].w == d2, "write-back of corrected line");
    log_q.delete();
    // uncorrectable: no write-back
    rd_uncorrectable = 1; rd_corrected = 1;
    host(0, 4, 'h0043, 3, '0);
    repeat (10) @(negedge clk);
    rd_uncorrectable = 0; rd_corrected = 0;
    c(log_q.size() == 3 && resp_uncorrectable, "uncorrectable read: no write-back");
    log_q.delete();
    // RFM
    rfm_req = 1; rfm_bi = 2;
    @(negedge clk); @(negedge clk);
    rfm_req = 0;
    host(0, 1, 1, 1, '0);
    repeat (6) @(negedge clk);
    expect_cmd(0, CMD_RFMSB, 2, 0, "RFMsb"); expect_cmd(1, CMD_ACT, 1, 9, "ACT after T_RFM");
    log_q.delete();
    // all-bank RFM
    rfm_ab = 1; rfm_req = 1; rfm_bi = 3;
    @(negedge clk); @(negedge clk);
    rfm_req = 0; rfm_ab = 0;
    host(0, 1, 1, 1, '0);
    repeat (6) @(negedge clk);
    expect_cmd(0, CMD_RFMAB, 0, 0, "RFMab"); expect_cmd(1, CMD_ACT, 1, 13, "ACT after T_RFM_AB");
    log_q.delete();
    // host before scrub; scrub read
    @(negedge clk);
    scr_valid = 1; scr_bank = 5'd7; scr_row = 16'h0700; scr_col = 7'd1;
    req_valid = 1; req_we = 0; req_bank = 5'd2; req_row = 16'h0200;
    #0.1; c(req_ready && !scr_ready, "host first");
    @(negedge clk); req_valid = 0;
    @(posedge clk); while (!scr_ready) @(posedge clk);
    @(negedge clk); scr_valid = 0;
    repeat (6) @(negedge clk);
    c(log_q.size() == 6 && log_q[0].c.bank == 2 && log_q[3].c.bank == 7 && log_q[3].c.row == 16'h0700, "scrub after host");
    log_q.delete();
    // postponed RFM: request to an open bank goes first
    rfm_postpone = 1; rfm_bi = 0;
    @(negedge clk);
    rfm_req = 1; req_valid = 1; req_we = 0; req_bank = 5'd3; req_row = 16'd5;
    @(posedge clk); while (!req_ready) @(posedge clk);
    @(negedge clk); req_valid = 0;
    repeat (2) @(negedge clk);
    c(log_q[0].c.cmd == CMD_ACT, "postponed RFM waits behind a request");
    // blocked bank: stall, then RFM
    act_block = 32'h8;
    @(negedge clk);
    req_valid = 1; req_bank = 5'd3;
    repeat (5) @(negedge clk);
    c(stalls > 0, "request to a blocked bank stalls");
    c(log_q[$].c.cmd == CMD_RFMSB, "RFM issued for the blocked bank");
    rfm_req = 0; act_block = 0;
    @(posedge clk); while (!req_ready) @(posedge clk);
    @(negedge clk); req_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
