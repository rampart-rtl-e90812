// tb_brcvl_selection_logic: the four parts together at RAAIMT 16. Activates (each
// with its precharge) go to bank 5 only. Checked: one DRFM precharge per 16
// activates; an RFM request for bank index 1 once the BAC reaches 16; the bank is
// blocked at 32 activates; issuing the RFMsb drops the BAC by 16 and lifts the
// block; BACs of other banks stay at zero; an RFMab (rfm_ab set) lowers the BACs
// of banks in different bank indices at once.
module tb_brcvl_selection_logic;
  timeunit 1ns;
  timeprecision 1ps;
  import rampart_pkg::vl_t;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic [8:0] raaimt = 16;
  logic act_valid = 0, pre_valid = 0, pre_drfm, rfm_req, rfm_issue = 0, rfm_ab = 0, act_is_target;
  logic [4:0] act_bank = 0, pre_bank = 0;
  logic [1:0] rfm_bi;
  logic [31:0] act_block;
  vl_t pre_vl, act_target_vl;
  logic [9:0] bac [32];
  int checks = 0, failures = 0, drfm = 0;

  brcvl_selection_logic dut (.*);

  task automatic c(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", m); end
  endtask

  task automatic actpre(input int b);
    @(negedge clk); act_valid = 1; act_bank = 5'(b);
    @(negedge clk); act_valid = 0; pre_valid = 1; pre_bank = 5'(b);
    #0.1; if (pre_drfm) drfm++;
    @(negedge clk); pre_valid = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 15; i++) actpre(5);
    c(!rfm_req && bac[5] == 15, "15 activates: no RFM yet");
    actpre(5);
    c(rfm_req && rfm_bi == 1 && bac[5] == 16, "RFM needed at 16");
    c(drfm == 1, "one DRFM target in the first window");
    for (int i = 0; i < 15; i++) actpre(5);
    c(act_block == 0, "31: not blocked");
    actpre(5);
    c(act_block == 32'h20, "32: bank 5 blocked");
    c(drfm == 2, "one DRFM target per window");
    @(negedge clk); rfm_issue = 1; @(negedge clk); rfm_issue = 0;
    c(bac[5] == 16 && act_block == 0 && rfm_req, "RFMsb lowers BAC by RAAIMT");
    @(negedge clk); rfm_issue = 1; @(negedge clk); rfm_issue = 0;
    c(bac[5] == 0 && !rfm_req, "second RFMsb clears");
    for (int b = 0; b < 32; b++) if (b != 5) c(bac[b] == 0, "other BACs untouched");
    for (int i = 0; i < 10; i++) actpre(2);
    for (int i = 0; i < 20; i++) actpre(5);
    c(rfm_req && rfm_bi == 1 && bac[2] == 10 && bac[5] == 20, "two banks counting");
    @(negedge clk); rfm_ab = 1; rfm_issue = 1; @(negedge clk); rfm_issue = 0; rfm_ab = 0;
    c(bac[2] == 0 && bac[5] == 4 && !rfm_req, "RFMab lowers the BACs of all banks");
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
