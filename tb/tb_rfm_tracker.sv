// tb_rfm_tracker: drives BAC values and checks the RFM request (any bank of a
// bank index at or above RAAIMT), round-robin choice among bank indices, the
// decrement mask of an issued RFMsb (the eight banks of that index), the
// all-bank mask of an RFMab (which leaves the round-robin pointer alone), and the
// activate block at 2 x RAAIMT.
module tb_rfm_tracker;
  timeunit 1ns;
  timeprecision 1ps;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic [9:0] bac [32];
  logic [8:0] raaimt;
  logic rfm_req, rfm_issue, rfm_ab;
  logic [1:0] rfm_bi;
  logic [31:0] dec_mask, act_block;
  int checks = 0, failures = 0;

  rfm_tracker dut (.*);

  task automatic c(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin
    raaimt = 24; rfm_issue = 0; rfm_ab = 0;
    for (int b = 0; b < 32; b++) bac[b] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    c(!rfm_req && act_block == 0 && dec_mask == 0, "idle");
    bac[13] = 23; #0.1;
    c(!rfm_req, "23 < RAAIMT");
    bac[13] = 24; #0.1;
    c(rfm_req && rfm_bi == 1, "bank 13 (index 1) at RAAIMT");
    bac[6] = 30; bac[31] = 47; #0.1;
    c(rfm_req && rfm_bi == 1 && act_block == 0, "pointer 0 picks index 1; 47 < 48");
    bac[31] = 48; #0.1;
    c(act_block == 32'h80000000, "bank 31 blocked at 2 x RAAIMT");
    rfm_issue = 1; #0.1;
    c(dec_mask == 32'h22222222, "decrement mask for index 1");
    @(negedge clk); rfm_issue = 0; bac[13] = 0; #0.1;
    c(rfm_req && rfm_bi == 2, "round robin moves to index 2");
    rfm_issue = 1; #0.1;
    c(dec_mask == 32'h44444444, "decrement mask for index 2");
    @(negedge clk); rfm_issue = 0; bac[6] = 0; #0.1;
    c(rfm_req && rfm_bi == 3, "index 3 next");
    bac[4] = 100; #0.1;
    c(rfm_bi == 3, "pointer at 3 keeps 3 before 0");
    rfm_issue = 1; @(negedge clk); rfm_issue = 0; bac[31] = 0; #0.1;
    c(rfm_req && rfm_bi == 0 && act_block == 32'h00000010, "index 0, bank 4 blocked");
    bac[5] = 24; rfm_ab = 1; rfm_issue = 1; #0.1;
    c(dec_mask == 32'hffffffff, "RFMab decrements every bank");
    @(negedge clk); rfm_issue = 0; rfm_ab = 0; #0.1;
    c(rfm_req && rfm_bi == 0, "RFMab leaves the pointer at index 0");
    raaimt = 100; #0.1;
    c(rfm_req && act_block == 0, "RAAIMT 100: 100 requests, not blocked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
