// tb_drfm_victim_refresh: saves DRFM targets on precharge and checks the refresh
// list produced by RFMsb and RFMab: rows R-1/R+1 for level 1, R-2/R+2 for level 2,
// only the banks with the RFM's bank index, ascending, rows off the bank edge
// skipped, targets consumed, and two clocks per bank.
module tb_drfm_victim_refresh;
  timeunit 1ns;
  timeprecision 1ps;
  import rampart_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic pre_valid = 0, pre_drfm = 0, rfm_valid = 0, rfm_all = 0, busy, ref_valid;
  logic [4:0] pre_bank = 0, ref_bank;
  logic [15:0] pre_row = 0, ref_row;
  vl_t pre_vl = 1;
  logic [1:0] rfm_bi = 0;
  int checks = 0, failures = 0;

  drfm_victim_refresh dut (.*);

  int got_bank[$], got_row[$];
  always @(posedge clk) if (rst_n && ref_valid) begin got_bank.push_back(int'(ref_bank)); got_row.push_back(int'(ref_row)); end

  task automatic c(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", m); end
  endtask

  task automatic pre(input int b, input int r, input bit d, input int vl);
    @(negedge clk);
    pre_valid = 1; pre_bank = 5'(b); pre_row = 16'(r); pre_drfm = d; pre_vl = vl_t'(vl);
    @(negedge clk);
    pre_valid = 0; pre_drfm = 0;
  endtask

  task automatic rfm(input bit all, input int bi, output int cycles);
    @(negedge clk);
    rfm_valid = 1; rfm_all = all; rfm_bi = 2'(bi);
    @(negedge clk);
    rfm_valid = 0; rfm_all = 0;
    cycles = 0;
    while (busy) begin @(negedge clk); cycles++; end
  endtask

  task automatic expect_list(input int eb[$], input int er[$], input string m);
    c(got_bank.size() == eb.size(), {m, ": count"});
    for (int i = 0; i < eb.size() && i < got_bank.size(); i++)
      c(got_bank[i] == eb[i] && got_row[i] == er[i],
        $sformatf("%s: #%0d bank %0d row %h, expected bank %0d row %h", m, i, got_bank[i], got_row[i], eb[i], er[i]));
    got_bank.delete(); got_row.delete();
  endtask

  int cyc;
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    pre(3, 'h0005, 1, 1);       // bank 3: level 1
    pre(7, 'h0000, 1, 2);       // bank 7: level 2 at the bottom edge
    pre(11, 'hFFFF, 1, 1);      // bank 11: level 1 at the top edge
    pre(15, 'h1234, 0, 1);      // no DRFM
    pre(2, 'h0100, 1, 2);       // bank index 2
    pre(19, 'h0040, 1, 1);      // bank 19 replaced below
    pre(19, 'h0080, 1, 2);
    rfm(0, 3, cyc);
    expect_list('{3, 3, 7, 11, 19, 19}, '{'h0004, 'h0006, 'h0002, 'hFFFE, 'h007E, 'h0082}, "RFMsb bi=3");
    c(cyc == 8, $sformatf("RFMsb busy for 2 clocks per bank (%0d)", cyc));
    rfm(0, 3, cyc);
    expect_list('{}, '{}, "targets consumed");
    pre(20, 'h0300, 1, 1);
    rfm(1, 0, cyc);
    expect_list('{2, 2, 20, 20}, '{'h00FE, 'h0102, 'h02FF, 'h0301}, "RFMab");
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
