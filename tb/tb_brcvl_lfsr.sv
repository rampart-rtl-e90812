// tb_brcvl_lfsr: compares the LFSR with a reference model (x^16+x^14+x^13+x^11+1,
// one new bit per clock) for 70000 clocks, checks that the state never becomes
// zero, and that the period is 65535 (maximal length).
module tb_brcvl_lfsr;
  timeunit 1ns;
  timeprecision 1ps;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic [15:0] rnd, model, first;
  int checks = 0, failures = 0, period = 0;

  brcvl_lfsr dut (.*);

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    model = 16'hACE1;
    checks++;
    if (rnd !== model) begin failures++; $display("FAIL: seed %h", rnd); end
    first = rnd;
    for (int i = 1; i <= 70000; i++) begin
      @(negedge clk);
      model = {model[14:0], model[15] ^ model[13] ^ model[12] ^ model[10]};
      checks++;
      if (rnd !== model || rnd == 0) begin
        failures++;
        $display("FAIL: step %0d %h vs %h", i, rnd, model);
      end
      if (period == 0 && rnd == first) period = i;
    end
    checks++;
    if (period != 65535) begin failures++; $display("FAIL: period %0d", period); end
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
