// tb_bank_activate_counters: random activates and RFM decrements against a
// reference count per bank (decrement by RAAIMT, floored at zero, applied after
// the activate of the same cycle), for RAAIMT values 16, 24 and 100.
module tb_bank_activate_counters;
  timeunit 1ns;
  timeprecision 1ps;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic act_valid;
  logic [4:0] act_bank;
  logic [31:0] dec_mask;
  logic [8:0] raaimt;
  logic [9:0] bac [32];
  int model [32];
  int checks = 0, failures = 0;

  bank_activate_counters dut (.*);

  initial begin
    act_valid = 0; act_bank = 0; dec_mask = 0; raaimt = 16;
    for (int b = 0; b < 32; b++) model[b] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 6000; i++) begin
      raaimt = (i < 2000) ? 9'd16 : (i < 4000) ? 9'd24 : 9'd100;
      act_valid = ($urandom % 4) != 0;
      act_bank  = 5'($urandom % 8);
      dec_mask  = (($urandom % 40) == 0) ? (32'h11111111 << ($urandom % 4)) : 32'h0;
      @(negedge clk);
      for (int b = 0; b < 32; b++) begin
        if (act_valid && act_bank == 5'(b)) model[b]++;
        if (dec_mask[b]) model[b] = (model[b] > int'(raaimt)) ? model[b] - int'(raaimt) : 0;
        checks++;
        if (int'(bac[b]) != model[b]) begin
          failures++;
          if (failures < 10) $display("FAIL: cycle %0d bank %0d bac %0d model %0d", i, b, bac[b], model[b]);
          model[b] = int'(bac[b]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
