// tb_shift_value_reg: the shift value follows the fused ID after reset (1 bit per
// ID step, and 2 bits per step in a second instance, modulo 16), and an
// initialisation write replaces it.
module tb_shift_value_reg;
  timeunit 1ns;
  timeprecision 1ps;
  logic clk = 0, rst_n = 0, prog_en = 0;
  logic [3:0] fuse_id, prog_id, id1, id2, shift1, shift2;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  shift_value_reg dut1 (.clk, .rst_n, .fuse_id, .prog_en, .prog_id, .id(id1), .shift(shift1));
  shift_value_reg #(.SHIFT_PER_ID(2)) dut2 (.clk, .rst_n, .fuse_id, .prog_en, .prog_id, .id(id2), .shift(shift2));

  task automatic c(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin
    fuse_id = 4'd9; prog_id = 4'd3;
    repeat (2) @(negedge clk);
    c(shift1 == 0, "shift 0 in reset");
    rst_n = 1;
    @(negedge clk);
    c(shift1 == 4'd9 && id1 == 4'd9, "fused ID 9 -> shift 9");
    c(shift2 == 4'd2, "fused ID 9, 2 bits per ID -> shift 18 mod 16 = 2");
    fuse_id = 4'd5;
    @(negedge clk);
    c(shift1 == 4'd9, "fuse sampled once");
    prog_en = 1; @(negedge clk); prog_en = 0;
    c(shift1 == 4'd3 && shift2 == 4'd6, "programmed ID 3");
    for (int i = 0; i < 16; i++) begin
      prog_id = 4'(i);
      prog_en = 1; @(negedge clk); prog_en = 0;
      c(shift1 == 4'(i) && shift2 == 4'((2 * i) % 16), $sformatf("programmed ID %0d", i));
    end
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
