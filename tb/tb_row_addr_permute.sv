// tb_row_addr_permute: checks the RAMPART rotation against the worked examples of
// the design (0x8000 by 2 -> 0x0002; 0x0001 by 1, 2, 9 -> 0x0002, 0x0004, 0x0200;
// the controller addresses that land in bank row 0x0001 for shifts 1, 2, 9) and
// against a bit-by-bit reference rotation for random addresses and all shifts.
module tb_row_addr_permute;
  timeunit 1ns;
  timeprecision 1ps;
  logic [15:0] ctrl_row, bank_row;
  logic [3:0]  shift;
  int checks = 0, failures = 0;

  row_addr_permute dut (.*);

  function automatic logic [15:0] ref_rot(input logic [15:0] x, input int s);
    logic [15:0] r;
    for (int i = 0; i < 16; i++) r[(i + s) % 16] = x[i];
    return r;
  endfunction

  task automatic t(input logic [15:0] a, input int s, input logic [15:0] exp);
    ctrl_row = a; shift = 4'(s);
    #1;
    checks++;
    if (bank_row !== exp) begin
      failures++;
      $display("FAIL: %h << %0d = %h, expected %h", a, s, bank_row, exp);
    end
  endtask

  initial begin
    t(16'h8000, 2, 16'h0002);
    t(16'h0001, 0, 16'h0001);
    t(16'h0001, 1, 16'h0002);
    t(16'h0001, 2, 16'h0004);
    t(16'h8000, 1, 16'h0001);
    t(16'h4000, 2, 16'h0001);
    t(16'h0080, 9, 16'h0001);
    t(16'h8001, 1, 16'h0003);
    t(16'h0000, 7, 16'h0000);
    t(16'hFFFF, 5, 16'hFFFF);
    for (int i = 0; i < 2000; i++) begin
      logic [15:0] a;
      int s;
      a = 16'($urandom);
      s = i % 16;
      t(a, s, ref_rot(a, s));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
