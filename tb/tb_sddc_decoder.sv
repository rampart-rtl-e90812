// tb_sddc_decoder: encodes random data (with sddc_encoder), then
//  * no error: data out, no flags;
//  * one DRAM's symbol replaced by any other value (a whole-DRAM failure): data
//    corrected, the right DRAM blamed, not uncorrectable;
//  * two DRAMs' symbols corrupted: never reported as clean (distance 3); counts
//    how often the result is flagged uncorrectable rather than miscorrected.
module tb_sddc_decoder;
  timeunit 1ns;
  timeprecision 1ps;
  logic [31:0] data, dout;
  logic [39:0] code, rx;
  logic corrected, uncorrectable;
  logic [3:0] err_dram;
  int checks = 0, failures = 0, det2 = 0, n2 = 0;

  sddc_encoder enc (.data, .code);
  sddc_decoder dut (.code(rx), .data(dout), .corrected, .err_dram, .uncorrectable);

  task automatic c(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", m); end
  endtask

  initial begin
    for (int n = 0; n < 4000; n++) begin
      int p, q;
      logic [3:0] e, f;
      data = $urandom;
      #1;
      rx = code; #1;
      c(dout == data && !corrected && !uncorrectable, "clean word");
      p = $urandom % 10;
      e = 4'(1 + $urandom % 15);
      rx = code; rx[4*p +: 4] ^= e; #1;
      c(dout == data && corrected && !uncorrectable && int'(err_dram) == p,
        $sformatf("single error in DRAM %0d", p));
      q = (p + 1 + $urandom % 9) % 10;
      f = 4'(1 + $urandom % 15);
      rx[4*q +: 4] ^= f; #1;
      c(corrected || uncorrectable, "double error not silent");
      n2++;
      if (uncorrectable) det2++;
    end
    $display("double-symbol errors flagged uncorrectable: %0d of %0d", det2, n2);
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
