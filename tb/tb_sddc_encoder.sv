// tb_sddc_encoder: the encoder is systematic (DRAMs 0-7 carry the data) and its
// two check symbols are the only pair that puts random data into the code: the
// test finds that pair by trying all 256 candidates against both parity equations,
// using its own table-driven GF(16) arithmetic.
module tb_sddc_encoder;
  timeunit 1ns;
  timeprecision 1ps;
  logic [31:0] data;
  logic [39:0] code;
  int checks = 0, failures = 0;

  sddc_encoder dut (.*);

  int exp_t [15];
  int log_t [16];

  function automatic int mul(input int a, input int b);
    if (a == 0 || b == 0) return 0;
    return exp_t[(log_t[a] + log_t[b]) % 15];
  endfunction

  initial begin
    int v;
    v = 1;
    for (int i = 0; i < 15; i++) begin
      exp_t[i] = v; log_t[v] = i;
      v = v << 1; if ((v & 16) != 0) v = v ^ 19;   // x^4 + x + 1
    end
    for (int n = 0; n < 3000; n++) begin
      int a, b, sols, c8, c9;
      data = (n == 0) ? 32'h0 : (n == 1) ? 32'hFFFF_FFFF : $urandom;
      #1;
      a = 0; b = 0;
      for (int k = 0; k < 8; k++) begin
        a ^= int'(data[4*k +: 4]);
        b ^= mul(int'(data[4*k +: 4]), exp_t[k]);
      end
      sols = 0; c8 = 0; c9 = 0;
      for (int x = 0; x < 16; x++) for (int y = 0; y < 16; y++)
        if ((a ^ x ^ y) == 0 && (b ^ mul(x, exp_t[8]) ^ mul(y, exp_t[9])) == 0) begin
          sols++; c8 = x; c9 = y;
        end
      checks++;
      if (sols != 1 || code[31:0] != data || int'(code[35:32]) != c8 || int'(code[39:36]) != c9) begin
        failures++;
        if (failures < 10) $display("FAIL: data %h code %h expected checks %h %h", data, code, c8, c9);
      end
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
