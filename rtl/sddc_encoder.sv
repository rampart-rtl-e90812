// sddc_encoder: RS(10,8) encoder over 4-bit symbols for Single Device Data
// Correction (chipkill) on a rank of ten x4 DRAMs.
//
// Each beat of a burst carries one codeword: the 4 DQ bits of DRAM k form symbol
// k. DRAMs 0-7 carry data symbols S0-S7 and DRAMs 8 and 9 carry check symbols C0
// and C1, so any corruption confined to one DRAM is one symbol error, which the
// code corrects. The code is the Reed-Solomon code over GF(16) (x^4 + x + 1,
// alpha = 2) with roots 1 and alpha: every codeword c satisfies
//   sum_i c_i = 0   and   sum_i c_i * alpha^i = 0,   i = 0..9 (i = DRAM number).
// With A = sum_{k<8} d_k and B = sum_{k<8} d_k alpha^k the checks are
//   c8 = alpha^3 * B + alpha^12 * A,   c9 = A + c8.
// RS(10,8) with 4-bit symbols, one symbol per DRAM per beat, follows the design;
// the field polynomial, the roots and the symbol positions are this design's.
//
// Purely combinational.
module sddc_encoder
  import rampart_pkg::*;
(
  input  logic [8*4-1:0]  data,   // symbol k = data[4k+3:4k]
  output logic [10*4-1:0] code    // symbol k of DRAM k; code[31:0] == data
);

  logic [3:0] a, b, c8;

  always_comb begin
    a = '0;
    b = '0;
    for (int k = 0; k < 8; k++) begin
      a ^= data[4*k +: 4];
      b ^= gf_mul(data[4*k +: 4], gf_exp(k));
    end
    c8   = gf_mul(b, gf_exp(3)) ^ gf_mul(a, gf_exp(12));
    code = {a ^ c8, c8, data};
  end

endmodule
