// sddc_decoder: RS(10,8) single-symbol-correcting decoder (SDDC) for one beat.
//
// Syndromes S0 = sum r_i and S1 = sum r_i alpha^i over the ten received 4-bit
// symbols (symbol i from DRAM i). With no error both are zero. A single symbol
// error e at position j gives S0 = e and S1 = e * alpha^j, so j = log(S1) - log(S0)
// (mod 15) and the error value is S0; the decoder adds S0 to symbol j whatever bits
// of it were flipped, i.e. it corrects the complete failure of one DRAM. If exactly
// one syndrome is zero, or j is not a DRAM position (10..14), the word has errors
// in more than one symbol and is flagged uncorrectable; some multi-symbol errors
// alias to a correctable pattern and are miscorrected, as for any RS(10,8) SDDC.
//
// The code is the one of sddc_encoder. Combinational: data, corrected, err_dram
// (position corrected, 0..9) and uncorrectable follow the inputs in the same cycle.
module sddc_decoder
  import rampart_pkg::*;
(
  input  logic [10*4-1:0] code,
  output logic [8*4-1:0]  data,
  output logic            corrected,
  output logic [3:0]      err_dram,
  output logic            uncorrectable
);

  logic [3:0] s0, s1, l0, l1, loc;
  logic [4:0] diff;
  logic [10*4-1:0] fixed;

  always_comb begin
    s0 = '0;
    s1 = '0;
    for (int i = 0; i < 10; i++) begin
      s0 ^= code[4*i +: 4];
      s1 ^= gf_mul(code[4*i +: 4], gf_exp(i));
    end
    l0   = gf_log(s0);
    l1   = gf_log(s1);
    diff = {1'b0, l1} + 5'd15 - {1'b0, l0};
    loc  = (diff >= 5'd15) ? 4'(diff - 5'd15) : diff[3:0];

    fixed         = code;
    corrected     = 1'b0;
    uncorrectable = 1'b0;
    err_dram      = '0;
    if (s0 != '0 && s1 != '0) begin
      if (loc < 4'd10) begin
        corrected = 1'b1;
        err_dram  = loc;
        for (int i = 0; i < 10; i++)
          if (4'(i) == loc) fixed[4*i +: 4] = code[4*i +: 4] ^ s0;
      end else begin
        uncorrectable = 1'b1;
      end
    end else if (s0 != '0 || s1 != '0) begin
      uncorrectable = 1'b1;
    end
    data = fixed[31:0];
  end

endmodule
