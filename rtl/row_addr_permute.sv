// row_addr_permute: RAMPART row address permutation.
//
// The controller row address is rotated (circularly shifted) left by the DRAM's
// shift value; the result is the row used inside the bank. With a different shift
// in every DRAM of a rank, two controller row addresses are physical neighbours in
// at most one DRAM, so the victims of a hammered row are different controller
// addresses in each DRAM and their bit flips stay within one ECC symbol position.
// Example: 0x8000 rotated left by 2 gives bank row 0x0002.
//
// The rotator is a log-depth barrel shifter: stage k rotates by 2^k when bit k of
// the shift value is set. It is purely combinational, so the permutation adds no
// register stage to the activate path (the design places it where repaired rows are
// already remapped). Rotation as the permutation follows the design; the barrel
// structure is this implementation's choice.
//
// Interface: ctrl_row (controller row), shift (0..ROW_BITS-1) -> bank_row.
module row_addr_permute #(
  parameter int ROW_BITS = 16,
  parameter int SHIFT_W  = $clog2(ROW_BITS)
) (
  input  logic [ROW_BITS-1:0] ctrl_row,
  input  logic [SHIFT_W-1:0]  shift,
  output logic [ROW_BITS-1:0] bank_row
);

  logic [ROW_BITS-1:0] stage [SHIFT_W+1];

  always_comb begin
    stage[0] = ctrl_row;
    for (int k = 0; k < SHIFT_W; k++) begin
      if (shift[k])
        stage[k+1] = (stage[k] << (2**k)) | (stage[k] >> (ROW_BITS - 2**k));
      else
        stage[k+1] = stage[k];
    end
  end

  assign bank_row = stage[SHIFT_W];

endmodule
