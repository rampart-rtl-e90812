// shift_value_reg: the RAMPART shift value of one DRAM.
//
// Each DRAM of a rank needs its own shift. The shift is derived from a unique DRAM
// ID as ID x SHIFT_PER_ID (mod ROW_BITS): one bit per ID step gives immediate
// neighbours that are unique per DRAM; two bits per ID step suits a blast radius
// of two. The ID comes from fuses (fuse_id, loaded at reset) or can be written
// during initialisation (prog_en/prog_id, like a mode-register write), which then
// replaces the fused value. That split between fuse and programming port, and the
// one-cycle register, are choices of this design.
//
// Timing: reset clears the shift; the fused ID is loaded on the first clock after
// reset is released, and a prog_en pulse takes effect at the next clock edge.
module shift_value_reg #(
  parameter int ROW_BITS     = 16,
  parameter int SHIFT_W      = $clog2(ROW_BITS),
  parameter int ID_W         = 4,
  parameter int SHIFT_PER_ID = 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [ID_W-1:0]    fuse_id,
  input  logic               prog_en,
  input  logic [ID_W-1:0]    prog_id,
  output logic [ID_W-1:0]    id,
  output logic [SHIFT_W-1:0] shift
);

  function automatic logic [SHIFT_W-1:0] id2shift(input logic [ID_W-1:0] i);
    return SHIFT_W'((int'(i) * SHIFT_PER_ID) % ROW_BITS);
  endfunction

  logic loaded;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      loaded <= 1'b0;
      id     <= '0;
      shift  <= '0;
    end else if (prog_en) begin
      loaded <= 1'b1;
      id     <= prog_id;
      shift  <= id2shift(prog_id);
    end else if (!loaded) begin
      loaded <= 1'b1;
      id     <= fuse_id;
      shift  <= id2shift(fuse_id);
    end
  end

endmodule
