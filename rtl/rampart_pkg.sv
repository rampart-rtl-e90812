// rampart_pkg: types, sizes and small functions shared by the RAMPART / BRC-VL
// memory system RTL.
//
// Sizes follow the example system of the design: 16-bit row addresses, a rank of
// ten x4 DRAMs (eight for data, two for check symbols), 4-bit Reed-Solomon symbols,
// burst length 16, 32 banks per rank arranged as 8 bank groups of 4 banks, and an
// RAAIMT window of at most 256 activates. The column width, the command encoding
// and the field layout of the command bundle are choices of this design.
//
// Also here: GF(16) arithmetic (primitive polynomial x^4 + x + 1) for the SDDC
// code, and the per-bank rearrangement of the shared random number.
package rampart_pkg;

  // ---- command bundle field widths ------------------------------------------------
  // Module parameters (ROW_BITS, NUM_BANKS, COL_BITS, ...) default to the same sizes;
  // these widths fix the shared command bundle.
  localparam int CMD_ROW_W    = 16;   // controller row address width
  localparam int CMD_BANK_W   = 5;    // 32 banks per rank
  localparam int CMD_COL_W    = 7;    // burst (column) address, 128 bursts per row
  localparam int VL_W         = 2;    // victim level number (1 or 2 used)
  localparam int RAND_W       = 16;   // shared LFSR width

  // ---- SDDC data layout ------------------------------------------------------------
  localparam int SYM_W        = 4;    // RS symbol = 4 DQ bits of one beat
  localparam int BURST        = 16;   // burst length
  localparam int DRAM_BURST_W = SYM_W * BURST;  // 64 bits per DRAM per access
  localparam int LINE_BITS    = 8 * DRAM_BURST_W; // 64-byte line from 8 data DRAMs

  typedef logic [CMD_ROW_W-1:0]  row_t;
  typedef logic [CMD_BANK_W-1:0] bank_t;
  typedef logic [CMD_COL_W-1:0]  col_t;
  typedef logic [VL_W-1:0]       vl_t;

  typedef enum logic [2:0] {
    CMD_NOP   = 3'd0,
    CMD_ACT   = 3'd1,
    CMD_RD    = 3'd2,
    CMD_WR    = 3'd3,
    CMD_PRE   = 3'd4,   // precharge; drfm/vl fields valid
    CMD_RFMSB = 3'd5,   // same-bank RFM: bank[1:0] selects the bank in every group
    CMD_RFMAB = 3'd6    // all-bank RFM
  } cmd_e;

  // Command bundle sent from the controller to every DRAM of the rank.
  typedef struct packed {
    cmd_e  cmd;
    bank_t bank;
    row_t  row;   // controller row address (ACT)
    col_t  col;   // burst address (RD/WR)
    logic  drfm;  // PRE: save this bank's open row as DRFM target
    vl_t   vl;    // PRE: victim level to refresh at the next RFM
  } dram_cmd_t;

  // ---- GF(16), x^4 + x + 1 ------------------------------------------------------
  function automatic logic [3:0] gf_mul(input logic [3:0] a, input logic [3:0] b);
    logic [3:0] p, aa;
    p  = '0;
    aa = a;
    for (int i = 0; i < 4; i++) begin
      if (b[i]) p ^= aa;
      aa = {aa[2:0], 1'b0} ^ (aa[3] ? 4'b0011 : 4'b0000);
    end
    return p;
  endfunction

  // alpha^e, alpha = 2
  function automatic logic [3:0] gf_exp(input int e);
    logic [3:0] v;
    v = 4'd1;
    for (int i = 0; i < (e % 15); i++) v = gf_mul(v, 4'd2);
    return v;
  endfunction

  // discrete log of a non-zero element (0..14); 0 maps to 15
  function automatic logic [3:0] gf_log(input logic [3:0] a);
    logic [3:0] l;
    l = 4'd15;
    for (int i = 0; i < 15; i++) if (gf_exp(i) == a) l = 4'(i);
    return l;
  endfunction

  // ---- helpers --------------------------------------------------------------------
  function automatic logic [RAND_W-1:0] rotl16(input logic [RAND_W-1:0] x, input int s);
    logic [2*RAND_W-1:0] d;
    d = {x, x} << (s % RAND_W);
    return d[2*RAND_W-1 -: RAND_W];
  endfunction

  function automatic logic [RAND_W-1:0] bitrev16(input logic [RAND_W-1:0] x);
    logic [RAND_W-1:0] r;
    for (int i = 0; i < RAND_W; i++) r[i] = x[RAND_W-1-i];
    return r;
  endfunction

  // Unique arrangement of the shared random bits for bank b: rotate left by b[3:0],
  // and bit-reverse as well for banks 16..31.
  function automatic logic [RAND_W-1:0] bank_rand(input logic [RAND_W-1:0] x, input int b);
    logic [RAND_W-1:0] r;
    r = rotl16(x, b % 16);
    return ((b / 16) % 2 == 1) ? bitrev16(r) : r;
  endfunction

endpackage
