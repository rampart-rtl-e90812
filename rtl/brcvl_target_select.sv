// brcvl_target_select: BRC-VL target row and victim level selection, all banks.
//
// Each bank counts its activates in RAAIMT windows (the next RAAIMT activates to
// the bank). At the first activate of a window the bank samples the shared 16-bit
// random number, in its own arrangement of the bits, and derives two things:
//   * target index t: which activate of this window is the target row. The low 8
//     bits r[7:0] are scaled to the window size, t = (r[7:0] * RAAIMT) >> 8, which is
//     uniform over 0..RAAIMT-1 when RAAIMT is a power of two and nearly so otherwise;
//   * victim level: level 2 when the high 8 bits scaled the same way equal 0
//     ((r[15:8] * RAAIMT) >> 8 == 0, probability ~1/RAAIMT), else level 1.
// When the t-th activate of the window is issued, the bank is marked; its next
// precharge leaves with the DRFM bit set and the chosen level, so the DRAM saves
// that row as the target of the next RFM. Exactly one target is chosen per window.
//
// Sampling at the window start, up to 8 bits for the target, up to 8 bits compared
// with a fixed value for the level, and a shared generator with a different bit
// arrangement per bank follow the design. The scaling by RAAIMT, the value 0 that
// selects level 2, and the arrangement (rotate left by bank[3:0], bit-reversed for
// banks 16-31) are choices of this design.
//
// Timing: the window state updates at the activate's edge; pre_drfm/pre_vl are
// combinational for the precharge on pre_bank in the same cycle.
module brcvl_target_select
  import rampart_pkg::*;
#(
  parameter int NUM_BANKS = 32,
  parameter int RAAIMT_W  = 9
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [15:0]                  rnd,
  input  logic [RAAIMT_W-1:0]          raaimt,
  input  logic                         act_valid,
  input  logic [$clog2(NUM_BANKS)-1:0] act_bank,
  input  logic                         pre_valid,
  input  logic [$clog2(NUM_BANKS)-1:0] pre_bank,
  output logic                         pre_drfm,
  output vl_t                          pre_vl,
  // observation: the activate this cycle is a selected target, and its level
  output logic                         act_is_target,
  output vl_t                          act_target_vl
);

  logic [RAAIMT_W-1:0] win_cnt [NUM_BANKS];
  logic [7:0]          tgt_idx [NUM_BANKS];
  vl_t                 tgt_vl  [NUM_BANKS];
  logic [NUM_BANKS-1:0] marked;
  vl_t                 mark_vl [NUM_BANKS];

  // sample for the activating bank
  logic [15:0]         r;
  logic [16:0]         t_prod, l_prod;
  logic [7:0]          t_new;
  vl_t                 l_new;
  logic                start;
  logic [7:0]          t_use;
  vl_t                 l_use;
  logic [RAAIMT_W:0]   win_next;

  always_comb begin
    r        = bank_rand(rnd, int'(act_bank));
    t_prod   = 17'(r[7:0])  * 17'(raaimt);
    l_prod   = 17'(r[15:8]) * 17'(raaimt);
    t_new    = t_prod[15:8];
    l_new    = (l_prod[16:8] == '0) ? vl_t'(2) : vl_t'(1);
    start    = (win_cnt[act_bank] == '0);
    t_use    = start ? t_new : tgt_idx[act_bank];
    l_use    = start ? l_new : tgt_vl[act_bank];
    act_is_target = act_valid && ({1'b0, win_cnt[act_bank]} == (RAAIMT_W+1)'(t_use));
    act_target_vl = l_use;
    win_next = {1'b0, win_cnt[act_bank]} + 1'b1;
  end

  assign pre_drfm = pre_valid && marked[pre_bank];
  assign pre_vl   = mark_vl[pre_bank];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      marked <= '0;
      for (int b = 0; b < NUM_BANKS; b++) begin
        win_cnt[b] <= '0;
        tgt_idx[b] <= '0;
        tgt_vl[b]  <= vl_t'(1);
        mark_vl[b] <= vl_t'(1);
      end
    end else begin
      if (pre_valid) marked[pre_bank] <= 1'b0;
      if (act_valid) begin
        if (start) begin
          tgt_idx[act_bank] <= t_new;
          tgt_vl[act_bank]  <= l_new;
        end
        win_cnt[act_bank] <= (win_next >= (RAAIMT_W+1)'(raaimt)) ? '0 : win_next[RAAIMT_W-1:0];
        if (act_is_target) begin
          marked[act_bank]  <= 1'b1;
          mark_vl[act_bank] <= l_use;
        end
      end
    end
  end

endmodule
