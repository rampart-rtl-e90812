// tb_brcvl_target_select: random activates (each followed by its precharge) to 32
// banks with a random number that changes every clock. A reference model keeps
// each bank's window position, re-derives the target index and level from the
// bank's own arrangement of the random bits at the window's first activate, and
// predicts which activate is the target and the DRFM bit and level of the
// following precharge. Also checked: exactly one target per complete window, and
// level 2 chosen in about 1/RAAIMT of the windows (RAAIMT 16 and 24).
module tb_brcvl_target_select;
  timeunit 1ns;
  timeprecision 1ps;
  import rampart_pkg::vl_t;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic [15:0] rnd;
  logic [8:0] raaimt;
  logic act_valid, pre_valid, pre_drfm, act_is_target;
  logic [4:0] act_bank, pre_bank;
  vl_t pre_vl, act_target_vl;
  int checks = 0, failures = 0;

  brcvl_target_select dut (.*);

  // reference arrangement: bit j of bank b's word is bit src(b, j) of rnd
  function automatic logic [15:0] arrange(input logic [15:0] x, input int b);
    logic [15:0] r;
    for (int j = 0; j < 16; j++) begin
      int src, jj;
      jj  = (b >= 16) ? 15 - j : j;        // reversal
      src = (jj - (b % 16) + 16) % 16;      // rotate left by b%16
      r[j] = x[src];
    end
    return r;
  endfunction

  int win [32], tgt [32], lvl [32], tcount [32];
  int windows, l2;

  task automatic c(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", m); end
  endtask

  task automatic run(input int ra, input int n);
    raaimt = 9'(ra);
    windows = 0; l2 = 0;
    for (int b = 0; b < 32; b++) begin win[b] = 0; tcount[b] = 0; end
    // flush: finish every open window first, by the DUT's own state
    for (int i = 0; i < n; i++) begin
      int b, exp_t;
      bit exp_is;
      b = $urandom % 32;
      @(negedge clk);
      rnd = 16'($urandom);
      act_valid = 1; act_bank = 5'(b); pre_valid = 0;
      #0.1;
      if (win[b] == 0) begin
        logic [15:0] r;
        r = arrange(rnd, b);
        tgt[b] = (int'(r[7:0]) * ra) >> 8;
        lvl[b] = (((int'(r[15:8]) * ra) >> 8) == 0) ? 2 : 1;
        windows++;
        if (lvl[b] == 2) l2++;
      end
      exp_is = (win[b] == tgt[b]);
      c(act_is_target == exp_is, $sformatf("bank %0d act %0d target %0d", b, win[b], tgt[b]));
      if (exp_is) begin
        c(int'(act_target_vl) == lvl[b], "target level");
        tcount[b]++;
      end
      win[b]++;
      if (win[b] == ra) begin
        c(tcount[b] == 1, "one target per window");
        win[b] = 0; tcount[b] = 0;
      end
      @(negedge clk);
      act_valid = 0; pre_valid = 1; pre_bank = 5'(b);
      #0.1;
      c(pre_drfm == exp_is, "DRFM bit on the precharge");
      if (exp_is) c(int'(pre_vl) == lvl[b], "level on the precharge");
    end
    @(negedge clk);
    pre_valid = 0;
    $display("RAAIMT %0d: %0d windows, %0d level-2", ra, windows, l2);
    c(l2 * ra > windows / 2 && l2 * ra < windows * 2, "level-2 rate ~ 1/RAAIMT");
  endtask

  initial begin
    act_valid = 0; pre_valid = 0; act_bank = 0; pre_bank = 0; rnd = 0; raaimt = 16;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(16, 40000);
    rst_n = 0; @(negedge clk); rst_n = 1;
    run(24, 40000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
