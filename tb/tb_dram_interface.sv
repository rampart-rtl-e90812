// tb_dram_interface: one DRAM with fused ID 2 (shift 2). An activate of controller
// row 0x8000 opens bank row 0x0002; reads pass the burst address; a DRFM
// precharge followed by an RFMsb refreshes bank rows 0x0001 and 0x0003 (level 1);
// after an initialisation write of ID 5 a level-2 target at controller row 0x0003
// (bank row 0x0060) refreshes 0x005E and 0x0062.
module tb_dram_interface;
  timeunit 1ns;
  timeprecision 1ps;
  import rampart_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic [3:0] fuse_id = 4'd2, prog_id = 4'd5, shift;
  logic prog_en = 0;
  dram_cmd_t cmd;
  logic core_act, core_pre, core_rd, core_wr, core_ref, rfm_busy;
  logic [4:0] core_bank, core_ref_bank;
  logic [15:0] core_row, core_ref_row;
  logic [6:0] core_col;
  int checks = 0, failures = 0;

  dram_interface dut (.*);

  int refs[$];
  always @(posedge clk) if (rst_n && core_ref) refs.push_back((int'(core_ref_bank) << 16) | int'(core_ref_row));

  task automatic c(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", m); end
  endtask

  task automatic send(input cmd_e op, input int bank, input int row, input int col, input bit drfm, input int vl);
    @(negedge clk);
    cmd = '0; cmd.cmd = op; cmd.bank = 5'(bank); cmd.row = 16'(row); cmd.col = 7'(col);
    cmd.drfm = drfm; cmd.vl = vl_t'(vl);
    #0.1;
  endtask

  initial begin
    cmd = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    c(shift == 4'd2, "shift from fuse");
    send(CMD_ACT, 6, 'h8000, 0, 0, 1);
    c(core_act && core_bank == 6 && core_row == 16'h0002, "ACT permuted");
    send(CMD_RD, 6, 0, 'h55, 0, 1);
    c(core_rd && !core_act && core_col == 7'h55 && core_bank == 6, "RD decoded");
    send(CMD_PRE, 6, 0, 0, 1, 1);
    c(core_pre, "PRE decoded");
    send(CMD_RFMSB, 2, 0, 0, 0, 1);
    send(CMD_NOP, 0, 0, 0, 0, 1);
    repeat (4) @(negedge clk);
    c(refs.size() == 2 && refs[0] == ((6 << 16) | 'h0001) && refs[1] == ((6 << 16) | 'h0003), "level 1 refresh of bank row 2");
    refs.delete();
    prog_en = 1; @(negedge clk); prog_en = 0;
    c(shift == 4'd5, "shift programmed");
    send(CMD_ACT, 1, 'h0003, 0, 0, 1);
    c(core_row == 16'h0060, "ACT permuted by 5");
    send(CMD_WR, 1, 0, 3, 0, 1);
    c(core_wr && core_col == 3, "WR decoded");
    send(CMD_PRE, 1, 0, 0, 1, 2);
    send(CMD_RFMAB, 0, 0, 0, 0, 1);
    send(CMD_NOP, 0, 0, 0, 0, 1);
    repeat (4) @(negedge clk);
    c(refs.size() == 2 && refs[0] == ((1 << 16) | 'h005E) && refs[1] == ((1 << 16) | 'h0062), "level 2 refresh");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
