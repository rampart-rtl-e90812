// tb_patrol_scrub: a small rank (2 banks, 4 rows, 4 bursts per row) so that full
// passes fit. Checks the address order (burst, then row, then bank), one request
// per `interval` clocks measured from acceptance, the pass_done pulse after the
// last location, wrap-around to the start, that a request holds while not
// accepted, and that nothing is requested while disabled.
module tb_patrol_scrub;
  timeunit 1ns;
  timeprecision 1ps;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic enable = 0, req_valid, req_ready = 0, pass_done;
  logic [31:0] interval = 5;
  logic req_bank;
  logic [1:0] req_row, req_col;
  int checks = 0, failures = 0;

  patrol_scrub #(.NUM_BANKS(2), .ROW_BITS(2), .COL_BITS(2)) dut (.*);

  task automatic c(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", m); end
  endtask

  int passes = 0;
  always @(posedge clk) if (rst_n && pass_done) passes++;

  initial begin
    int last_acc, cyc, n;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (20) @(negedge clk);
    c(!req_valid, "idle while disabled");
    enable = 1;
    cyc = 0; last_acc = 0; n = 0;
    while (n < 40) begin
      @(negedge clk); cyc++;
      if (req_valid) begin
        int exp;
        exp = n % 32;
        c({req_bank, req_row, req_col} == 5'(exp), $sformatf("address #%0d", n));
        if (n == 3) begin     // hold this one for 3 clocks
          repeat (3) begin @(negedge clk); cyc++; c(req_valid && req_col == 2'd3, "held"); end
        end
        c(n == 0 || cyc - last_acc == 5 || n == 3, $sformatf("spacing %0d", cyc - last_acc));
        req_ready = 1; @(negedge clk); cyc++; req_ready = 0;
        last_acc = cyc;
        n++;
        c(pass_done == (n == 32), "pass_done right after the 32nd location");
      end
    end
    c(passes == 1, "one pass");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
