// patrol_scrub: background patrol scrub address generator.
//
// Patrol scrub reads every location of the rank once per scrub pass so that the
// SDDC decoder sees, corrects and (through the controller's demand scrub) writes
// back any error, undoing the damage of a single successful RowHammer attack
// before a second one can land on the same address. The accesses are spread over
// the pass: one scrub read is requested every `interval` clocks. The address walks
// the burst address fastest, then the row, then the bank, in controller address
// space. pass_done pulses when the last location of a pass has been accepted.
//
// Reading all locations periodically follows the design; the address order, the
// fixed spacing and the request handshake are this design's choices.
//
// Handshake: req_valid stays high with a stable address until req_ready; the
// interval counter restarts at acceptance.
module patrol_scrub #(
  parameter int NUM_BANKS = 32,
  parameter int ROW_BITS  = 16,
  parameter int COL_BITS  = 7,
  parameter int IVL_W     = 32
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         enable,
  input  logic [IVL_W-1:0]             interval,
  output logic                         req_valid,
  input  logic                         req_ready,
  output logic [$clog2(NUM_BANKS)-1:0] req_bank,
  output logic [ROW_BITS-1:0]          req_row,
  output logic [COL_BITS-1:0]          req_col,
  output logic                         pass_done
);

  localparam int BW = $clog2(NUM_BANKS);

  logic [IVL_W-1:0] timer;
  logic             last;

  assign last = (req_col == '1) && (req_row == '1) && (req_bank == BW'(NUM_BANKS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      timer     <= '0;
      req_valid <= 1'b0;
      req_bank  <= '0;
      req_row   <= '0;
      req_col   <= '0;
      pass_done <= 1'b0;
    end else begin
      pass_done <= 1'b0;
      if (req_valid) begin
        if (req_ready) begin
          req_valid <= 1'b0;
          timer     <= '0;
          pass_done <= last;
          if (last) begin
            req_bank <= '0;
            req_row  <= '0;
            req_col  <= '0;
          end else if (req_col != '1) begin
            req_col <= req_col + 1'b1;
          end else begin
            req_col <= '0;
            if (req_row != '1) req_row <= req_row + 1'b1;
            else begin
              req_row  <= '0;
              req_bank <= req_bank + 1'b1;
            end
          end
        end
      end else if (enable) begin
        if (timer + 1'b1 >= interval) req_valid <= 1'b1;
        else                          timer     <= timer + 1'b1;
      end
    end
  end

endmodule
