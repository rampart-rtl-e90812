// bank_activate_counters: Bank Activate Counters (BACs) of the controller.
//
// One counter per bank counts the activates issued to it. An RFM decrements the
// counters of the banks it covers by RAAIMT, to a minimum of zero; ordinary
// refreshes leave them alone. The rfm tracker watches these counts to decide when
// an RFM is due and when a bank must stop taking activates.
//
// Counting and the decrement rule follow the design; the counter width (enough for
// twice the largest RAAIMT of 256, saturating) is this design's choice. An activate
// and a decrement to the same bank in one cycle are both applied.
//
// Interface: act_valid/act_bank (one activate per cycle), dec_mask (banks covered
// by an RFM issued this cycle), raaimt; bac[] is the registered count.
module bank_activate_counters #(
  parameter int NUM_BANKS = 32,
  parameter int BAC_W     = 10,
  parameter int RAAIMT_W  = 9
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         act_valid,
  input  logic [$clog2(NUM_BANKS)-1:0] act_bank,
  input  logic [NUM_BANKS-1:0]         dec_mask,
  input  logic [RAAIMT_W-1:0]          raaimt,
  output logic [BAC_W-1:0]             bac [NUM_BANKS]
);

  localparam logic [BAC_W:0] SAT = {1'b0, {BAC_W{1'b1}}};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < NUM_BANKS; b++) bac[b] <= '0;
    end else begin
      for (int b = 0; b < NUM_BANKS; b++) begin
        logic [BAC_W:0] v;
        v = {1'b0, bac[b]};
        if (act_valid && act_bank == b[$clog2(NUM_BANKS)-1:0] && v != SAT) v = v + 1'b1;
        if (dec_mask[b]) v = (v > (BAC_W+1)'(raaimt)) ? v - (BAC_W+1)'(raaimt) : '0;
        bac[b] <= v[BAC_W-1:0];
      end
    end
  end

endmodule
