// rfm_tracker: decides when an RFM is needed and which banks must stall.
//
// A same-bank RFM (RFMsb) covers one bank index in every bank group. It is needed
// as soon as the BAC of any bank with that index reaches RAAIMT. When several bank
// indices need one, a round-robin pointer picks among them. When the controller
// issues the RFM (rfm_issue), the tracker raises dec_mask for the eight covered
// banks so that their BACs drop by RAAIMT. With rfm_ab set the controller issues
// all-bank RFMs (RFMab) instead: one is needed as soon as any BAC reaches RAAIMT,
// and it lowers every bank's BAC. Independently, a bank whose BAC has reached
// 2 x RAAIMT is blocked: the controller must not activate it until an RFM has
// brought the count down.
//
// Thresholds RAAIMT and 2 x RAAIMT, the decrement rule and the choice of same-bank
// or all-bank RFMs follow the design; the round-robin choice among bank indices is
// this design's own.
//
// Timing: rfm_req/rfm_bi/act_block are combinational from the BACs; dec_mask is
// combinational from rfm_issue, and the pointer advances at an RFMsb's edge.
module rfm_tracker #(
  parameter int NUM_BANKS    = 32,
  parameter int BANKS_PER_BG = 4,
  parameter int BAC_W        = 10,
  parameter int RAAIMT_W     = 9
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic [BAC_W-1:0]                bac [NUM_BANKS],
  input  logic [RAAIMT_W-1:0]             raaimt,
  output logic                            rfm_req,
  output logic [$clog2(BANKS_PER_BG)-1:0] rfm_bi,
  input  logic                            rfm_issue,
  input  logic                            rfm_ab,
  output logic [NUM_BANKS-1:0]            dec_mask,
  output logic [NUM_BANKS-1:0]            act_block
);

  localparam int BIW = $clog2(BANKS_PER_BG);

  logic [BANKS_PER_BG-1:0] need;
  logic [BIW-1:0]          ptr;

  always_comb begin
    need = '0;
    for (int b = 0; b < NUM_BANKS; b++) begin
      if ({1'b0, bac[b]} >= (BAC_W+1)'(raaimt)) need[b % BANKS_PER_BG] = 1'b1;
      act_block[b] = ({1'b0, bac[b]} >= ((BAC_W+1)'(raaimt) << 1));
    end
  end

  // round robin starting at ptr
  always_comb begin
    rfm_req = |need;
    rfm_bi  = ptr;
    for (int k = BANKS_PER_BG - 1; k >= 0; k--) begin
      logic [BIW-1:0] i;
      i = BIW'(int'(ptr) + k);
      if (need[i]) rfm_bi = i;
    end
  end

  always_comb begin
    for (int b = 0; b < NUM_BANKS; b++)
      dec_mask[b] = rfm_issue && (rfm_ab || (b % BANKS_PER_BG) == int'(rfm_bi));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         ptr <= '0;
    else if (rfm_issue && !rfm_ab) ptr <= rfm_bi + 1'b1;
  end

endmodule
