// mc_sequencer: closed-page command sequencer of the memory controller.
//
// Every access opens a row, reads or writes one 64-byte burst and closes the row
// again (closed page policy), one command per clock. Sources, highest first: a
// pending demand-scrub write-back, the host port, the patrol scrubber. The BRC-VL
// selection logic sees every ACT and PRE; each PRE carries the DRFM bit and victim
// level it returns. When the BRC-VL tracker asks for an RFM, a same-bank RFM is
// issued at the next access boundary and the sequencer then waits T_RFM clocks
// (tDRFMsb of BRC-VL, 130 ns, at a 2.8 GHz command clock). With rfm_ab set it
// issues all-bank RFMs instead and waits T_RFM_AB clocks; no all-bank time is
// given for BRC-VL, so T_RFM_AB defaults to the same-bank time. With rfm_postpone set,
// an RFM waits while there is a request whose bank can still be activated; a
// request to a bank blocked at 2 x RAAIMT stalls until the RFM has gone out.
//
// When the SDDC decoder corrects a read (host or patrol scrub), the corrected line
// is written back to the same address right after the precharge (demand scrub).
// Uncorrectable reads are reported and not written back.
//
// Closed page, RFMsb after RAAIMT activates, suspension at 2 x RAAIMT, DRFM on the
// precharge, demand and patrol scrub follow the design. It does not model the
// design's 32-deep reordering scheduling buffer or DRAM timings other than the RFM
// time; the source priorities and the postpone option are this design's choices.
//
// Timing: ACT, RD or WR, PRE on consecutive clocks; the DRAMs return read data one
// clock after RD, and it is decoded and sampled in the clock before PRE. For a
// read, resp_valid is high three clocks after the cycle in which req_ready was high.
module mc_sequencer
  import rampart_pkg::*;
#(
  parameter int NUM_BANKS    = 32,
  parameter int BANKS_PER_BG = 4,
  parameter int ROW_BITS     = 16,
  parameter int COL_BITS     = 7,
  parameter int LINE_W       = 512,
  parameter int T_RFM        = 364,
  parameter int T_RFM_AB     = 364
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            rfm_postpone,
  input  logic                            rfm_ab,
  // host port
  input  logic                            req_valid,
  output logic                            req_ready,
  input  logic                            req_we,
  input  logic [$clog2(NUM_BANKS)-1:0]    req_bank,
  input  logic [ROW_BITS-1:0]             req_row,
  input  logic [COL_BITS-1:0]             req_col,
  input  logic [LINE_W-1:0]               req_wdata,
  output logic                            resp_valid,
  output logic [LINE_W-1:0]               resp_rdata,
  output logic                            resp_corrected,
  output logic                            resp_uncorrectable,
  // patrol scrub port
  input  logic                            scr_valid,
  output logic                            scr_ready,
  input  logic [$clog2(NUM_BANKS)-1:0]    scr_bank,
  input  logic [ROW_BITS-1:0]             scr_row,
  input  logic [COL_BITS-1:0]             scr_col,
  // BRC-VL selection logic
  output logic                            act_valid,
  output logic [$clog2(NUM_BANKS)-1:0]    act_bank,
  output logic                            pre_valid,
  output logic [$clog2(NUM_BANKS)-1:0]    pre_bank,
  input  logic                            pre_drfm,
  input  vl_t                             pre_vl,
  input  logic                            rfm_req,
  input  logic [$clog2(BANKS_PER_BG)-1:0] rfm_bi,
  output logic                            rfm_issue,
  input  logic [NUM_BANKS-1:0]            act_block,
  // DRAM command bus and data
  output dram_cmd_t                       cmd,
  output logic [LINE_W-1:0]               wr_line,
  input  logic [LINE_W-1:0]               rd_line,
  input  logic                            rd_corrected,
  input  logic                            rd_uncorrectable,
  // events
  output logic                            ev_stall,
  output logic                            ev_demand_scrub,
  output logic                            ev_scrub_read
);

  localparam int BW = $clog2(NUM_BANKS);

  typedef enum logic [2:0] {S_IDLE, S_RW, S_RDWAIT, S_PRE, S_RFM} state_e;
  typedef enum logic [1:0] {SRC_HOST, SRC_SCRUB, SRC_WB} src_e;

  state_e              state;
  src_e                src;
  logic                op_we;
  logic [BW-1:0]       op_bank;
  logic [ROW_BITS-1:0] op_row;
  logic [COL_BITS-1:0] op_col;
  logic [LINE_W-1:0]   op_data;
  logic                wb_pend;
  localparam int T_RFM_MAX = (T_RFM > T_RFM_AB) ? T_RFM : T_RFM_AB;

  logic [$clog2(T_RFM_MAX+1)-1:0] rfm_cnt;
  logic                           rfm_is_ab;
  int                             rfm_len;

  // candidate request
  logic          cand_valid, cand_blocked, go_rfm, go_req;
  logic [BW-1:0] cand_bank;
  src_e          cand_src;
  always_comb begin
    cand_valid = 1'b1;
    cand_src   = SRC_WB;
    cand_bank  = op_bank;
    if (!wb_pend) begin
      if (req_valid) begin
        cand_src  = SRC_HOST;
        cand_bank = req_bank;
      end else if (scr_valid) begin
        cand_src  = SRC_SCRUB;
        cand_bank = scr_bank;
      end else begin
        cand_valid = 1'b0;
      end
    end
    cand_blocked = cand_valid && act_block[cand_bank];
    go_rfm = (state == S_IDLE) && rfm_req &&
             (!rfm_postpone || !cand_valid || cand_blocked);
    go_req = (state == S_IDLE) && !go_rfm && cand_valid && !cand_blocked;
  end

  assign req_ready = go_req && (cand_src == SRC_HOST);
  assign scr_ready = go_req && (cand_src == SRC_SCRUB);
  assign ev_stall  = (state == S_IDLE) && cand_blocked;
  assign act_valid = go_req;
  assign act_bank  = cand_bank;
  assign pre_valid = (state == S_PRE);
  assign pre_bank  = op_bank;
  assign rfm_issue = go_rfm;
  assign rfm_len   = rfm_is_ab ? T_RFM_AB : T_RFM;
  assign wr_line   = op_data;

  always_comb begin
    cmd      = '0;
    cmd.cmd  = CMD_NOP;
    cmd.vl   = vl_t'(1);
    if (go_rfm) begin
      cmd.cmd  = rfm_ab ? CMD_RFMAB : CMD_RFMSB;
      cmd.bank = rfm_ab ? '0 : bank_t'(rfm_bi);
    end else if (go_req) begin
      cmd.cmd  = CMD_ACT;
      cmd.bank = bank_t'(cand_bank);
      case (cand_src)
        SRC_HOST:  cmd.row = row_t'(req_row);
        SRC_SCRUB: cmd.row = row_t'(scr_row);
        default:   cmd.row = row_t'(op_row);
      endcase
    end else if (state == S_RW) begin
      cmd.cmd  = op_we ? CMD_WR : CMD_RD;
      cmd.bank = bank_t'(op_bank);
      cmd.col  = col_t'(op_col);
    end else if (state == S_PRE) begin
      cmd.cmd  = CMD_PRE;
      cmd.bank = bank_t'(op_bank);
      cmd.drfm = pre_drfm;
      cmd.vl   = pre_vl;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state              <= S_IDLE;
      src                <= SRC_HOST;
      op_we              <= 1'b0;
      op_bank            <= '0;
      op_row             <= '0;
      op_col             <= '0;
      op_data            <= '0;
      wb_pend            <= 1'b0;
      rfm_cnt            <= '0;
      rfm_is_ab          <= 1'b0;
      resp_valid         <= 1'b0;
      resp_rdata         <= '0;
      resp_corrected     <= 1'b0;
      resp_uncorrectable <= 1'b0;
      ev_demand_scrub    <= 1'b0;
      ev_scrub_read      <= 1'b0;
    end else begin
      resp_valid      <= 1'b0;
      ev_demand_scrub <= 1'b0;
      ev_scrub_read   <= 1'b0;
      case (state)
        S_IDLE: begin
          if (go_rfm) begin
            state     <= S_RFM;
            rfm_cnt   <= '0;
            rfm_is_ab <= rfm_ab;
          end else if (go_req) begin
            state <= S_RW;
            src   <= cand_src;
            case (cand_src)
              SRC_HOST: begin
                op_we   <= req_we;
                op_bank <= req_bank;
                op_row  <= req_row;
                op_col  <= req_col;
                op_data <= req_wdata;
              end
              SRC_SCRUB: begin
                op_we   <= 1'b0;
                op_bank <= scr_bank;
                op_row  <= scr_row;
                op_col  <= scr_col;
              end
              default: begin
                op_we   <= 1'b1;     // demand-scrub write-back, address/data held
                wb_pend <= 1'b0;
                ev_demand_scrub <= 1'b1;
              end
            endcase
          end
        end
        S_RW:     state <= op_we ? S_PRE : S_RDWAIT;
        S_RDWAIT: begin
          state   <= S_PRE;
          op_data <= rd_line;
          if (rd_corrected && !rd_uncorrectable) wb_pend <= 1'b1;
          if (src == SRC_HOST) begin
            resp_valid         <= 1'b1;
            resp_rdata         <= rd_line;
            resp_corrected     <= rd_corrected;
            resp_uncorrectable <= rd_uncorrectable;
          end else begin
            ev_scrub_read <= 1'b1;
          end
        end
        S_PRE: state <= S_IDLE;
        S_RFM: begin
          if (int'(rfm_cnt) >= rfm_len - 1) state <= S_IDLE;
          else                              rfm_cnt <= rfm_cnt + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
