// go_cache_ctrl: request generator of the gate-output (GO) cache in off-chip DRAM.
//
// The GO cache lets generation process only the newest token under expert-choice routing.
// It has two parts, both in DRAM next to the KV cache:
//   score cache  - the gate score vector of every token, NUM_EXPERTS x SCORE_W bits
//                  (32 bytes per token at the defaults), appended at
//                  SCORE_BASE + token * SCORE_BYTES;
//   output cache - for every expert, K records of D_OUT bytes holding the gate-weighted
//                  outputs of the tokens it currently keeps, at
//                  OUT_BASE + (expert * K + slot) * D_OUT. Its size is fixed,
//                  K x NUM_EXPERTS x D_OUT bytes, and does not grow with the sequence.
// A score event produces one GO_SCORE_WR. An output event (the weighted output of a
// (token, expert) pair) produces a GO_OUT_WR into the pair's slot; if the pair replaced a
// token the expert had chosen before, a GO_OUT_RD of the old record comes first, so the
// departing contribution can be taken back out of that token's result by the digital
// units (the read data goes to them, not to this block). At most one change per expert and
// step follows from TopKUpdate.
// Which records exist and their sizes follow the paper; the address map, the ordering of
// read before write and the request format are this design's choices.
//
// Interface: two event inputs with valid/ready (score events win a tie) and one DRAM
// request output with valid/ready. One event is handled at a time.
// The assertions are disabled during reset, so lint reports rst_n as used both as an
// asynchronous reset and in synchronous logic; that is intended.
module go_cache_ctrl
  import moe_pkg::*;
#(
  parameter int unsigned E          = moe_pkg::NUM_EXPERTS,
  parameter int unsigned K          = moe_pkg::TOPK,
  parameter int unsigned D          = moe_pkg::D_OUT,
  parameter logic [ADDR_W-1:0] SCORE_BASE = 32'h0000_0000,
  parameter logic [ADDR_W-1:0] OUT_BASE   = 32'h1000_0000,
  localparam int unsigned SLOT_W      = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned EID_W       = (E > 1) ? $clog2(E) : 1,
  localparam int unsigned SCORE_BYTES = E * SCORE_W / 8,
  localparam int unsigned REC_BYTES   = D * DATA_W / 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // score event
  input  logic              sc_valid,
  output logic              sc_ready,
  input  tok_t              sc_token,
  input  score_t            sc_vec [E],
  // output event
  input  logic              out_valid,
  output logic              out_ready,
  input  tok_t              out_token,
  input  logic [EID_W-1:0]  out_expert,
  input  logic [SLOT_W-1:0] out_slot,
  input  logic              out_evict,
  input  tok_t              out_evict_token,
  input  data_t             out_vec [D],
  // DRAM requests
  output logic              req_valid,
  input  logic              req_ready,
  output go_req_e           req_kind,
  output logic [ADDR_W-1:0] req_addr,
  output tok_t              req_token,
  output score_t            req_score [E],
  output data_t             req_data [D],
  // statistics
  output logic [31:0]       n_score_wr,
  output logic [31:0]       n_out_rd,
  output logic [31:0]       n_out_wr
);

  typedef enum logic [1:0] {S_IDLE, S_SCORE, S_RD, S_WR} state_e;
  state_e state;

  tok_t              tok_q, evict_tok_q;
  logic [ADDR_W-1:0] rec_addr_q;

  assign sc_ready  = (state == S_IDLE);
  assign out_ready = (state == S_IDLE) && !sc_valid;
  assign req_valid = (state != S_IDLE);

  always_comb begin
    req_kind  = GO_SCORE_WR;
    req_addr  = SCORE_BASE + ADDR_W'(tok_q) * ADDR_W'(SCORE_BYTES);
    req_token = tok_q;
    case (state)
      S_RD: begin
        req_kind  = GO_OUT_RD;
        req_addr  = rec_addr_q;
        req_token = evict_tok_q;
      end
      S_WR: begin
        req_kind  = GO_OUT_WR;
        req_addr  = rec_addr_q;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      tok_q       <= '0;
      evict_tok_q <= '0;
      rec_addr_q  <= '0;
      n_score_wr  <= '0;
      n_out_rd    <= '0;
      n_out_wr    <= '0;
      for (int e = 0; e < E; e++) req_score[e] <= '0;
      for (int c = 0; c < D; c++) req_data[c] <= '0;
    end else begin
      case (state)
        S_IDLE: begin
          if (sc_valid) begin
            tok_q <= sc_token;
            for (int e = 0; e < E; e++) req_score[e] <= sc_vec[e];
            state <= S_SCORE;
          end else if (out_valid) begin
            tok_q       <= out_token;
            evict_tok_q <= out_evict_token;
            rec_addr_q  <= OUT_BASE
                         + (ADDR_W'(out_expert) * ADDR_W'(K) + ADDR_W'(out_slot)) * ADDR_W'(REC_BYTES);
            for (int c = 0; c < D; c++) req_data[c] <= out_vec[c];
            state <= out_evict ? S_RD : S_WR;
          end
        end
        S_SCORE: if (req_ready) begin
          n_score_wr <= n_score_wr + 1;
          state      <= S_IDLE;
        end
        S_RD: if (req_ready) begin
          n_out_rd <= n_out_rd + 1;
          state    <= S_WR;
        end
        S_WR: if (req_ready) begin
          n_out_wr <= n_out_wr + 1;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 (req_valid && !req_ready) |=> (req_valid && $stable(req_addr)))
    else $error("go_cache_ctrl: request changed before it was taken");

endmodule
