// ec_router: expert-choice router with the cached (incremental) gate.
//
// One topk_tracker per expert. Scores arrive one token at a time as a vector of
// NUM_EXPERTS gate scores (x W_G of that token); every expert applies TopKUpdate to its
// own score in the same cycle. In the prefill stage the prompt tokens are streamed in and,
// once the last one is in, choices[t][e] tells whether expert e holds prompt token t. In
// the generation stage one new token is streamed in per step and new_sel[e] tells which
// experts took it (only those compute), with the slot it lands in and the token it evicts.
// The router follows the paper's modified gate (TopKUpdate on S_prev plus the new score);
// keeping S_prev on chip, and forming the choice matrix by matching token ids, are this
// design's choices.
//
// Timing: new_sel/new_slot/evict_* are combinational from score_valid; choices reflect the
// lists after the clock edge.
module ec_router
  import moe_pkg::*;
#(
  parameter int unsigned E = moe_pkg::NUM_EXPERTS,
  parameter int unsigned K = moe_pkg::TOPK,
  parameter int unsigned T = moe_pkg::T_MAX,
  localparam int unsigned SLOT_W = (K > 1) ? $clog2(K) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              score_valid,
  input  tok_t              score_token,
  input  score_t            score_vec [E],
  output logic [E-1:0]      new_sel,
  output logic [SLOT_W-1:0] new_slot [E],
  output logic [E-1:0]      evict_valid,
  output tok_t              evict_token [E],
  output logic [E-1:0]      choices [T],
  output topk_entry_t       entries [E][K]
);

  for (genvar e = 0; e < E; e++) begin : g_exp
    topk_tracker #(.K(K)) u_topk (
      .clk, .rst_n, .clear,
      .ins_valid   (score_valid),
      .ins_score   (score_vec[e]),
      .ins_token   (score_token),
      .sel         (new_sel[e]),
      .slot        (new_slot[e]),
      .evict_valid (evict_valid[e]),
      .evict_token (evict_token[e]),
      .entries     (entries[e])
    );
  end

  always_comb begin
    for (int t = 0; t < T; t++) begin
      choices[t] = '0;
      for (int e = 0; e < E; e++)
        for (int i = 0; i < K; i++)
          if (entries[e][i].valid && entries[e][i].token == tok_t'(t)) choices[t][e] = 1'b1;
    end
  end

endmodule
