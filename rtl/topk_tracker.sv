// topk_tracker: the column Top-K of one expert under expert-choice routing.
//
// Each expert keeps the K tokens with the highest gate scores it has seen (S_prev in the
// cached gate). A new score s enters with TopKUpdate: while fewer than K tokens are held it
// is always taken; otherwise it is taken if s >= min(S_prev), replacing the minimum entry,
// and rejected if not. The comparison with the minimum and the ">=" come from the paper's
// equation; keeping the entries unsorted in fixed slots (so a slot number can address the
// expert's record in the output cache), taking the lowest slot among equal minima, and
// filling empty slots in order are this design's choices.
//
// Interface: ins_valid with ins_score/ins_token is decided in the same cycle (sel, slot,
// evict_*) and written at the clock edge. clear empties the list (new sequence).
// entries exposes the list for the choice matrix.
module topk_tracker
  import moe_pkg::*;
#(
  parameter int unsigned K = moe_pkg::TOPK,
  localparam int unsigned SLOT_W = (K > 1) ? $clog2(K) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              ins_valid,
  input  score_t            ins_score,
  input  tok_t              ins_token,
  output logic              sel,          // the expert takes the token
  output logic [SLOT_W-1:0] slot,         // slot the token is written to
  output logic              evict_valid,  // a previously chosen token is dropped
  output tok_t              evict_token,
  output topk_entry_t       entries [K]
);

  logic              full;
  logic [SLOT_W-1:0] free_slot, min_slot;
  score_t            min_score;

  always_comb begin
    full      = 1'b1;
    free_slot = '0;
    for (int i = K - 1; i >= 0; i--) begin
      if (!entries[i].valid) begin
        full      = 1'b0;
        free_slot = SLOT_W'(i);
      end
    end
    min_slot  = '0;
    min_score = entries[0].score;
    for (int i = 1; i < K; i++) begin
      if (entries[i].score < min_score) begin
        min_score = entries[i].score;
        min_slot  = SLOT_W'(i);
      end
    end
  end

  always_comb begin
    sel         = 1'b0;
    slot        = free_slot;
    evict_valid = 1'b0;
    evict_token = entries[min_slot].token;
    if (ins_valid) begin
      if (!full) begin
        sel = 1'b1;
      end else if (ins_score >= min_score) begin
        sel         = 1'b1;
        slot        = min_slot;
        evict_valid = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < K; i++) entries[i] <= '0;
    end else if (clear) begin
      for (int i = 0; i < K; i++) entries[i] <= '0;
    end else if (sel) begin
      entries[slot] <= '{valid: 1'b1, score: ins_score, token: ins_token};
    end
  end

endmodule
