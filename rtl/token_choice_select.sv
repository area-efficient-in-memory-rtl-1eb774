// token_choice_select: top-k expert selection of one token for token-choice routing.
//
// The architecture supports token-choice as well as expert-choice routing. Under token
// choice every token keeps the KT experts with its highest gate scores (KeepTopK of the
// gate). This block ranks each expert's score against all others in one combinational
// step: the rank of expert e is the number of experts with a higher score, or an equal
// score and a lower index; e is chosen when its rank is below KT. Ties therefore go to the
// lower expert index, which is this design's choice; KT = 4 follows the 4-of-16 model.
module token_choice_select
  import moe_pkg::score_t;
#(
  parameter int unsigned E  = moe_pkg::NUM_EXPERTS,
  parameter int unsigned KT = 4
) (
  input  score_t       scores [E],
  output logic [E-1:0] chosen
);

  always_comb begin
    for (int e = 0; e < E; e++) begin
      int unsigned rank;
      rank = 0;
      for (int f = 0; f < E; f++)
        if (scores[f] > scores[e] || (scores[f] == scores[e] && f < e)) rank++;
      chosen[e] = (rank < KT);
    end
  end

endmodule
