// tb_ec_router: checks the expert-choice router in prefill and generation.
//
// Prefill: 8 prompt tokens with distinct random scores per expert; after the last one the
// choice matrix must mark, for every expert, exactly the K tokens with its highest scores
// (computed here by sorting). Generation: new tokens one at a time; an expert must take the
// token exactly when its score is at least the lowest score it keeps, and report the token
// it drops.
module tb_ec_router;
  import moe_pkg::*;
  localparam int E = 4, K = 3, T = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, score_valid;
  tok_t score_token;
  score_t score_vec [E];
  logic [E-1:0] new_sel, evict_valid;
  logic [1:0] new_slot [E];
  tok_t evict_token [E];
  logic [E-1:0] choices [T];
  topk_entry_t entries [E][K];

  ec_router #(.E(E), .K(K), .T(T)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int sc [64][E];   // scores by token
  int kept [E][$];  // tokens kept per expert (reference)

  initial begin
    clear = 0; score_valid = 0; score_token = '0;
    foreach (score_vec[e]) score_vec[e] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int run = 0; run < 10; run++) begin
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      // distinct scores per expert: 1000*t + random permutation keeps them unique
      for (int t = 0; t < 64; t++) for (int e = 0; e < E; e++) sc[t][e] = $urandom_range(0, 999) * 64 + t;
      for (int t = 0; t < T; t++) begin
        score_valid = 1; score_token = tok_t'(t);
        for (int e = 0; e < E; e++) score_vec[e] = score_t'(sc[t][e]);
        @(negedge clk);
      end
      score_valid = 0;
      #1;
      for (int e = 0; e < E; e++) begin
        bit taken [T];
        kept[e].delete();
        foreach (taken[t]) taken[t] = 0;
        for (int i = 0; i < K; i++) begin
          int bt;
          bt = -1;
          for (int t = 0; t < T; t++) if (!taken[t] && (bt < 0 || sc[t][e] > sc[bt][e])) bt = t;
          taken[bt] = 1;
          kept[e].push_back(bt);
        end
        for (int t = 0; t < T; t++) begin
          bit want;
          want = 0;
          foreach (kept[e][i]) if (kept[e][i] == t) want = 1;
          check(choices[t][e] == want, $sformatf("run %0d: choice token %0d expert %0d", run, t, e));
        end
      end
      // generation
      for (int t = T; t < T + 12; t++) begin
        score_valid = 1; score_token = tok_t'(t);
        for (int e = 0; e < E; e++) score_vec[e] = score_t'(sc[t][e]);
        #1;
        for (int e = 0; e < E; e++) begin
          int minv, mini;
          minv = 1 << 30; mini = 0;
          foreach (kept[e][i]) if (sc[kept[e][i]][e] < minv) begin minv = sc[kept[e][i]][e]; mini = i; end
          check(new_sel[e] == (sc[t][e] >= minv), $sformatf("gen token %0d expert %0d select", t, e));
          check(evict_valid[e] == (sc[t][e] >= minv), "gen evict flag");
          if (sc[t][e] >= minv) begin
            check(int'(evict_token[e]) == kept[e][mini], "gen evicted token");
            kept[e][mini] = t;
          end
        end
        @(negedge clk);
      end
      score_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
