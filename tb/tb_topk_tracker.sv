// tb_topk_tracker: checks TopKUpdate of one expert's top-k list.
//
// Random score streams with a small score range (so equal scores are common) are fed in.
// A reference list in the testbench decides for every score whether it is taken (list not
// full, or score >= the current minimum), which slot it lands in and which token leaves.
// At the end of each stream the kept scores must be the K largest of the stream.
module tb_topk_tracker;
  import moe_pkg::*;
  localparam int K = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, ins_valid, sel, evict_valid;
  score_t ins_score;
  tok_t ins_token, evict_token;
  logic [1:0] slot;
  topk_entry_t entries [K];

  topk_tracker #(.K(K)) dut (.*);

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

  // reference list
  bit     m_valid [K];
  int     m_score [K];
  int     m_token [K];

  initial begin
    clear = 0; ins_valid = 0; ins_score = '0; ins_token = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int run = 0; run < 30; run++) begin
      int all_scores [$];
      int n;
      all_scores.delete();
      n = 1 + $urandom_range(0, 20);
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      foreach (m_valid[i]) m_valid[i] = 0;
      for (int t = 0; t < n; t++) begin
        int s, exp_slot, minv, mins, free;
        bit exp_sel, exp_ev;
        s = (run < 15) ? $urandom_range(0, 7) : $urandom_range(0, 65535);
        all_scores.push_back(s);
        free = -1;
        for (int i = K - 1; i >= 0; i--) if (!m_valid[i]) free = i;
        minv = 1 << 30; mins = 0;
        for (int i = 0; i < K; i++) if (m_valid[i] && m_score[i] < minv) begin minv = m_score[i]; mins = i; end
        exp_ev = 0;
        if (free >= 0) begin exp_sel = 1; exp_slot = free; end
        else if (s >= minv) begin exp_sel = 1; exp_slot = mins; exp_ev = 1; end
        else begin exp_sel = 0; exp_slot = -1; end
        ins_valid = 1; ins_score = score_t'(s); ins_token = tok_t'(t);
        #1;
        check(sel == exp_sel, $sformatf("run %0d token %0d: sel %0b want %0b", run, t, sel, exp_sel));
        if (exp_sel) check(int'(slot) == exp_slot, "slot");
        check(evict_valid == exp_ev, "evict flag");
        if (exp_ev) check(int'(evict_token) == m_token[exp_slot], "evicted token");
        if (exp_sel) begin m_valid[exp_slot] = 1; m_score[exp_slot] = s; m_token[exp_slot] = t; end
        @(negedge clk);
        ins_valid = 0;
      end
      // kept scores = K largest of the stream
      begin
        int kept [$], best [$];
        kept.delete(); best.delete();
        all_scores.rsort();
        for (int i = 0; i < K && i < all_scores.size(); i++) best.push_back(all_scores[i]);
        for (int i = 0; i < K; i++) if (entries[i].valid) kept.push_back(int'(entries[i].score));
        kept.rsort();
        check(kept == best, $sformatf("run %0d: kept set is the top-%0d", run, K));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
