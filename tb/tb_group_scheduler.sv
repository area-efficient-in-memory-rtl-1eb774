// tb_group_scheduler: checks the slot-by-slot dispatch of group_scheduler.
//
// Part 1 replays the worked example of the scheduling figure: 8 experts in groups of two,
// 6 tokens. The expected per-group token sequence of both policies, the slot count (7),
// the token transfers (16 compact, 12 rescheduled) and the peripheral conflicts (4) are
// written out by hand. Part 2 draws random choice matrices and checks, against a model
// kept in the testbench, that every pair is issued once and in order per group, that the
// schedule lasts exactly the largest group load, that the compact policy never idles, and
// that the transfer count equals the distinct tokens per slot.
module tb_group_scheduler;
  import moe_pkg::*;

  localparam int E = 8, GS = 2, T = 8, NG = E / GS;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, issue_valid, issue_ready, done, busy;
  sched_mode_e mode;
  logic [E-1:0] choices [T];
  logic [1:0] exp_group [E];
  logic [0:0] exp_local [E];
  logic [NG-1:0] grp_valid;
  logic [2:0] grp_token [NG];
  logic [0:0] grp_local [NG];
  logic [2:0] grp_expert [NG];
  logic [$clog2(T*E+1):0] slot_count, load_count, idle_count, conflict_count, makespan;

  group_scheduler #(.E(E), .GS(GS), .T(T)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected tokens per slot (1-based as in the figure, 0 = idle / finished)
  int exp_o [NG][7] = '{'{1,2,3,3,4,4,5}, '{1,2,2,4,5,6,6}, '{1,0,3,4,5,6,0}, '{1,2,3,0,5,6,0}};
  int exp_c [NG][7] = '{'{1,2,3,3,4,4,5}, '{1,2,2,4,5,6,6}, '{1,3,4,5,6,0,0}, '{1,2,3,5,6,0,0}};

  // model of each group's queue: pairs in (token, local) order
  int q_tok [NG][$];
  int q_exp [NG][$];

  task automatic build_queues();
    for (int g = 0; g < NG; g++) begin q_tok[g].delete(); q_exp[g].delete(); end
    for (int t = 0; t < T; t++)
      for (int g = 0; g < NG; g++)
        for (int j = 0; j < GS; j++)
          if (choices[t][g*GS + j]) begin q_tok[g].push_back(t); q_exp[g].push_back(g*GS + j); end
  endtask

  // run one batch; returns slots and loads seen; optionally compare with a figure table
  task automatic run_batch(input sched_mode_e m, input bit use_fig, input bit fig_o,
                           output int slots, output int loads, output int idles);
    int lmax, pairs_left;
    bit tokset [T];
    lmax = 0;
    build_queues();
    for (int g = 0; g < NG; g++) if (q_tok[g].size() > lmax) lmax = q_tok[g].size();
    mode = m;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    slots = 0; loads = 0; idles = 0;
    while (!done) begin
      if (issue_valid) begin
        foreach (tokset[t]) tokset[t] = 0;
        for (int g = 0; g < NG; g++) begin
          if (grp_valid[g]) begin
            check(q_tok[g].size() > 0 && grp_token[g] == q_tok[g][0] && grp_expert[g] == q_exp[g][0],
                  $sformatf("slot %0d group %0d pair out of order", slots, g));
            if (q_tok[g].size() > 0) begin void'(q_tok[g].pop_front()); void'(q_exp[g].pop_front()); end
            tokset[grp_token[g]] = 1;
          end else if (q_tok[g].size() > 0) idles++;
          if (use_fig) begin
            int want = fig_o ? exp_o[g][slots] : exp_c[g][slots];
            check(grp_valid[g] ? (int'(grp_token[g]) + 1 == want) : (want == 0),
                  $sformatf("figure example: slot %0d group %0d", slots + 1, g + 1));
          end
        end
        foreach (tokset[t]) loads += tokset[t];
        slots++;
      end
      @(negedge clk);
    end
    pairs_left = 0;
    for (int g = 0; g < NG; g++) pairs_left += q_tok[g].size();
    check(pairs_left == 0, "all pairs issued");
    check(slots == lmax, $sformatf("slots %0d == largest group load %0d", slots, lmax));
    check(int'(slot_count) == slots && int'(load_count) == loads && int'(idle_count) == idles,
          "counters agree with the observed schedule");
    check(int'(makespan) == lmax, "makespan output");
  endtask

  initial begin
    int s, l, i;
    start = 0; issue_ready = 1; mode = SCHED_COMPACT;
    for (int e = 0; e < E; e++) begin exp_group[e] = 2'(e / GS); exp_local[e] = 1'(e % GS); end
    foreach (choices[t]) choices[t] = '0;
    // figure example (experts and tokens 1-based there)
    choices[0] = 8'b1010_1010;  // token 1: experts 2,4,6,8
    choices[1] = 8'b0100_1110;  // token 2: experts 2,3,4,7
    choices[2] = 8'b0101_0011;  // token 3: experts 1,2,5,7
    choices[3] = 8'b0001_0111;  // token 4: experts 1,2,3,5
    choices[4] = 8'b0101_1001;  // token 5: experts 1,4,5,7
    choices[5] = 8'b0101_1100;  // token 6: experts 3,4,5,7
    repeat (3) @(negedge clk); rst_n = 1;

    run_batch(SCHED_COMPACT, 1, 0, s, l, i);
    check(s == 7 && l == 16 && i == 0, $sformatf("compact: 7 slots, 16 transfers (got %0d, %0d)", s, l));
    check(conflict_count == 4, "compact: 4 shared-peripheral conflicts");
    run_batch(SCHED_RESCHEDULE, 1, 1, s, l, i);
    check(s == 7 && l == 12, $sformatf("reschedule: 7 slots, 12 transfers (got %0d, %0d)", s, l));
    check(i == 2, "reschedule: two idles inserted");

    // random batches
    for (int n = 0; n < 40; n++) begin
      foreach (choices[t]) choices[t] = E'($urandom);
      run_batch((n % 2) ? SCHED_RESCHEDULE : SCHED_COMPACT, 0, 0, s, l, i);
      if (n % 2 == 0) check(i == 0, "compact never idles");
    end
    // a different grouping: experts {0,5},{1,4},{2,7},{3,6}
    exp_group = '{0, 1, 2, 3, 1, 0, 3, 2};
    exp_local = '{0, 0, 0, 0, 1, 1, 1, 1};
    for (int n = 0; n < 10; n++) begin
      foreach (choices[t]) choices[t] = E'($urandom);
      // the queue model assumes expert = group*GS + local, so check order-free properties
      run_batch_remap(SCHED_RESCHEDULE);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // remapped grouping: check only order-free properties (each pair once, makespan)
  task automatic run_batch_remap(input sched_mode_e m);
    int load [NG];
    int lmax, slots, issued, want;
    bit seen [T][E];
    foreach (load[g]) load[g] = 0;
    want = 0;
    for (int t = 0; t < T; t++) for (int e = 0; e < E; e++) begin
      seen[t][e] = 0;
      if (choices[t][e]) begin load[exp_group[e]]++; want++; end
    end
    lmax = 0; foreach (load[g]) if (load[g] > lmax) lmax = load[g];
    mode = m;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    slots = 0; issued = 0;
    while (!done) begin
      if (issue_valid) begin
        for (int g = 0; g < NG; g++) if (grp_valid[g]) begin
          check(choices[grp_token[g]][grp_expert[g]] && !seen[grp_token[g]][grp_expert[g]] &&
                exp_group[grp_expert[g]] == 2'(g) && exp_local[grp_expert[g]] == grp_local[g],
                "remapped: valid new pair on its own group");
          seen[grp_token[g]][grp_expert[g]] = 1;
          issued++;
        end
        slots++;
      end
      @(negedge clk);
    end
    check(issued == want && slots == lmax, "remapped: all pairs within the makespan");
  endtask

endmodule
