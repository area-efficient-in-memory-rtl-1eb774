// tb_group_scheduler_gs4: runs group_scheduler with four experts per group (the S4O and
// U4O configurations), 16 experts and 16 tokens.
//
// Random choice matrices are scheduled under both policies, with a contiguous grouping
// (uniform, experts 4g..4g+3) and with a scattered one. For every slot the testbench
// checks that each issued pair was chosen, is issued only once and belongs to the group
// that carries it; at the end, that all pairs were issued, that the batch took exactly the
// largest group load in slots, that the compact policy never idled and that the counters
// match what was observed. With the contiguous grouping it also checks the in-group order
// (token first, then expert-in-group), which is the order this design issues in.
module tb_group_scheduler_gs4;
  import moe_pkg::*;

  localparam int E = 16, GS = 4, T = 16, NG = E / GS;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, issue_valid, issue_ready, done, busy;
  sched_mode_e mode;
  logic [E-1:0] choices [T];
  logic [1:0] exp_group [E];
  logic [1:0] exp_local [E];
  logic [NG-1:0] grp_valid;
  logic [3:0] grp_token [NG];
  logic [1:0] grp_local [NG];
  logic [3:0] grp_expert [NG];
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

  task automatic run_batch(input sched_mode_e m, input bit check_order);
    int load [NG];
    int last_key [NG];
    int lmax, slots, issued, want, idles, loads, key;
    bit seen [T][E];
    bit tokset [T];
    foreach (load[g]) begin load[g] = 0; last_key[g] = -1; end
    want = 0;
    for (int t = 0; t < T; t++) for (int e = 0; e < E; e++) begin
      seen[t][e] = 0;
      if (choices[t][e]) begin load[exp_group[e]]++; want++; end
    end
    lmax = 0; foreach (load[g]) if (load[g] > lmax) lmax = load[g];
    mode = m;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    slots = 0; issued = 0; idles = 0; loads = 0;
    while (!done) begin
      if (issue_valid) begin
        foreach (tokset[t]) tokset[t] = 0;
        for (int g = 0; g < NG; g++) begin
          if (grp_valid[g]) begin
            check(choices[grp_token[g]][grp_expert[g]] && !seen[grp_token[g]][grp_expert[g]] &&
                  exp_group[grp_expert[g]] == 2'(g) && exp_local[grp_expert[g]] == grp_local[g],
                  "valid new pair on its own group");
            if (check_order) begin
              key = int'(grp_token[g]) * GS + int'(grp_local[g]);
              check(key > last_key[g], $sformatf("group %0d issues in (token, expert) order", g));
              last_key[g] = key;
            end
            seen[grp_token[g]][grp_expert[g]] = 1;
            tokset[grp_token[g]] = 1;
            issued++;
            load[g]--;
          end else if (load[g] > 0) idles++;
        end
        foreach (tokset[t]) loads += tokset[t];
        slots++;
      end
      @(negedge clk);
    end
    check(issued == want, $sformatf("all %0d pairs issued (got %0d)", want, issued));
    check(slots == lmax, $sformatf("slots %0d == largest group load %0d", slots, lmax));
    if (m == SCHED_COMPACT) check(idles == 0, "compact never idles");
    check(int'(slot_count) == slots && int'(load_count) == loads && int'(idle_count) == idles,
          "counters agree with the observed schedule");
  endtask

  initial begin
    start = 0; issue_ready = 1; mode = SCHED_COMPACT;
    foreach (choices[t]) choices[t] = '0;
    for (int e = 0; e < E; e++) begin exp_group[e] = 2'(e / GS); exp_local[e] = 2'(e % GS); end
    repeat (3) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 30; n++) begin
      foreach (choices[t]) choices[t] = E'($urandom);
      run_batch((n % 2) ? SCHED_RESCHEDULE : SCHED_COMPACT, 1);
    end
    // scattered grouping: group (3e + e/4) mod 4, slot e/4 (each group still gets one expert per slot)
    for (int e = 0; e < E; e++) begin
      exp_group[e] = 2'((e * 3 + e / 4) % NG);
      exp_local[e] = 2'(e / 4);
    end
    for (int n = 0; n < 30; n++) begin
      foreach (choices[t]) choices[t] = E'($urandom);
      run_batch((n % 2) ? SCHED_RESCHEDULE : SCHED_COMPACT, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
