// group_scheduler: dispatches the token-expert work of one batch to the expert groups.
//
// Input is the choice matrix of a batch (choices[t][e]: expert e processes token t) and the
// static expert-to-group table. Every group owns the (token, expert) pairs of its experts,
// kept in token order (then by the expert's place in the group). Each slot the scheduler
// gives every group at most one pair; a token needed by several groups in the same slot is
// transferred once, so the number of distinct tokens per slot is the transfer count.
//
// SCHED_COMPACT ("C"): every group issues its next pair in every slot, so the batch ends
// after L* slots, L* being the largest group load.
// SCHED_RESCHEDULE ("O"): a group may instead idle, to line its next token up with the
// token another group transfers anyway. The paper's Algorithm 1 inserts idles from the
// cumulative-load difference res[i,t] to the longest group, before the first element with
// a reuse opportunity, without extending the schedule. This block realises that as a
// per-slot rule, this design's own formulation of it:
//   slack[g]  = L* - slot - remaining[g] (idles group g can still afford);
//   a group with slack 0 must issue ("committed"); the tokens of committed groups form the
//   set that is transferred anyway;
//   a group with slack > 0 idles when its next token is not in that set and is later than
//   the earliest committed token (it is ahead of the critical groups), and issues otherwise.
// The makespan therefore stays L*. On the paper's Fig. 2 example (8 experts, groups of 2,
// 6 tokens) it reproduces the figure: 7 slots, 16 transfers compact, 12 rescheduled.
//
// Interface: start latches choices, the group table and mode. The scheduler then offers one
// slot at a time on issue_* (valid/ready); done pulses after the last slot is taken.
// Counters slot_count, load_count (token transfers) and idle_count describe the last batch.
// The assertions are disabled during reset, so lint reports rst_n as used both as an
// asynchronous reset and in synchronous logic; that is intended.
module group_scheduler
  import moe_pkg::*;
#(
  parameter int unsigned E  = moe_pkg::NUM_EXPERTS,
  parameter int unsigned GS = moe_pkg::GROUP_SIZE,
  parameter int unsigned T  = moe_pkg::T_MAX,
  localparam int unsigned NG    = E / GS,
  localparam int unsigned GID_W = (NG > 1) ? $clog2(NG) : 1,
  localparam int unsigned LOC_W = (GS > 1) ? $clog2(GS) : 1,
  localparam int unsigned EID_W = (E > 1) ? $clog2(E) : 1,
  localparam int unsigned TID_W = (T > 1) ? $clog2(T) : 1,
  localparam int unsigned CNT_W = $clog2(T * E + 1) + 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  sched_mode_e       mode,
  input  logic [E-1:0]      choices [T],
  input  logic [GID_W-1:0]  exp_group [E],   // group of each expert
  input  logic [LOC_W-1:0]  exp_local [E],   // crossbar of the expert within its group
  output logic              busy,
  output logic              issue_valid,
  input  logic              issue_ready,
  output logic [NG-1:0]     grp_valid,
  output logic [TID_W-1:0]  grp_token  [NG],
  output logic [LOC_W-1:0]  grp_local  [NG],
  output logic [EID_W-1:0]  grp_expert [NG],
  output logic              done,
  output logic [CNT_W-1:0]  slot_count,
  output logic [CNT_W-1:0]  load_count,
  output logic [CNT_W-1:0]  idle_count,
  output logic [CNT_W-1:0]  conflict_count,     // pairs that wait for their group's peripherals
  output logic [CNT_W-1:0]  makespan            // L* of the batch
);

  logic [GS-1:0]      pend [NG][T];      // pairs still to issue
  logic [EID_W-1:0]   loc2exp [NG][GS];
  sched_mode_e        mode_q;
  logic [CNT_W-1:0]   lstar;

  // ---- per-group head and remaining load --------------------------------------------
  logic [NG-1:0]      has_work;
  logic [TID_W-1:0]   head_t [NG];
  logic [LOC_W-1:0]   head_j [NG];
  logic [CNT_W-1:0]   remain [NG];

  always_comb begin
    for (int g = 0; g < NG; g++) begin
      has_work[g] = 1'b0;
      head_t[g]   = '0;
      head_j[g]   = '0;
      remain[g]   = '0;
      for (int t = T - 1; t >= 0; t--) begin
        for (int j = GS - 1; j >= 0; j--) begin
          if (pend[g][t][j]) begin
            has_work[g] = 1'b1;
            head_t[g]   = TID_W'(t);
            head_j[g]   = LOC_W'(j);
            remain[g]   = remain[g] + 1'b1;
          end
        end
      end
    end
  end

  // ---- slot decision ------------------------------------------------------------------
  logic [NG-1:0]    committed, issue;
  logic [T-1:0]     committed_tok, loaded_tok;
  logic [TID_W-1:0] min_committed;
  logic             any_committed;
  logic [CNT_W-1:0] n_loads, n_idles, n_conf;

  always_comb begin
    committed     = '0;
    committed_tok = '0;
    min_committed = '0;
    any_committed = 1'b0;
    for (int g = NG - 1; g >= 0; g--) begin
      if (has_work[g] && (mode_q == SCHED_COMPACT || (lstar - slot_count - remain[g]) == '0)) begin
        committed[g]              = 1'b1;
        committed_tok[head_t[g]]  = 1'b1;
      end
    end
    for (int t = T - 1; t >= 0; t--) begin
      if (committed_tok[t]) begin
        any_committed = 1'b1;
        min_committed = TID_W'(t);
      end
    end
    issue = '0;
    for (int g = 0; g < NG; g++) begin
      if (committed[g]) issue[g] = 1'b1;
      else if (has_work[g])
        issue[g] = !any_committed || committed_tok[head_t[g]] || (head_t[g] <= min_committed);
    end
    loaded_tok = '0;
    for (int g = 0; g < NG; g++) if (issue[g]) loaded_tok[head_t[g]] = 1'b1;
    n_loads = '0;
    for (int t = 0; t < T; t++) n_loads = n_loads + CNT_W'(loaded_tok[t]);
    n_idles = '0;
    for (int g = 0; g < NG; g++) n_idles = n_idles + CNT_W'(has_work[g] && !issue[g]);
    // another expert of the same group needs the same token: it has to wait for the
    // shared peripherals (structural conflict of the multiplexing)
    n_conf = '0;
    for (int g = 0; g < NG; g++)
      begin
        logic [GS-1:0] p;
        p = pend[g][head_t[g]];
        n_conf = n_conf + CNT_W'(issue[g] && ((p & (p - 1'b1)) != '0));
      end
  end

  assign issue_valid = busy && (|has_work);
  always_comb begin
    for (int g = 0; g < NG; g++) begin
      grp_valid[g]  = issue[g];
      grp_token[g]  = head_t[g];
      grp_local[g]  = head_j[g];
      grp_expert[g] = loc2exp[g][head_j[g]];
    end
  end

  // ---- batch set-up and progress ------------------------------------------------------
  logic [CNT_W-1:0] load_at_start [NG];
  logic [CNT_W-1:0] max_load;
  always_comb begin
    max_load = '0;
    for (int g = 0; g < NG; g++) begin
      load_at_start[g] = '0;
      for (int t = 0; t < T; t++)
        for (int e = 0; e < E; e++)
          if (choices[t][e] && exp_group[e] == GID_W'(g)) load_at_start[g] = load_at_start[g] + 1'b1;
      if (load_at_start[g] > max_load) max_load = load_at_start[g];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      done       <= 1'b0;
      mode_q     <= SCHED_COMPACT;
      lstar      <= '0;
      slot_count <= '0;
      load_count <= '0;
      idle_count <= '0;
      conflict_count <= '0;
      for (int g = 0; g < NG; g++) begin
        for (int t = 0; t < T; t++) pend[g][t] <= '0;
        for (int j = 0; j < GS; j++) loc2exp[g][j] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy       <= 1'b1;
        mode_q     <= mode;
        lstar      <= max_load;
        slot_count <= '0;
        load_count <= '0;
        idle_count <= '0;
        conflict_count <= '0;
        for (int g = 0; g < NG; g++)
          for (int t = 0; t < T; t++) pend[g][t] <= '0;
        for (int e = 0; e < E; e++) begin
          loc2exp[exp_group[e]][exp_local[e]] <= EID_W'(e);
          for (int t = 0; t < T; t++)
            if (choices[t][e]) pend[exp_group[e]][t][exp_local[e]] <= 1'b1;
        end
      end else if (busy) begin
        if (!(|has_work)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else if (issue_ready) begin
          slot_count <= slot_count + 1'b1;
          load_count <= load_count + n_loads;
          idle_count <= idle_count + n_idles;
          conflict_count <= conflict_count + n_conf;
          for (int g = 0; g < NG; g++)
            if (issue[g]) pend[g][head_t[g]][head_j[g]] <= 1'b0;
        end
      end
    end
  end

  assign makespan = lstar;

  a_makespan: assert property (@(posedge clk) disable iff (!rst_n)
                               (busy && issue_valid) |-> (slot_count < lstar))
    else $error("group_scheduler: schedule longer than the largest group load");

endmodule
