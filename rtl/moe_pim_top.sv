// moe_pim_top: one Mixture-of-Experts layer on shared-peripheral PIM crossbars.
//
// The layer's experts are stored in analog crossbars; GROUP_SIZE experts form a group and
// the crossbars at the same tile position of a group share one DAC register and one ADC
// bank (expert_group / shared_xbar_tile). Expert-choice routing is done by ec_router, whose
// per-expert top-k lists also serve as the on-chip copy of the cached gate scores S_prev.
// group_scheduler turns a batch's choice matrix into slots of (token, expert) work per
// group, compact or with idle insertion for token reuse; moe_combiner forms the
// gate-weighted sum; go_cache_ctrl writes scores and weighted expert outputs to the
// gate-output cache in DRAM.
//
// Operation
//   1. Configuration: exp_group/exp_local give each expert's group and crossbar within the
//      group (the static, load-sorted grouping is computed offline); weights are programmed
//      one crossbar row per cycle through prog_*.
//   2. Prefill: clear the router (seq_clear), write the prompt tokens' hidden states into
//      the token buffer (tok_*, local index = token id), send each prompt token's gate
//      score vector (score_valid, score_gen = 0), then pulse prefill_start. The batch runs
//      with the scheduler's policy sched_mode; batch_done pulses at the end and y_rd_*
//      reads the MoE outputs of the prompt tokens.
//   3. Generation step: write the new token's hidden state at local index 0 and send its
//      score vector with score_gen = 1 and its global token id. Only the experts whose
//      top-k list takes the token compute (the gate-output cache bypasses recomputing the
//      older tokens); evicted records are read back from the GO cache first.
// Gate scores come in from outside (the gate projection and softmax belong to the digital
// units, which are not part of this block); they are unsigned fractions used directly as
// the gate weights.
//
// Timing: each slot takes XBAR_ROWS + 4 cycles of crossbar work plus one cycle per active
// group to combine and hand the result to the GO cache (longer if DRAM stalls).
// The scheduler's done pulse is left unread: the controller ends a batch when the scheduler
// is no longer busy, which also covers a batch that ends while results are being combined.
// The assertions disable on reset, so lint sees rst_n used both as an asynchronous reset
// and in synchronous logic; this is expected.
module moe_pim_top
  import moe_pkg::sched_mode_e, moe_pkg::route_mode_e, moe_pkg::ROUTE_EXPERT_CHOICE, moe_pkg::score_t, moe_pkg::tok_t, moe_pkg::data_t, moe_pkg::go_req_e, moe_pkg::topk_entry_t, moe_pkg::DATA_W, moe_pkg::Y_W, moe_pkg::ACC_W, moe_pkg::ADDR_W;
#(
  parameter int unsigned E         = moe_pkg::NUM_EXPERTS,
  parameter int unsigned GS        = moe_pkg::GROUP_SIZE,
  parameter int unsigned XBAR_ROWS = moe_pkg::XBAR_ROWS,
  parameter int unsigned XBAR_COLS = moe_pkg::XBAR_COLS,
  parameter int unsigned ROW_TILES = moe_pkg::ROW_TILES,
  parameter int unsigned COL_TILES = moe_pkg::COL_TILES,
  parameter int unsigned K         = moe_pkg::TOPK,
  parameter int unsigned T         = moe_pkg::T_MAX,
  parameter int unsigned KT        = moe_pkg::TC_TOPK,
  localparam int unsigned NG     = E / GS,
  localparam int unsigned D_IN   = ROW_TILES * XBAR_ROWS,
  localparam int unsigned D_OUT  = COL_TILES * XBAR_COLS,
  localparam int unsigned GID_W  = (NG > 1) ? $clog2(NG) : 1,
  localparam int unsigned LOC_W  = (GS > 1) ? $clog2(GS) : 1,
  localparam int unsigned EID_W  = (E > 1) ? $clog2(E) : 1,
  localparam int unsigned TID_W  = (T > 1) ? $clog2(T) : 1,
  localparam int unsigned RT_W   = (ROW_TILES > 1) ? $clog2(ROW_TILES) : 1,
  localparam int unsigned CT_W   = (COL_TILES > 1) ? $clog2(COL_TILES) : 1,
  localparam int unsigned SLOT_W = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned CNT_W  = $clog2(T * E + 1) + 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // configuration
  input  logic [GID_W-1:0]         exp_group [E],
  input  logic [LOC_W-1:0]         exp_local [E],
  input  sched_mode_e              sched_mode,
  input  route_mode_e              route_mode,   // hold stable for a whole sequence
  // weight programming
  input  logic                     prog_en,
  input  logic [EID_W-1:0]         prog_expert,
  input  logic [RT_W-1:0]          prog_rt,
  input  logic [CT_W-1:0]          prog_ct,
  input  logic [$clog2(XBAR_ROWS)-1:0] prog_row,
  input  logic signed [DATA_W-1:0] prog_data [XBAR_COLS],
  // token buffer (hidden states), one row-tile slice per cycle
  input  logic                     tok_we,
  input  logic [TID_W-1:0]         tok_idx,
  input  logic [RT_W-1:0]          tok_rt,
  input  logic signed [DATA_W-1:0] tok_data [XBAR_ROWS],
  // gate scores
  input  logic                     seq_clear,
  input  logic                     score_valid,
  output logic                     score_ready,
  input  logic                     score_gen,
  input  tok_t                     score_token,
  input  score_t                   score_vec [E],
  // prefill command and status
  input  logic                     prefill_start,
  output logic                     busy,
  output logic                     batch_done,
  // MoE output
  input  logic [TID_W-1:0]         y_rd_token,
  output logic signed [Y_W-1:0]    y_rd_vec [D_OUT],
  output logic [T-1:0]             y_valid,          // token rows written in this batch
  // GO cache DRAM port
  output logic                     dram_req_valid,
  input  logic                     dram_req_ready,
  output go_req_e                  dram_req_kind,
  output logic [ADDR_W-1:0]        dram_req_addr,
  output tok_t                     dram_req_token,
  output score_t                   dram_req_score [E],
  output data_t                    dram_req_data [D_OUT],
  // statistics of the last batch, and running counts
  output logic [CNT_W-1:0]         stat_slots,
  output logic [CNT_W-1:0]         stat_loads,
  output logic [CNT_W-1:0]         stat_idles,
  output logic [CNT_W-1:0]         stat_conflicts,
  output logic [CNT_W-1:0]         stat_makespan,
  output logic [31:0]              stat_pairs,
  output logic [31:0]              stat_gen_steps,
  output logic [31:0]              stat_evictions,
  output logic [31:0]              stat_go_score_wr,
  output logic [31:0]              stat_go_rd,
  output logic [31:0]              stat_go_wr
);

  typedef enum logic [2:0] {S_IDLE, S_START, S_ISSUE, S_WAIT, S_COMB} state_e;
  state_e state;

  // ---- token buffer and score buffer --------------------------------------------------
  logic signed [DATA_W-1:0] tok_buf [T][D_IN];
  score_t                   score_buf [T][E];

  always_ff @(posedge clk) begin
    if (tok_we)
      for (int r = 0; r < XBAR_ROWS; r++) tok_buf[tok_idx][int'(tok_rt) * XBAR_ROWS + r] <= tok_data[r];
  end

  // ---- router --------------------------------------------------------------------------
  logic                     score_fire;
  logic [E-1:0]             r_new_sel, r_evict_valid;
  logic [SLOT_W-1:0]        r_new_slot [E];
  tok_t                     r_evict_token [E];
  logic [E-1:0]             r_choices [T];
  topk_entry_t              r_entries [E][K];
  logic                     go_sc_ready;

  logic         route_ec;
  logic [E-1:0] tc_sel;
  logic [E-1:0] tc_choices [T];

  assign route_ec    = (route_mode == ROUTE_EXPERT_CHOICE);
  assign score_ready = (state == S_IDLE) && go_sc_ready;
  assign score_fire  = score_valid && score_ready;

  // token-choice selection of the incoming token
  token_choice_select #(.E(E), .KT(KT)) u_tc (.scores(score_vec), .chosen(tc_sel));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < T; t++) tc_choices[t] <= '0;
    end else if (seq_clear && state == S_IDLE) begin
      for (int t = 0; t < T; t++) tc_choices[t] <= '0;
    end else if (score_fire && !score_gen && !route_ec) begin
      tc_choices[score_token[TID_W-1:0]] <= tc_sel;
    end
  end

  ec_router #(.E(E), .K(K), .T(T)) u_router (
    .clk, .rst_n,
    .clear       (seq_clear && state == S_IDLE),
    .score_valid (score_fire && route_ec),
    .score_token (score_token),
    .score_vec   (score_vec),
    .new_sel     (r_new_sel),
    .new_slot    (r_new_slot),
    .evict_valid (r_evict_valid),
    .evict_token (r_evict_token),
    .choices     (r_choices),
    .entries     (r_entries)
  );

  // generation step state, captured when the new token's scores are routed
  logic                 gen_mode;
  tok_t                 gen_token;
  logic [E-1:0]         gen_sel, gen_evict;
  logic [SLOT_W-1:0]    gen_slot [E];
  tok_t                 gen_evict_token [E];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gen_token <= '0;
      gen_sel   <= '0;
      gen_evict <= '0;
      for (int e = 0; e < E; e++) begin
        gen_slot[e]        <= '0;
        gen_evict_token[e] <= '0;
        for (int t = 0; t < T; t++) score_buf[t][e] <= '0;
      end
    end else if (score_fire) begin
      for (int e = 0; e < E; e++) score_buf[score_gen ? '0 : score_token[TID_W-1:0]][e] <= score_vec[e];
      if (score_gen) begin
        gen_token       <= score_token;
        gen_sel         <= route_ec ? r_new_sel : tc_sel;
        gen_evict       <= route_ec ? (r_new_sel & r_evict_valid) : '0;
        gen_slot        <= r_new_slot;
        gen_evict_token <= r_evict_token;
      end
    end
  end

  // ---- scheduler -----------------------------------------------------------------------
  logic [E-1:0]     sched_choices [T];
  logic             sched_busy, sched_issue_valid, sched_issue_ready, sched_done;
  logic [NG-1:0]    sched_grp_valid;
  logic [TID_W-1:0] sched_grp_token [NG];
  logic [LOC_W-1:0] sched_grp_local [NG];
  logic [EID_W-1:0] sched_grp_expert [NG];

  always_comb begin
    for (int t = 0; t < T; t++) sched_choices[t] = gen_mode ? ((t == 0) ? gen_sel : '0) : (route_ec ? r_choices[t] : tc_choices[t]);
  end

  group_scheduler #(.E(E), .GS(GS), .T(T)) u_sched (
    .clk, .rst_n,
    .start          (state == S_START),
    .mode           (sched_mode),
    .choices        (sched_choices),
    .exp_group, .exp_local,
    .busy           (sched_busy),
    .issue_valid    (sched_issue_valid),
    .issue_ready    (sched_issue_ready),
    .grp_valid      (sched_grp_valid),
    .grp_token      (sched_grp_token),
    .grp_local      (sched_grp_local),
    .grp_expert     (sched_grp_expert),
    .done           (sched_done),
    .slot_count     (stat_slots),
    .load_count     (stat_loads),
    .idle_count     (stat_idles),
    .conflict_count (stat_conflicts),
    .makespan       (stat_makespan)
  );

  assign sched_issue_ready = (state == S_ISSUE);

  // ---- expert groups -------------------------------------------------------------------
  logic [NG-1:0]            grp_start, grp_busy, grp_out_valid;
  logic signed [ACC_W-1:0]  grp_out [NG][D_OUT];
  logic [NG-1:0]            slot_act;
  logic [TID_W-1:0]         slot_tok [NG];
  logic [EID_W-1:0]         slot_exp [NG];

  for (genvar g = 0; g < NG; g++) begin : g_grp
    logic signed [DATA_W-1:0] x_g [D_IN];
    always_comb for (int i = 0; i < D_IN; i++) x_g[i] = tok_buf[sched_grp_token[g]][i];

    assign grp_start[g] = (state == S_ISSUE) && sched_issue_valid && sched_grp_valid[g];

    expert_group #(
      .GROUP_SIZE(GS), .XBAR_ROWS(XBAR_ROWS), .XBAR_COLS(XBAR_COLS),
      .ROW_TILES(ROW_TILES), .COL_TILES(COL_TILES)
    ) u_group (
      .clk, .rst_n,
      .prog_en   (prog_en && state == S_IDLE && exp_group[prog_expert] == GID_W'(g)),
      .prog_sel  (exp_local[prog_expert]),
      .prog_rt, .prog_ct, .prog_row, .prog_data,
      .start     (grp_start[g]),
      .sel       (sched_grp_local[g]),
      .x         (x_g),
      .busy      (grp_busy[g]),
      .out_valid (grp_out_valid[g]),
      .out_vec   (grp_out[g])
    );
  end

  // ---- combine and cache, one group per cycle ------------------------------------------
  logic [GID_W-1:0]        cidx;
  logic                    comb_fire;
  logic                    go_out_valid, go_out_ready;
  logic [TID_W-1:0]        c_tok;
  logic [EID_W-1:0]        c_exp;
  score_t                  c_score;
  logic [SLOT_W-1:0]       c_slot;
  logic signed [ACC_W-1:0] c_vec [D_OUT];
  data_t                   c_rec [D_OUT];

  always_comb begin
    c_tok   = slot_tok[cidx];
    c_exp   = slot_exp[cidx];
    c_score = score_buf[c_tok][c_exp];
    for (int c = 0; c < D_OUT; c++) c_vec[c] = grp_out[cidx][c];
    // slot of the pair in the expert's top-k list (= its record in the output cache)
    c_slot = gen_slot[c_exp];
    if (!gen_mode) begin
      c_slot = '0;
      for (int i = K - 1; i >= 0; i--)
        if (r_entries[c_exp][i].valid && r_entries[c_exp][i].token == tok_t'(c_tok)) c_slot = SLOT_W'(i);
    end
  end

  // the gate-output cache is only kept under expert choice
  assign go_out_valid = (state == S_COMB) && slot_act[cidx] && route_ec;
  assign comb_fire    = (state == S_COMB) && slot_act[cidx] && (!route_ec || go_out_ready);

  moe_combiner #(.T(T), .D(D_OUT)) u_comb (
    .clk, .rst_n,
    .clear      (state == S_START),
    .in_valid   (comb_fire),
    .in_token   (c_tok),
    .in_score   (c_score),
    .in_vec     (c_vec),
    .rec_vec    (c_rec),
    .y_rd_token (y_rd_token),
    .y_rd_vec   (y_rd_vec),
    .y_written  (y_valid)
  );


  go_cache_ctrl #(.E(E), .K(K), .D(D_OUT)) u_go (
    .clk, .rst_n,
    .sc_valid        (score_fire && route_ec),
    .sc_ready        (go_sc_ready),
    .sc_token        (score_token),
    .sc_vec          (score_vec),
    .out_valid       (go_out_valid),
    .out_ready       (go_out_ready),
    .out_token       (gen_mode ? gen_token : tok_t'(c_tok)),
    .out_expert      (c_exp),
    .out_slot        (c_slot),
    .out_evict       (gen_mode && gen_evict[c_exp]),
    .out_evict_token (gen_evict_token[c_exp]),
    .out_vec         (c_rec),
    .req_valid       (dram_req_valid),
    .req_ready       (dram_req_ready),
    .req_kind        (dram_req_kind),
    .req_addr        (dram_req_addr),
    .req_token       (dram_req_token),
    .req_score       (dram_req_score),
    .req_data        (dram_req_data),
    .n_score_wr      (stat_go_score_wr),
    .n_out_rd        (stat_go_rd),
    .n_out_wr        (stat_go_wr)
  );

  // ---- control -------------------------------------------------------------------------
  logic [31:0] n_new_evict;
  always_comb begin
    n_new_evict = '0;
    for (int e = 0; e < E; e++) n_new_evict = n_new_evict + 32'(r_new_sel[e] && r_evict_valid[e]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      gen_mode       <= 1'b0;
      cidx           <= '0;
      slot_act       <= '0;
      batch_done     <= 1'b0;
      stat_pairs     <= '0;
      stat_gen_steps <= '0;
      stat_evictions <= '0;
      for (int g = 0; g < NG; g++) begin
        slot_tok[g] <= '0;
        slot_exp[g] <= '0;
      end
    end else begin
      batch_done <= 1'b0;
      case (state)
        S_IDLE: begin
          if (score_fire && score_gen) begin
            gen_mode       <= 1'b1;
            stat_gen_steps <= stat_gen_steps + 1;
            if (route_ec) stat_evictions <= stat_evictions + n_new_evict;
            state          <= S_START;
          end else if (prefill_start && !score_valid) begin
            gen_mode <= 1'b0;
            state    <= S_START;
          end
        end
        S_START: state <= S_ISSUE;
        S_ISSUE: begin
          if (sched_issue_valid) begin
            slot_act <= sched_grp_valid;
            for (int g = 0; g < NG; g++) begin
              slot_tok[g] <= sched_grp_token[g];
              slot_exp[g] <= sched_grp_expert[g];
            end
            state <= S_WAIT;
          end else if (!sched_busy) begin
            batch_done <= 1'b1;
            state      <= S_IDLE;
          end
        end
        S_WAIT: begin
          if ((grp_out_valid & slot_act) != '0) begin
            cidx  <= '0;
            state <= S_COMB;
          end
        end
        S_COMB: begin
          if (!slot_act[cidx] || comb_fire) begin
            if (slot_act[cidx]) stat_pairs <= stat_pairs + 1;
            if (cidx == GID_W'(NG - 1)) state <= S_ISSUE;
            else                        cidx  <= cidx + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  a_groups_free_at_issue: assert property (@(posedge clk) disable iff (!rst_n)
                                           (|grp_start) |-> ((grp_busy & grp_start) == '0))
    else $error("moe_pim_top: slot issued to a busy group");
  a_sched_idle_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                           (state == S_IDLE) |-> !sched_busy)
    else $error("moe_pim_top: scheduler running outside a batch");

endmodule
