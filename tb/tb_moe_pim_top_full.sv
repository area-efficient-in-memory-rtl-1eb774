// tb_moe_pim_top_full: end-to-end run of the MoE layer accelerator at its default size.
//
// Geometry as built: 16 experts in 8 groups of 2, 256x256 crossbars, 16 x 6 tiles per
// expert (1536 crossbars), top-k capacity 8, 32-token buffer, 4 experts per token under
// token choice. The grouping table pairs expert e with expert 15 - e (lowest load with
// highest, as a load-sorted grouping would). To keep the run short only the first row tile
// of every expert is programmed and the tokens are zero outside their first 256 elements,
// so the unprogrammed crossbars multiply zeros. The workload is 32 prompt tokens and 8
// generation steps, the shortest generation length the architecture was evaluated with.
// The testbench programs random weights, computes every expected output itself (exact dot
// products, ADC conversion by >> 8 with 8-bit clipping, sum over row tiles, gate weighting
// by >> 16) and runs:
//   1. token-choice prefill with the reschedule policy, then again with the compact policy;
//   2. expert-choice prefill, followed by generation steps that route one new token each;
//   3. checks of every output row, of the GO-cache DRAM traffic (score writes, record
//      writes at the slot the token holds, read-back of evicted records) and of the counts.
// Each mechanism must occur at least once: a shared-peripheral conflict, an inserted idle,
// token reuse within a slot, both scheduling policies, both routings, an eviction in
// generation, a GO-cache read, and a DRAM stall.
module tb_moe_pim_top_full;
  import moe_pkg::*;

  localparam int E = NUM_EXPERTS, GS = GROUP_SIZE, XR = XBAR_ROWS, XC = XBAR_COLS;
  localparam int RT = ROW_TILES, CT = COL_TILES, K = TOPK, T = T_MAX, KT = TC_TOPK;
  localparam int NTOK = 32;   // prompt tokens used (the full prompt length)
  localparam int NG = E / GS, DIN = RT * XR, DOUT = CT * XC;
  localparam int GID_W = (NG > 1) ? $clog2(NG) : 1, LOC_W = (GS > 1) ? $clog2(GS) : 1;
  localparam int EID_W = $clog2(E), TID_W = $clog2(T), RT_W = (RT > 1) ? $clog2(RT) : 1;
  localparam int CT_W = (CT > 1) ? $clog2(CT) : 1, CNT_W = $clog2(T * E + 1) + 1;
  localparam int GEN_STEPS = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [GID_W-1:0] exp_group [E];
  logic [LOC_W-1:0] exp_local [E];
  sched_mode_e sched_mode;
  route_mode_e route_mode;
  logic prog_en, tok_we, seq_clear, score_valid, score_ready, score_gen, prefill_start, busy, batch_done;
  logic [EID_W-1:0] prog_expert;
  logic [RT_W-1:0] prog_rt, tok_rt;
  logic [CT_W-1:0] prog_ct;
  logic [$clog2(XR)-1:0] prog_row;
  logic signed [DATA_W-1:0] prog_data [XC];
  logic [TID_W-1:0] tok_idx, y_rd_token;
  logic signed [DATA_W-1:0] tok_data [XR];
  tok_t score_token;
  score_t score_vec [E];
  logic signed [Y_W-1:0] y_rd_vec [DOUT];
  logic [T-1:0] y_valid;
  logic dram_req_valid, dram_req_ready;
  go_req_e dram_req_kind;
  logic [ADDR_W-1:0] dram_req_addr;
  tok_t dram_req_token;
  score_t dram_req_score [E];
  data_t dram_req_data [DOUT];
  logic [CNT_W-1:0] stat_slots, stat_loads, stat_idles, stat_conflicts, stat_makespan;
  logic [31:0] stat_pairs, stat_gen_steps, stat_evictions, stat_go_score_wr, stat_go_rd, stat_go_wr;

  moe_pim_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog (state %0d)", dut.state);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- reference state ----------------------------------------------------------------
  int w [E][XR][DOUT];      // first row tile only
  int xt [T][XR];           // first slice only, the rest is zero
  int sc [T][E];
  bit ch [T][E];
  // expert-choice lists (slot model of TopKUpdate)
  bit ec_v [E][K];
  int ec_s [E][K];
  int ec_t [E][K];

  // mechanism counters
  int m_conflict = 0, m_idle = 0, m_reuse = 0, m_compact = 0, m_resched = 0, m_tc = 0, m_ec = 0;
  int m_evict = 0, m_go_rd = 0, m_stall = 0;

  // ---- DRAM model: random ready, log of accepted requests ------------------------------
  go_req_e d_kind [$];
  int      d_addr [$];
  int      d_tok  [$];
  int      d_first[$];
  always @(negedge clk) dram_req_ready <= ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (rst_n && dram_req_valid) begin
    if (dram_req_ready) begin
      d_kind.push_back(dram_req_kind); d_addr.push_back(int'(dram_req_addr));
      d_tok.push_back(int'(dram_req_token));
      d_first.push_back(dram_req_kind == GO_SCORE_WR ? int'(dram_req_score[0]) : int'(dram_req_data[0]));
    end else m_stall++;
  end

  // the other row tiles see zero inputs and add ADC code 0
  function automatic int expert_out(int e, int x[XR], int o);
    int s = 0, q;
    for (int r = 0; r < XR; r++) s += w[e][r][o] * x[r];
    q = s >>> ADC_SHIFT;
    if (q > 127) q = 127;
    if (q < -128) q = -128;
    return q;
  endfunction

  function automatic longint weighted(int ev, int s);
    longint p = longint'(ev) * longint'(s);
    return p >>> SCORE_W;
  endfunction

  task automatic send_token(int idx, int x[XR]);
    for (int rt = 0; rt < RT; rt++) begin
      tok_we = 1; tok_idx = TID_W'(idx); tok_rt = RT_W'(rt);
      for (int r = 0; r < XR; r++) tok_data[r] = (rt == 0) ? DATA_W'(x[r]) : '0;
      @(negedge clk);
    end
    tok_we = 0;
  endtask

  task automatic send_score(int tok, bit gen, int s[E]);
    score_valid = 1; score_gen = gen; score_token = tok_t'(tok);
    for (int e = 0; e < E; e++) score_vec[e] = score_t'(s[e]);
    while (!score_ready) @(negedge clk);
    @(negedge clk);
    score_valid = 0; score_gen = 0;
  endtask

  task automatic wait_batch();
    while (!batch_done) @(negedge clk);
    @(negedge clk);
  endtask

  // model: expert-choice insert, returns chosen / slot / evicted token
  task automatic ec_insert(int e, int tok, int s, output bit sel, output int slot, output bit ev, output int evt);
    int free = -1, mins = 0, minv = 1 << 30;
    for (int i = K - 1; i >= 0; i--) if (!ec_v[e][i]) free = i;
    for (int i = 0; i < K; i++) if (ec_v[e][i] && ec_s[e][i] < minv) begin minv = ec_s[e][i]; mins = i; end
    sel = 0; ev = 0; slot = -1; evt = -1;
    if (free >= 0) begin sel = 1; slot = free; end
    else if (s >= minv) begin sel = 1; slot = mins; ev = 1; evt = ec_t[e][mins]; end
    if (sel) begin ec_v[e][slot] = 1; ec_s[e][slot] = s; ec_t[e][slot] = tok; end
  endtask

  task automatic check_rows(int ntok, string tag);
    for (int t = 0; t < ntok; t++) begin
      y_rd_token = TID_W'(t); #1;
      for (int o = 0; o < DOUT; o++) begin
        longint want = 0;
        for (int e = 0; e < E; e++) if (ch[t][e]) want += weighted(expert_out(e, xt[t], o), sc[t][e]);
        check(longint'(y_rd_vec[o]) == want, $sformatf("%s: y[%0d][%0d] = %0d want %0d", tag, t, o, y_rd_vec[o], want));
      end
    end
    @(negedge clk);
  endtask

  task automatic note_batch(int pairs, sched_mode_e m);
    if (stat_conflicts > 0) m_conflict++;
    if (stat_idles > 0) m_idle++;
    if (int'(stat_loads) < pairs) m_reuse++;
    if (m == SCHED_COMPACT) m_compact++; else m_resched++;
  endtask

  initial begin
    int pairs0, npairs;
    prog_en = 0; tok_we = 0; seq_clear = 0; score_valid = 0; score_gen = 0; prefill_start = 0;
    prog_expert = '0; prog_rt = '0; prog_ct = '0; prog_row = '0; tok_idx = '0; tok_rt = '0;
    score_token = '0; y_rd_token = '0;
    foreach (prog_data[c]) prog_data[c] = '0;
    foreach (tok_data[r]) tok_data[r] = '0;
    foreach (score_vec[e]) score_vec[e] = '0;
    for (int e = 0; e < E; e++) begin
      exp_group[e] = GID_W'((e < E / 2) ? e : E - 1 - e);
      exp_local[e] = LOC_W'(e >= E / 2);
    end
    sched_mode = SCHED_RESCHEDULE; route_mode = ROUTE_TOKEN_CHOICE;
    repeat (3) @(negedge clk); rst_n = 1;

    // weights
    for (int e = 0; e < E; e++)
        for (int ct = 0; ct < CT; ct++)
          for (int r = 0; r < XR; r++) begin
            prog_en = 1; prog_expert = EID_W'(e); prog_rt = '0; prog_ct = CT_W'(ct);
            prog_row = $clog2(XR)'(r);
            for (int c = 0; c < XC; c++) begin
              w[e][r][ct*XC + c] = $urandom_range(0, 40) - 20;
              prog_data[c] = DATA_W'(w[e][r][ct*XC + c]);
            end
            @(negedge clk);
          end
    prog_en = 0;

    // ---- 1. token-choice prefill, both policies, several random batches --------------
    for (int b = 0; b < 2; b++) begin
      sched_mode = (b % 2) ? SCHED_COMPACT : SCHED_RESCHEDULE;
      route_mode = ROUTE_TOKEN_CHOICE;
      seq_clear = 1; @(negedge clk); seq_clear = 0;
      for (int t = 0; t < NTOK; t++) begin
        for (int i = 0; i < XR; i++) xt[t][i] = $urandom_range(0, 40) - 20;
        send_token(t, xt[t]);
      end
      npairs = 0;
      for (int t = 0; t < NTOK; t++) begin
        bit taken [E];
        for (int e = 0; e < E; e++) begin sc[t][e] = $urandom_range(0, 65535); taken[e] = 0; ch[t][e] = 0; end
        for (int k = 0; k < KT; k++) begin
          int bst;
          bst = -1;
          for (int e = 0; e < E; e++) if (!taken[e] && (bst < 0 || sc[t][e] > sc[t][bst])) bst = e;
          taken[bst] = 1; ch[t][bst] = 1; npairs++;
        end
        send_score(t, 0, sc[t]);
      end
      pairs0 = stat_pairs;
      prefill_start = 1; @(negedge clk); prefill_start = 0;
      wait_batch();
      check(int'(stat_pairs) - pairs0 == npairs, "token choice: pairs computed");
      check(stat_slots == stat_makespan, "token choice: schedule as long as the largest group load");
      check_rows(NTOK, "token choice prefill");
      note_batch(npairs, sched_mode);
      m_tc++;
    end
    check(d_kind.size() == 0, "token choice writes nothing to the GO cache");

    // ---- 2. expert-choice prefill and generation ------------------------------------
    route_mode = ROUTE_EXPERT_CHOICE; sched_mode = SCHED_RESCHEDULE;
    seq_clear = 1; @(negedge clk); seq_clear = 0;
    foreach (ec_v[e, i]) ec_v[e][i] = 0;
    for (int t = 0; t < NTOK; t++) begin
      for (int i = 0; i < XR; i++) xt[t][i] = $urandom_range(0, 40) - 20;
      send_token(t, xt[t]);
    end
    for (int t = 0; t < NTOK; t++) begin
      bit s_; int sl, evt; bit ev;
      for (int e = 0; e < E; e++) begin
        sc[t][e] = $urandom_range(0, 65535);
        ec_insert(e, t, sc[t][e], s_, sl, ev, evt);
      end
      send_score(t, 0, sc[t]);
    end
    npairs = 0;
    for (int t = 0; t < T; t++) for (int e = 0; e < E; e++) begin
      ch[t][e] = 0;
      for (int i = 0; i < K; i++) if (ec_v[e][i] && ec_t[e][i] == t) ch[t][e] = 1;
      npairs += ch[t][e];
    end
    check(npairs == E * K, "expert choice: every expert takes k tokens");
    pairs0 = stat_pairs;
    prefill_start = 1; @(negedge clk); prefill_start = 0;
    wait_batch();
    repeat (4) @(negedge clk);
    check(int'(stat_pairs) - pairs0 == npairs, "expert choice: pairs computed");
    check_rows(NTOK, "expert choice prefill");
    note_batch(npairs, sched_mode);
    m_ec++;
    // DRAM: T score writes, then one record write per pair at its slot
    check(d_kind.size() == NTOK + npairs, $sformatf("prefill DRAM requests %0d", d_kind.size()));
    for (int t = 0; t < NTOK; t++)
      check(d_kind[t] == GO_SCORE_WR && d_addr[t] == t * E * SCORE_W / 8 && d_first[t] == sc[t][0],
            $sformatf("score write of token %0d", t));
    for (int i = NTOK; i < d_kind.size(); i++) begin
      bit found;
      found = 0;
      for (int e = 0; e < E; e++) for (int s = 0; s < K; s++)
        if (ec_v[e][s] && ec_t[e][s] == d_tok[i] && d_addr[i] == 32'h1000_0000 + (e * K + s) * DOUT) found = 1;
      check(d_kind[i] == GO_OUT_WR && found, "record written to the slot its token holds");
    end
    d_kind.delete(); d_addr.delete(); d_tok.delete(); d_first.delete();

    for (int g = 0; g < GEN_STEPS; g++) begin
      int tok;
      int s [E];
      int nsel, nev;
      bit sel [E]; bit ev [E]; int sl [E]; int evt [E];
      tok = NTOK + g; nsel = 0; nev = 0;
      for (int i = 0; i < XR; i++) xt[0][i] = $urandom_range(0, 40) - 20;
      send_token(0, xt[0]);
      for (int e = 0; e < E; e++) begin
        // later steps get higher scores now and then so that experts change their choice
        s[e] = (g % 3 == 0) ? $urandom_range(40000, 65535) : $urandom_range(0, 65535);
        sc[0][e] = s[e];
        ec_insert(e, tok, s[e], sel[e], sl[e], ev[e], evt[e]);
        ch[0][e] = sel[e];
        nsel += sel[e]; nev += ev[e];
      end
      pairs0 = stat_pairs;
      send_score(tok, 1, s);
      wait_batch();
      repeat (4) @(negedge clk);
      check(int'(stat_pairs) - pairs0 == nsel, "generation: only the experts that take the token compute");
      check_rows(1, $sformatf("generation step %0d nsel %0d nev %0d", g, nsel, nev));
      if (nev > 0) m_evict++;
      // DRAM: score write, then per selecting expert (read if evicting) + write
      check(d_kind.size() == 1 + nsel + nev, $sformatf("generation DRAM requests %0d", d_kind.size()));
      if (d_kind.size() > 0)
        check(d_kind[0] == GO_SCORE_WR && d_addr[0] == tok * E * SCORE_W / 8, "generation score write");
      for (int i = 1; i < d_kind.size(); i++) begin
        bit ok;
        ok = 0;
        for (int e = 0; e < E; e++) if (sel[e] && d_addr[i] == 32'h1000_0000 + (e * K + sl[e]) * DOUT) begin
          if (d_kind[i] == GO_OUT_RD) ok = ev[e] && d_tok[i] == evt[e];
          else ok = (d_kind[i] == GO_OUT_WR) && d_tok[i] == tok;
        end
        if (d_kind[i] == GO_OUT_RD) m_go_rd++;
        check(ok, "generation record request");
      end
      d_kind.delete(); d_addr.delete(); d_tok.delete(); d_first.delete();
    end
    check(int'(stat_gen_steps) == GEN_STEPS, "generation step count");

    // ---- mechanisms ------------------------------------------------------------------
    $display("mechanisms: conflict=%0d idle=%0d reuse=%0d compact=%0d reschedule=%0d token_choice=%0d expert_choice=%0d evict=%0d go_read=%0d dram_stall=%0d",
             m_conflict, m_idle, m_reuse, m_compact, m_resched, m_tc, m_ec, m_evict, m_go_rd, m_stall);
    check(m_conflict > 0, "a shared-peripheral conflict happened");
    check(m_idle > 0, "an idle was inserted");
    $display("full size: slots/transfers of the last batch %0d/%0d", stat_slots, stat_loads);
    check(m_reuse > 0, "a token was reused within a slot");
    check(m_compact > 0 && m_resched > 0, "both scheduling policies ran");
    check(m_tc > 0 && m_ec > 0, "both routings ran");
    check(m_evict > 0 && m_go_rd > 0, "an eviction read the GO cache");
    check(m_stall > 0, "a DRAM stall happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
