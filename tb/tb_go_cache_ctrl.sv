// tb_go_cache_ctrl: checks the DRAM traffic of the gate-output cache.
//
// Score events must give one score write at SCORE_BASE + token * 32 carrying the score
// vector. Output events must give a write of the record at OUT_BASE + (expert*K + slot) *
// D bytes, preceded by a read of the same record (tagged with the departing token) when
// the pair evicts one. DRAM ready is dropped at random; requests must hold meanwhile.
module tb_go_cache_ctrl;
  import moe_pkg::*;
  localparam int E = 16, K = 8, D = 8;
  localparam logic [31:0] SB = 32'h0000_0000, OB = 32'h1000_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic sc_valid, sc_ready, out_valid, out_ready, out_evict, req_valid, req_ready;
  tok_t sc_token, out_token, out_evict_token, req_token;
  score_t sc_vec [E];
  logic [3:0] out_expert;
  logic [2:0] out_slot;
  data_t out_vec [D];
  go_req_e req_kind;
  logic [31:0] req_addr, n_score_wr, n_out_rd, n_out_wr;
  score_t req_score [E];
  data_t req_data [D];

  go_cache_ctrl #(.E(E), .K(K), .D(D), .SCORE_BASE(SB), .OUT_BASE(OB)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected request queue
  go_req_e q_kind [$];
  int      q_addr [$];
  int      q_tok  [$];
  int      q_first[$];   // first score / data element expected
  int      nsw = 0, nrd = 0, nwr = 0;

  // DRAM side: random ready, compare accepted requests in order
  always @(negedge clk) if (rst_n) req_ready <= ($urandom_range(0, 2) != 0);
  always @(posedge clk) begin
    if (rst_n && req_valid && req_ready) begin
      if (q_kind.size() == 0) check(0, "unexpected request");
      else begin
        check(req_kind == q_kind[0] && int'(req_addr) == q_addr[0] && int'(req_token) == q_tok[0],
              $sformatf("request kind %0d addr %h token %0d", req_kind, req_addr, req_token));
        if (req_kind == GO_SCORE_WR) check(int'(req_score[0]) == q_first[0], "score payload");
        if (req_kind == GO_OUT_WR)   check(int'(req_data[0]) == q_first[0], "record payload");
        void'(q_kind.pop_front()); void'(q_addr.pop_front()); void'(q_tok.pop_front()); void'(q_first.pop_front());
      end
    end
  end

  initial begin
    sc_valid = 0; out_valid = 0; out_evict = 0; req_ready = 0;
    sc_token = '0; out_token = '0; out_evict_token = '0; out_expert = '0; out_slot = '0;
    foreach (sc_vec[e]) sc_vec[e] = '0;
    foreach (out_vec[c]) out_vec[c] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      if ($urandom_range(0, 1)) begin
        int t = $urandom_range(0, 200);
        sc_valid = 1; sc_token = tok_t'(t);
        foreach (sc_vec[e]) sc_vec[e] = score_t'($urandom);
        q_kind.push_back(GO_SCORE_WR); q_addr.push_back(int'(SB) + t * 32); q_tok.push_back(t);
        q_first.push_back(int'(sc_vec[0]));
        nsw++;
        while (!sc_ready) @(negedge clk);
        @(negedge clk);
        sc_valid = 0;
      end else begin
        int t, ex, sl, et;
        bit ev;
        t = $urandom_range(0, 200); ex = $urandom_range(0, E - 1); sl = $urandom_range(0, K - 1);
        ev = $urandom_range(0, 1); et = $urandom_range(0, 200);
        out_valid = 1; out_token = tok_t'(t); out_expert = 4'(ex); out_slot = 3'(sl);
        out_evict = ev; out_evict_token = tok_t'(et);
        foreach (out_vec[c]) out_vec[c] = data_t'($urandom);
        if (ev) begin
          q_kind.push_back(GO_OUT_RD); q_addr.push_back(int'(OB) + (ex * K + sl) * D); q_tok.push_back(et);
          q_first.push_back(0); nrd++;
        end
        q_kind.push_back(GO_OUT_WR); q_addr.push_back(int'(OB) + (ex * K + sl) * D); q_tok.push_back(t);
        q_first.push_back(int'(out_vec[0])); nwr++;
        while (!out_ready) @(negedge clk);
        @(negedge clk);
        out_valid = 0;
      end
    end
    while (q_kind.size() != 0) @(negedge clk);
    repeat (2) @(negedge clk);
    check(int'(n_score_wr) == nsw && int'(n_out_rd) == nrd && int'(n_out_wr) == nwr, "request counters");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
