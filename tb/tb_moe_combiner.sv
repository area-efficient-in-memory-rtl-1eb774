// tb_moe_combiner: checks the gate-weighted sum y = sum G * E per token.
//
// Random (token, score, expert output) contributions are fed in; the testbench keeps its own
// sums, floor((E * score) / 2^16) per contribution, and compares every token row of y after
// each batch, plus the saturated record of every contribution. A clear must restart y.
module tb_moe_combiner;
  import moe_pkg::*;
  localparam int T = 4, D = 8, AW = 13, YW = 24;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, in_valid;
  logic [1:0] in_token, y_rd_token;
  score_t in_score;
  logic signed [AW-1:0] in_vec [D];
  data_t rec_vec [D];
  logic signed [YW-1:0] y_rd_vec [D];
  logic [T-1:0] y_written;

  moe_combiner #(.T(T), .D(D), .ACC_W(AW), .Y_W(YW)) dut (.*);

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

  longint ref_y [T][D];
  bit     used [T];

  initial begin
    clear = 0; in_valid = 0; in_token = '0; in_score = '0; y_rd_token = '0;
    foreach (in_vec[c]) in_vec[c] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int b = 0; b < 8; b++) begin
      clear = 1; @(negedge clk); clear = 0;
      foreach (ref_y[t, c]) ref_y[t][c] = 0;
      foreach (used[t]) used[t] = 0;
      for (int n = 0; n < 12; n++) begin
        int t, s;
        t = $urandom_range(0, T - 1);
        s = $urandom_range(0, 65535);
        in_valid = 1; in_token = 2'(t); in_score = score_t'(s);
        for (int c = 0; c < D; c++) in_vec[c] = AW'($urandom_range(0, 4095) - 2048);
        #1;
        for (int c = 0; c < D; c++) begin
          longint p, q;
          p = longint'(in_vec[c]) * longint'(s);
          q = p >>> 16;
          ref_y[t][c] += q;
          if (q > 127) q = 127;
          if (q < -128) q = -128;
          check(longint'(rec_vec[c]) == q, "record = saturated weighted output");
        end
        used[t] = 1;
        @(negedge clk);
      end
      in_valid = 0;
      for (int t = 0; t < T; t++) begin
        y_rd_token = 2'(t); #1;
        check(y_written[t] == used[t], "written flags");
        for (int c = 0; c < D; c++)
          check(longint'(y_rd_vec[c]) == ref_y[t][c], $sformatf("batch %0d y[%0d][%0d]", b, t, c));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
