// tb_token_choice_select: checks that exactly the KT highest-scoring experts are chosen.
//
// Random score vectors, half of them from a tiny range so that ties are frequent, are
// applied; the testbench picks the KT best experts by repeated maximum search (lowest
// index wins a tie) and compares the mask.
module tb_token_choice_select;
  import moe_pkg::*;
  localparam int E = 16, KT = 4;

  score_t scores [E];
  logic [E-1:0] chosen;

  token_choice_select #(.E(E), .KT(KT)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 500; n++) begin
      logic [E-1:0] want;
      bit taken [E];
      for (int e = 0; e < E; e++) begin
        scores[e] = (n % 2) ? score_t'($urandom_range(0, 3)) : score_t'($urandom);
        taken[e] = 0;
      end
      for (int k = 0; k < KT; k++) begin
        int b;
        b = -1;
        for (int e = 0; e < E; e++) if (!taken[e] && (b < 0 || scores[e] > scores[b])) b = e;
        taken[b] = 1;
      end
      for (int e = 0; e < E; e++) want[e] = taken[e];
      #1;
      check(chosen == want, $sformatf("vector %0d: %b want %b", n, chosen, want));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
