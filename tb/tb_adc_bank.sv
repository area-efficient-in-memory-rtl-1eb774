// tb_adc_bank: checks the ADC model's scaling and saturation.
//
// Random column sums over the whole input range (many beyond full scale) are sampled; each
// code must equal floor(sum / 2^SHIFT) clipped to [-128, 127], one cycle later.
module tb_adc_bank;
  localparam int COLS = 8, IW = 24, DW = 8, SH = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  logic signed [IW-1:0] in_sum [COLS];
  logic signed [DW-1:0] code [COLS];

  adc_bank #(.COLS(COLS), .IN_W(IW), .DATA_W(DW), .SHIFT(SH)) dut (.*);

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

  int v [COLS];

  initial begin
    in_valid = 0;
    foreach (in_sum[c]) in_sum[c] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      for (int c = 0; c < COLS; c++) begin
        v[c] = (n % 2) ? ($urandom_range(0, 131071) - 65536) : ($urandom_range(0, 16777215) - 8388608);
        in_sum[c] = IW'(v[c]);
      end
      in_valid = 1; @(negedge clk); in_valid = 0;
      check(out_valid, "out_valid one cycle after in_valid");
      for (int c = 0; c < COLS; c++) begin
        int q;
        q = v[c] >>> SH;
        if (q > 127) q = 127;
        if (q < -128) q = -128;
        check(int'(code[c]) == q, $sformatf("sum %0d -> code %0d want %0d", v[c], code[c], q));
      end
      @(negedge clk);
      check(!out_valid, "out_valid is a pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
