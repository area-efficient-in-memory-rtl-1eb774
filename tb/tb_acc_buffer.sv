// tb_acc_buffer: checks that the accumulator adds the row tiles' ADC codes per column.
module tb_acc_buffer;
  localparam int RT = 16, COLS = 8, DW = 8, AW = 13;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  logic signed [DW-1:0] in_code [RT][COLS];
  logic signed [AW-1:0] out_sum [COLS];

  acc_buffer #(.ROW_TILES(RT), .COLS(COLS), .DATA_W(DW), .ACC_W(AW)) dut (.*);

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

  int want [COLS];

  initial begin
    in_valid = 0;
    foreach (in_code[t, c]) in_code[t][c] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 100; n++) begin
      foreach (want[c]) want[c] = 0;
      for (int t = 0; t < RT; t++)
        for (int c = 0; c < COLS; c++) begin
          int v;
          v = (n < 3) ? ((n == 1) ? 127 : -128) : $urandom_range(0, 255) - 128;
          in_code[t][c] = DW'(v);
          want[c] += v;
        end
      in_valid = 1; @(negedge clk); in_valid = 0;
      check(out_valid, "out_valid after one cycle");
      for (int c = 0; c < COLS; c++) check(int'(out_sum[c]) == want[c], $sformatf("column %0d sum", c));
      // the buffer holds its result while no new input arrives
      foreach (in_code[t, c]) in_code[t][c] = '0;
      @(negedge clk);
      for (int c = 0; c < COLS; c++) check(int'(out_sum[c]) == want[c], "result held");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
