// tb_pim_crossbar: checks the crossbar model's dot products and its ROWS-cycle latency.
//
// A 16x8 crossbar is programmed with random signed weights; random input vectors are
// applied and every column result is compared with the dot product computed here. The
// done pulse must come ROWS + 1 cycles after start.
module tb_pim_crossbar;
  localparam int ROWS = 16, COLS = 8, DW = 8, PW = 2 * DW + 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic prog_en, start, busy, done;
  logic [3:0] prog_row;
  logic signed [DW-1:0] prog_data [COLS];
  logic signed [DW-1:0] x [ROWS];
  logic signed [PW-1:0] psum [COLS];

  pim_crossbar #(.ROWS(ROWS), .COLS(COLS), .DATA_W(DW), .PSUM_W(PW)) dut (.*);

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

  int w [ROWS][COLS];

  initial begin
    prog_en = 0; start = 0; prog_row = '0;
    foreach (prog_data[c]) prog_data[c] = '0;
    foreach (x[r]) x[r] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      prog_en = 1; prog_row = 4'(r);
      for (int c = 0; c < COLS; c++) begin w[r][c] = $urandom_range(0, 255) - 128; prog_data[c] = DW'(w[r][c]); end
      @(negedge clk);
    end
    prog_en = 0;
    for (int n = 0; n < 20; n++) begin
      int cyc;
      for (int r = 0; r < ROWS; r++) x[r] = DW'($urandom_range(0, 255) - 128);
      start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      check(cyc == ROWS + 1, $sformatf("latency %0d cycles", cyc));
      for (int c = 0; c < COLS; c++) begin
        int s;
        s = 0;
        for (int r = 0; r < ROWS; r++) s += w[r][c] * int'(x[r]);
        check(int'(psum[c]) == s, $sformatf("vector %0d column %0d: %0d want %0d", n, c, psum[c], s));
      end
      check(!busy, "idle after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
