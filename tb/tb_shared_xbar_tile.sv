// tb_shared_xbar_tile: checks peripheral sharing between the crossbars of a tile.
//
// Two crossbars get different random weights. Activations alternate between them at
// random through the one shared DAC register and ADC bank; every code must be the ADC
// conversion (sum >> 2, clipped to 8 bits) of the selected crossbar's dot product, which
// proves the multiplexer picks the right array. Latency is checked to be ROWS + 3 edges.
module tb_shared_xbar_tile;
  localparam int GS = 2, ROWS = 8, COLS = 4, DW = 8, PW = 20, SH = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic prog_en, start, busy, out_valid;
  logic [0:0] prog_sel, sel;
  logic [2:0] prog_row;
  logic signed [DW-1:0] prog_data [COLS];
  logic signed [DW-1:0] x [ROWS];
  logic signed [DW-1:0] code [COLS];

  shared_xbar_tile #(.GROUP_SIZE(GS), .ROWS(ROWS), .COLS(COLS), .DATA_W(DW), .PSUM_W(PW),
                     .ADC_SHIFT(SH)) dut (.*);

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

  int w [GS][ROWS][COLS];
  int xv [ROWS];
  int n_sel [GS];

  initial begin
    prog_en = 0; start = 0; prog_row = '0; prog_sel = '0; sel = '0;
    foreach (prog_data[c]) prog_data[c] = '0;
    foreach (x[r]) x[r] = '0;
    n_sel = '{0, 0};
    repeat (2) @(negedge clk); rst_n = 1;
    for (int g = 0; g < GS; g++)
      for (int r = 0; r < ROWS; r++) begin
        prog_en = 1; prog_sel = 1'(g); prog_row = 3'(r);
        for (int c = 0; c < COLS; c++) begin
          w[g][r][c] = $urandom_range(0, 40) - 20;
          prog_data[c] = DW'(w[g][r][c]);
        end
        @(negedge clk);
      end
    prog_en = 0;
    for (int n = 0; n < 40; n++) begin
      int cyc, s;
      s = $urandom_range(0, GS - 1);
      n_sel[s]++;
      for (int r = 0; r < ROWS; r++) begin xv[r] = $urandom_range(0, 60) - 30; x[r] = DW'(xv[r]); end
      sel = 1'(s); start = 1; @(negedge clk); start = 0;
      foreach (x[r]) x[r] = DW'($urandom);   // DAC register must hold the token slice
      cyc = 1;
      check(busy, "busy after start");
      while (!out_valid) begin @(negedge clk); cyc++; end
      check(cyc == ROWS + 3, $sformatf("latency %0d", cyc));
      for (int c = 0; c < COLS; c++) begin
        int sum, q;
        sum = 0;
        for (int r = 0; r < ROWS; r++) sum += w[s][r][c] * xv[r];
        q = sum >>> SH;
        if (q > 127) q = 127;
        if (q < -128) q = -128;
        check(int'(code[c]) == q, $sformatf("xbar %0d column %0d: %0d want %0d", s, c, code[c], q));
      end
      @(negedge clk);
      check(!busy, "peripherals free after the result");
    end
    check(n_sel[0] > 0 && n_sel[1] > 0, "both crossbars used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
