// tb_expert_group: checks one expert group end to end on a reduced geometry.
//
// Two experts share 3 x 2 tiles of 8x4 crossbars (input 24, output 8). Each expert's
// weights are programmed tile by tile; tokens are run through either expert and the
// output must equal, per column, the sum over row tiles of the ADC conversion of the
// tile's dot product, computed here from the weights. Latency is XBAR_ROWS + 4 edges.
module tb_expert_group;
  localparam int GS = 2, XR = 8, XC = 4, RT = 3, CT = 2, DW = 8, PW = 20, AW = 12, SH = 2;
  localparam int DIN = RT * XR, DOUT = CT * XC;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic prog_en, start, busy, out_valid;
  logic [0:0] prog_sel, sel;
  logic [1:0] prog_rt;
  logic [0:0] prog_ct;
  logic [2:0] prog_row;
  logic signed [DW-1:0] prog_data [XC];
  logic signed [DW-1:0] x [DIN];
  logic signed [AW-1:0] out_vec [DOUT];

  expert_group #(.GROUP_SIZE(GS), .XBAR_ROWS(XR), .XBAR_COLS(XC), .ROW_TILES(RT), .COL_TILES(CT),
                 .DATA_W(DW), .PSUM_W(PW), .ACC_W(AW), .ADC_SHIFT(SH)) dut (.*);

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

  int w [GS][DIN][DOUT];
  int xv [DIN];

  initial begin
    prog_en = 0; start = 0; prog_row = '0; prog_sel = '0; sel = '0; prog_rt = '0; prog_ct = '0;
    foreach (prog_data[c]) prog_data[c] = '0;
    foreach (x[r]) x[r] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int g = 0; g < GS; g++)
      for (int rt = 0; rt < RT; rt++)
        for (int ct = 0; ct < CT; ct++)
          for (int r = 0; r < XR; r++) begin
            prog_en = 1; prog_sel = 1'(g); prog_rt = 2'(rt); prog_ct = 1'(ct); prog_row = 3'(r);
            for (int c = 0; c < XC; c++) begin
              w[g][rt*XR + r][ct*XC + c] = $urandom_range(0, 30) - 15;
              prog_data[c] = DW'(w[g][rt*XR + r][ct*XC + c]);
            end
            @(negedge clk);
          end
    prog_en = 0;
    for (int n = 0; n < 30; n++) begin
      int cyc, s;
      s = n % GS;
      for (int i = 0; i < DIN; i++) begin xv[i] = $urandom_range(0, 40) - 20; x[i] = DW'(xv[i]); end
      sel = 1'(s); start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (!out_valid) begin @(negedge clk); cyc++; end
      check(cyc == XR + 4, $sformatf("latency %0d", cyc));
      for (int o = 0; o < DOUT; o++) begin
        int acc;
        acc = 0;
        for (int rt = 0; rt < RT; rt++) begin
          int sum, q;
          sum = 0;
          for (int r = 0; r < XR; r++) sum += w[s][rt*XR + r][o] * xv[rt*XR + r];
          q = sum >>> SH;
          if (q > 127) q = 127;
          if (q < -128) q = -128;
          acc += q;
        end
        check(int'(out_vec[o]) == acc, $sformatf("expert %0d output %0d: %0d want %0d", s, o, out_vec[o], acc));
      end
      @(negedge clk);
      check(!busy, "group free after its result");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
