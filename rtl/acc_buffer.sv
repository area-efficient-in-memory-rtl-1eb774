// acc_buffer: accumulator and output buffer of one column tile of an expert group.
//
// An expert's input vector (d_model values) is spread over ROW_TILES crossbars stacked
// along the rows; each returns 8-bit ADC codes for the same XBAR_COLS outputs. The
// accumulator adds the ROW_TILES codes of every output column and keeps the sum in its
// buffer until the next result, so the expert output slice E(x)[cols] can be read while
// the crossbars already work on the next slot. The adder-tree organisation (all row tiles
// summed in one registered step) is this design's choice; the paper only names the block.
//
// Timing: in_valid (all row tiles' codes present) -> out_valid one cycle later.
module acc_buffer #(
  parameter int unsigned ROW_TILES = moe_pkg::ROW_TILES,
  parameter int unsigned COLS      = moe_pkg::XBAR_COLS,
  parameter int unsigned DATA_W    = moe_pkg::DATA_W,
  parameter int unsigned ACC_W     = moe_pkg::ACC_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [DATA_W-1:0] in_code [ROW_TILES][COLS],
  output logic                     out_valid,
  output logic signed [ACC_W-1:0]  out_sum [COLS]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int c = 0; c < COLS; c++) out_sum[c] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int c = 0; c < COLS; c++) begin
          logic signed [ACC_W-1:0] s;
          s = '0;
          for (int t = 0; t < ROW_TILES; t++) s = s + ACC_W'(in_code[t][c]);
          out_sum[c] <= s;
        end
      end
    end
  end

endmodule
