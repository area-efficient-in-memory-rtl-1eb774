// adc_bank: behavioural model of the ADC bank that one group of crossbars shares.
//
// This is a behavioural model: the real ADCs sample analog column currents. Here the
// column result arrives as an exact signed sum and is converted to a DATA_W-bit code by
// dividing by 2^SHIFT (arithmetic shift, i.e. the full-scale range) and saturating, which is
// what an 8-bit ADC with a fixed range does to an out-of-range current. The 8-bit output
// width follows the paper's crossbar specification; the range (SHIFT) is assumed.
//
// Interface: sample with in_valid; codes and out_valid appear one cycle later.
module adc_bank #(
  parameter int unsigned COLS   = moe_pkg::XBAR_COLS,
  parameter int unsigned IN_W   = moe_pkg::PSUM_W,
  parameter int unsigned DATA_W = moe_pkg::DATA_W,
  parameter int unsigned SHIFT  = moe_pkg::ADC_SHIFT
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [IN_W-1:0]   in_sum [COLS],
  output logic                     out_valid,
  output logic signed [DATA_W-1:0] code [COLS]
);

  localparam logic signed [IN_W-1:0] MaxC = IN_W'((1 << (DATA_W - 1)) - 1);
  localparam logic signed [IN_W-1:0] MinC = -IN_W'(1 << (DATA_W - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int c = 0; c < COLS; c++) code[c] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int c = 0; c < COLS; c++) begin
          logic signed [IN_W-1:0] q;
          q = in_sum[c] >>> SHIFT;
          if (q > MaxC)      code[c] <= MaxC[DATA_W-1:0];
          else if (q < MinC) code[c] <= MinC[DATA_W-1:0];
          else               code[c] <= q[DATA_W-1:0];
        end
      end
    end
  end

endmodule
