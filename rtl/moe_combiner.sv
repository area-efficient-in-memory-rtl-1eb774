// moe_combiner: gate-weighted sum of expert outputs, y = sum_i G(x)_i * E_i(x).
//
// Expert results arrive one (token, expert) pair per cycle with the pair's gate score.
// The score is an unsigned fraction (SCORE_W fraction bits), so the weighted contribution
// is (E * score) >>> SCORE_W; it is added into the token's row of the output buffer y.
// The first contribution to a token after clear overwrites the row, so clearing needs no
// sweep of the buffer. The weighted contribution, saturated to DATA_W bits, is also given
// out (rec_vec) as the record the gate-output cache stores for the pair.
// The weighted sum follows the paper's MoE equation; the fixed-point formats, and taking
// the gate weight straight from the score (softmax left to the digital units), are this
// design's choices.
//
// Timing: in_valid updates y at the next edge; rec_vec is combinational; the read port
// y_rd_vec is combinational from y_rd_token.
module moe_combiner
  import moe_pkg::score_t, moe_pkg::data_t, moe_pkg::SCORE_W, moe_pkg::sat_data;
#(
  parameter int unsigned T     = moe_pkg::T_MAX,
  parameter int unsigned D     = moe_pkg::D_OUT,
  parameter int unsigned ACC_W = moe_pkg::ACC_W,
  parameter int unsigned Y_W   = moe_pkg::Y_W,
  localparam int unsigned TID_W = (T > 1) ? $clog2(T) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    in_valid,
  input  logic [TID_W-1:0]        in_token,
  input  score_t                  in_score,
  input  logic signed [ACC_W-1:0] in_vec  [D],
  output data_t                   rec_vec [D],
  input  logic [TID_W-1:0]        y_rd_token,
  output logic signed [Y_W-1:0]   y_rd_vec [D],
  output logic [T-1:0]            y_written
);

  localparam int unsigned PROD_W = ACC_W + SCORE_W + 1;

  logic signed [Y_W-1:0]  y [T][D];
  logic signed [Y_W-1:0]  contrib [D];

  always_comb begin
    for (int c = 0; c < D; c++) begin
      logic signed [PROD_W-1:0] p;
      p          = PROD_W'(in_vec[c]) * signed'({1'b0, in_score});
      contrib[c] = Y_W'(p >>> SCORE_W);
      rec_vec[c] = sat_data(48'(contrib[c]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y_written <= '0;
    end else if (clear) begin
      y_written <= '0;
    end else if (in_valid) begin
      y_written[in_token] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && !clear) begin
      for (int c = 0; c < D; c++)
        y[in_token][c] <= (y_written[in_token] ? y[in_token][c] : '0) + contrib[c];
    end
  end

  always_comb begin
    for (int c = 0; c < D; c++) y_rd_vec[c] = y_written[y_rd_token] ? y[y_rd_token][c] : '0;
  end

endmodule
