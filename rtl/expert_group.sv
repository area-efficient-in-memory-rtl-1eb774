// expert_group: all crossbars of one group of experts, with their shared peripherals.
//
// A group holds GROUP_SIZE experts. Every expert is a d_model x d_out linear layer cut into
// ROW_TILES x COL_TILES crossbar tiles; tile position (rt, ct) of all experts of the group
// sits in one shared_xbar_tile, so the group has ROW_TILES*COL_TILES peripheral sets for
// GROUP_SIZE*ROW_TILES*COL_TILES crossbars. Per slot the group computes E_sel(x) for one
// token x and one of its experts (sel): all tiles start together on their row slice of x,
// and one acc_buffer per column tile adds the row tiles' ADC codes.
// The group organisation follows Fig. 1 of the paper (DAC, crossbars, ADCs, Acc&buffer per
// group); the tiling of an expert into 16 x 6 crossbars is this design's reading of
// "1536 crossbars for 16 experts".
//
// Timing: out_valid comes XBAR_ROWS + 4 edges after the edge that takes start (tile
// latency plus the accumulator); out_vec then holds until the next result.
// The assertions are disabled during reset, so lint reports rst_n as used both as an
// asynchronous reset and in synchronous logic; that is intended.
module expert_group #(
  parameter int unsigned GROUP_SIZE = moe_pkg::GROUP_SIZE,
  parameter int unsigned XBAR_ROWS  = moe_pkg::XBAR_ROWS,
  parameter int unsigned XBAR_COLS  = moe_pkg::XBAR_COLS,
  parameter int unsigned ROW_TILES  = moe_pkg::ROW_TILES,
  parameter int unsigned COL_TILES  = moe_pkg::COL_TILES,
  parameter int unsigned DATA_W     = moe_pkg::DATA_W,
  parameter int unsigned PSUM_W     = moe_pkg::PSUM_W,
  parameter int unsigned ACC_W      = moe_pkg::ACC_W,
  parameter int unsigned ADC_SHIFT  = moe_pkg::ADC_SHIFT,
  localparam int unsigned SEL_W     = (GROUP_SIZE > 1) ? $clog2(GROUP_SIZE) : 1,
  localparam int unsigned RT_W      = (ROW_TILES > 1) ? $clog2(ROW_TILES) : 1,
  localparam int unsigned CT_W      = (COL_TILES > 1) ? $clog2(COL_TILES) : 1,
  localparam int unsigned D_IN      = ROW_TILES * XBAR_ROWS,
  localparam int unsigned D_OUT     = COL_TILES * XBAR_COLS
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // weight programming: one crossbar row per cycle
  input  logic                        prog_en,
  input  logic [SEL_W-1:0]            prog_sel,
  input  logic [RT_W-1:0]             prog_rt,
  input  logic [CT_W-1:0]             prog_ct,
  input  logic [$clog2(XBAR_ROWS)-1:0] prog_row,
  input  logic signed [DATA_W-1:0]    prog_data [XBAR_COLS],
  // one (token, expert) per slot
  input  logic                        start,
  input  logic [SEL_W-1:0]            sel,
  input  logic signed [DATA_W-1:0]    x [D_IN],
  output logic                        busy,
  output logic                        out_valid,
  output logic signed [ACC_W-1:0]     out_vec [D_OUT]
);

  logic [ROW_TILES-1:0][COL_TILES-1:0] tile_busy, tile_valid;
  logic signed [DATA_W-1:0] tile_code [COL_TILES][ROW_TILES][XBAR_COLS];
  logic [COL_TILES-1:0]     acc_valid;

  for (genvar rt = 0; rt < ROW_TILES; rt++) begin : g_rt
    logic signed [DATA_W-1:0] x_slice [XBAR_ROWS];
    always_comb for (int r = 0; r < XBAR_ROWS; r++) x_slice[r] = x[rt*XBAR_ROWS + r];
    for (genvar ct = 0; ct < COL_TILES; ct++) begin : g_ct
      shared_xbar_tile #(
        .GROUP_SIZE(GROUP_SIZE), .ROWS(XBAR_ROWS), .COLS(XBAR_COLS), .DATA_W(DATA_W),
        .PSUM_W(PSUM_W), .ADC_SHIFT(ADC_SHIFT)
      ) u_tile (
        .clk, .rst_n,
        .prog_en   (prog_en && prog_rt == RT_W'(rt) && prog_ct == CT_W'(ct)),
        .prog_sel, .prog_row, .prog_data,
        .start     (start && !busy),
        .sel, .x   (x_slice),
        .busy      (tile_busy[rt][ct]),
        .out_valid (tile_valid[rt][ct]),
        .code      (tile_code[ct][rt])
      );
    end
  end

  for (genvar ct = 0; ct < COL_TILES; ct++) begin : g_acc
    logic signed [ACC_W-1:0] sum [XBAR_COLS];
    acc_buffer #(.ROW_TILES(ROW_TILES), .COLS(XBAR_COLS), .DATA_W(DATA_W), .ACC_W(ACC_W)) u_acc (
      .clk, .rst_n,
      .in_valid  (tile_valid[0][ct]),
      .in_code   (tile_code[ct]),
      .out_valid (acc_valid[ct]),
      .out_sum   (sum)
    );
    always_comb for (int c = 0; c < XBAR_COLS; c++) out_vec[ct*XBAR_COLS + c] = sum[c];
  end

  // The group is busy from start until its accumulated result is out.
  logic running;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 running <= 1'b0;
    else if (start && !busy)    running <= 1'b1;
    else if (acc_valid[0])      running <= 1'b0;
  end
  assign busy      = running;
  assign out_valid = &acc_valid;

  a_tiles_in_step: assert property (@(posedge clk) disable iff (!rst_n)
                                    (tile_valid == '0) || (&tile_valid))
    else $error("expert_group: tiles out of step");
  a_tiles_busy_together: assert property (@(posedge clk) disable iff (!rst_n)
                                          (tile_busy == '0) || (&tile_busy))
    else $error("expert_group: tiles busy out of step");

endmodule
