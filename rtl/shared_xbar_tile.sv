// shared_xbar_tile: GROUP_SIZE crossbars that share one set of peripherals.
//
// This is the crossbar-level multiplexing of the architecture. Each crossbar of the tile
// stores the same weight tile position of a different expert of one group. The tile has
// one DAC input register and one ADC bank instead of one per crossbar: on start the token
// slice is latched into the DAC register, the crossbar named by sel is activated, and when
// it finishes its column results are steered through the mux into the shared ADCs. Only
// one crossbar can use the peripherals at a time; a start while busy is a structural
// conflict and is flagged by an assertion (the scheduler never issues one).
// Sharing the peripherals among the crossbars of a group follows the paper; the register
// and mux details and the one-cycle ADC stage are this design's choice.
//
// Timing: out_valid comes ROWS + 3 clock edges after the edge that takes start (one edge
// to latch the DAC register, one to start the crossbar, ROWS row steps, one ADC step).
// busy is high from the edge that takes start until out_valid.
// The assertions are disabled during reset, so lint reports rst_n as used both as an
// asynchronous reset and in synchronous logic; that is intended.
module shared_xbar_tile #(
  parameter int unsigned GROUP_SIZE = moe_pkg::GROUP_SIZE,
  parameter int unsigned ROWS       = moe_pkg::XBAR_ROWS,
  parameter int unsigned COLS       = moe_pkg::XBAR_COLS,
  parameter int unsigned DATA_W     = moe_pkg::DATA_W,
  parameter int unsigned PSUM_W     = moe_pkg::PSUM_W,
  parameter int unsigned ADC_SHIFT  = moe_pkg::ADC_SHIFT,
  localparam int unsigned SEL_W     = (GROUP_SIZE > 1) ? $clog2(GROUP_SIZE) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // weight programming
  input  logic                     prog_en,
  input  logic [SEL_W-1:0]         prog_sel,
  input  logic [$clog2(ROWS)-1:0]  prog_row,
  input  logic signed [DATA_W-1:0] prog_data [COLS],
  // activation
  input  logic                     start,
  input  logic [SEL_W-1:0]         sel,
  input  logic signed [DATA_W-1:0] x [ROWS],
  output logic                     busy,
  output logic                     out_valid,
  output logic signed [DATA_W-1:0] code [COLS]
);

  logic signed [DATA_W-1:0] dac_reg [ROWS];
  logic [SEL_W-1:0]         sel_q;
  logic [GROUP_SIZE-1:0]    xb_busy, xb_done;
  logic signed [PSUM_W-1:0] xb_psum [GROUP_SIZE][COLS];
  logic signed [PSUM_W-1:0] mux_psum [COLS];
  logic                     xb_start_q;
  logic                     active;

  // DAC input register and select register, shared by all crossbars of the tile.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel_q      <= '0;
      xb_start_q <= 1'b0;
      active     <= 1'b0;
      for (int r = 0; r < ROWS; r++) dac_reg[r] <= '0;
    end else begin
      xb_start_q <= 1'b0;
      if (start && !busy) begin
        sel_q      <= sel;
        xb_start_q <= 1'b1;
        active     <= 1'b1;
        for (int r = 0; r < ROWS; r++) dac_reg[r] <= x[r];
      end else if (out_valid) begin
        active <= 1'b0;
      end
    end
  end

  for (genvar g = 0; g < GROUP_SIZE; g++) begin : g_xbar
    pim_crossbar #(.ROWS(ROWS), .COLS(COLS), .DATA_W(DATA_W), .PSUM_W(PSUM_W)) u_xbar (
      .clk, .rst_n,
      .prog_en  (prog_en && (prog_sel == SEL_W'(g))),
      .prog_row,
      .prog_data,
      .start    (xb_start_q && (sel_q == SEL_W'(g))),
      .x        (dac_reg),
      .busy     (xb_busy[g]),
      .done     (xb_done[g]),
      .psum     (xb_psum[g])
    );
  end

  // Output multiplexer in front of the shared ADC bank.
  always_comb begin
    for (int c = 0; c < COLS; c++) mux_psum[c] = xb_psum[sel_q][c];
  end

  adc_bank #(.COLS(COLS), .IN_W(PSUM_W), .DATA_W(DATA_W), .SHIFT(ADC_SHIFT)) u_adc (
    .clk, .rst_n,
    .in_valid  (|xb_done),
    .in_sum    (mux_psum),
    .out_valid (out_valid),
    .code      (code)
  );

  assign busy = active;

  a_no_conflict: assert property (@(posedge clk) disable iff (!rst_n) !(start && busy))
    else $error("shared_xbar_tile: start while the shared peripherals are busy");
  a_one_active: assert property (@(posedge clk) disable iff (!rst_n) (xb_busy & (xb_busy - 1'b1)) == '0)
    else $error("shared_xbar_tile: more than one crossbar active");

endmodule
