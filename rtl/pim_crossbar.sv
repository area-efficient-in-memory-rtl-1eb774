// pim_crossbar: behavioural model of one analog in-memory-computing crossbar.
//
// This is a behavioural model, not a circuit: the real part is a 256x256 array of
// non-volatile cells whose column currents form the dot products of the row voltages
// with the stored weights in one analog step. Here the weights sit in a digital memory
// (one word per row) and the dot products are formed exactly, one row per clock, so an
// activation takes ROWS cycles; the analog step's 130 ns is not modelled.
//
// Interface
//   prog_en/prog_row/prog_data : writes one row of signed weights (one cycle).
//   start                      : begins an activation on the input vector x, which must
//                                stay stable until done (the owning tile's DAC register
//                                holds it).
//   busy, done                 : busy while computing; done pulses for one cycle with
//                                psum valid. psum holds until the next start.
// Programming while busy is not allowed (asserted).
// The assertions are disabled during reset, so lint reports rst_n as used both as an
// asynchronous reset and in synchronous logic; that is intended.
module pim_crossbar #(
  parameter int unsigned ROWS   = moe_pkg::XBAR_ROWS,
  parameter int unsigned COLS   = moe_pkg::XBAR_COLS,
  parameter int unsigned DATA_W = moe_pkg::DATA_W,
  parameter int unsigned PSUM_W = moe_pkg::PSUM_W
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            prog_en,
  input  logic        [$clog2(ROWS)-1:0]  prog_row,
  input  logic signed [DATA_W-1:0]        prog_data [COLS],
  input  logic                            start,
  input  logic signed [DATA_W-1:0]        x [ROWS],
  output logic                            busy,
  output logic                            done,
  output logic signed [PSUM_W-1:0]        psum [COLS]
);

  logic [COLS*DATA_W-1:0]   w_mem [ROWS];
  logic [$clog2(ROWS)-1:0]  row;
  logic [COLS*DATA_W-1:0]   w_row;

  always_ff @(posedge clk) begin
    if (prog_en) begin
      for (int c = 0; c < COLS; c++) w_mem[prog_row][c*DATA_W +: DATA_W] <= prog_data[c];
    end
  end

  assign w_row = w_mem[row];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      row  <= '0;
      for (int c = 0; c < COLS; c++) psum[c] <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        row  <= '0;
        for (int c = 0; c < COLS; c++) psum[c] <= '0;
      end else if (busy) begin
        for (int c = 0; c < COLS; c++)
          psum[c] <= psum[c] + PSUM_W'(signed'(w_row[c*DATA_W +: DATA_W]) * x[row]);
        if (row == $clog2(ROWS)'(ROWS - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        row <= row + 1'b1;
      end
    end
  end

  a_no_prog_while_busy: assert property (@(posedge clk) disable iff (!rst_n) !(prog_en && busy))
    else $error("pim_crossbar: weights written during an activation");

endmodule
