// mm_row: one pipe stage of the 2D pipelined matrix multiplier, i.e. the
// scalar-product pipeline VSCALARP(as) for one row as = ass[i] of matrix A.
//
// M cells sit side by side. The left input of cell 0 comes from a producer
// of the constant 0 (PRD(0)), which is always ready to hand out a zero; the
// right output of cell j feeds the left input of cell j+1. Column j receives
// b_j of the current input vector on its up channel and passes it on through
// its down channel to the next row. The right output of the last cell is
// the scalar product as . bs, one item per input vector: the column stream
// of C that this row turns out.
//
// Interface: up/down are arrays of M valid/ready channels (one per column),
// right is one channel. coef_we[j] loads coef_i into cell j.
//
// Timing: a value crosses one cell per cycle, so the result for an input
// vector whose items all arrive in cycle t leaves the row in cycle t+M.
// The chaining and the zero producer follow the published network; the
// handshake is this design's choice.
module mm_row
  import mm_pkg::*;
#(
  parameter int unsigned M = M_COLS
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [M-1:0] coef_we,
  input  data_t        coef_i,
  input  item_t        up_i        [M],
  input  logic [M-1:0] up_valid_i,
  output logic [M-1:0] up_ready_o,
  output item_t        down_o      [M],
  output logic [M-1:0] down_valid_o,
  input  logic [M-1:0] down_ready_i,
  output item_t        right_o,
  output logic         right_valid_o,
  input  logic         right_ready_i
);

  // Partial-sum links: link j is the left input of cell j; link M is the
  // right output of the row.
  item_t      sum      [M+1];
  logic [M:0] sum_valid;
  logic [M:0] sum_ready;

  // PRD(0): an endless producer of zeros.
  assign sum[0]       = ITEM_ZERO;
  assign sum_valid[0] = 1'b1;

  for (genvar j = 0; j < M; j++) begin : g_cell
    mm_cell u_cell (
      .clk          (clk),
      .rst_n        (rst_n),
      .coef_we      (coef_we[j]),
      .coef_i       (coef_i),
      .up_i         (up_i[j]),
      .up_valid_i   (up_valid_i[j]),
      .up_ready_o   (up_ready_o[j]),
      .left_i       (sum[j]),
      .left_valid_i (sum_valid[j]),
      .left_ready_o (sum_ready[j]),
      .right_o      (sum[j+1]),
      .right_valid_o(sum_valid[j+1]),
      .right_ready_i(sum_ready[j+1]),
      .down_o       (down_o[j]),
      .down_valid_o (down_valid_o[j]),
      .down_ready_i (down_ready_i[j])
    );
  end

  assign right_o       = sum[M];
  assign right_valid_o = sum_valid[M];
  assign sum_ready[M]  = right_ready_i;

endmodule
