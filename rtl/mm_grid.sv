// mm_grid: the N x M systolic network that multiplies the stored matrix
// A = ass (N x M) by a stream of column vectors bs_k of B = bss.
//
// Row i is a pipe stage (mm_row) holding ass[i]; row 0 takes the input
// vector, one item per column, and every row passes the b values down to
// the row below. Row i turns out c[i][k] = sum_j ass[i][j] * bss[j][k] on
// its own right channel, so the network produces a vector of N column
// streams. The b values and the end-of-transmission token that leave the
// bottom row are offered on the bottom channels, where the enclosing design
// puts a sink (the SINK processes under each column of the published
// network).
//
// Interface: col_in[j] feeds the top of column j; row_out[i] is the result
// stream of row i; bot_out[j] leaves the bottom of column j. Coefficients
// are written one at a time: coef_we with coef_row, coef_col, coef_data.
//
// Timing: cell (i,j) works on vector k one cycle after cell (i-1,j) and
// cell (i,j-1) did, so with every input offered in cycle t and all outputs
// ready, row i's result is valid in cycle t+i+M. The structure follows the
// published systolic network; the handshakes are this design's choice.
module mm_grid
  import mm_pkg::*;
#(
  parameter int unsigned N = N_ROWS,
  parameter int unsigned M = M_COLS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // coefficient load
  input  logic                 coef_we,
  input  logic [$clog2(N)-1:0] coef_row,
  input  logic [$clog2(M)-1:0] coef_col,
  input  data_t                coef_data,
  // top of the columns
  input  item_t                col_in        [M],
  input  logic [M-1:0]         col_in_valid,
  output logic [M-1:0]         col_in_ready,
  // bottom of the columns
  output item_t                bot_out       [M],
  output logic [M-1:0]         bot_out_valid,
  input  logic [M-1:0]         bot_out_ready,
  // one result stream per row
  output item_t                row_out       [N],
  output logic [N-1:0]         row_out_valid,
  input  logic [N-1:0]         row_out_ready
);

  // Vertical links: vlink[i] is the up input of row i; vlink[N] is the
  // bottom of the network.
  item_t        vlink       [N+1][M];
  logic [M-1:0] vlink_valid [N+1];
  logic [M-1:0] vlink_ready [N+1];

  assign vlink[0]       = col_in;
  assign vlink_valid[0] = col_in_valid;
  assign col_in_ready   = vlink_ready[0];

  for (genvar i = 0; i < N; i++) begin : g_row
    logic [M-1:0] row_we;
    always_comb begin
      row_we = '0;
      if (coef_we && coef_row == i[$clog2(N)-1:0]) row_we[coef_col] = 1'b1;
    end

    mm_row #(.M(M)) u_row (
      .clk          (clk),
      .rst_n        (rst_n),
      .coef_we      (row_we),
      .coef_i       (coef_data),
      .up_i         (vlink[i]),
      .up_valid_i   (vlink_valid[i]),
      .up_ready_o   (vlink_ready[i]),
      .down_o       (vlink[i+1]),
      .down_valid_o (vlink_valid[i+1]),
      .down_ready_i (vlink_ready[i+1]),
      .right_o      (row_out[i]),
      .right_valid_o(row_out_valid[i]),
      .right_ready_i(row_out_ready[i])
    );
  end

  assign bot_out            = vlink[N];
  assign bot_out_valid      = vlink_valid[N];
  assign vlink_ready[N]     = bot_out_ready;

endmodule
