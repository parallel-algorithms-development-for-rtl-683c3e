// mm_top: 2D pipelined (systolic) matrix multiplier C = A x B with
// A = ass (N x M, held on chip), B = bss (M x k, streamed), C = css (N x k).
//
// A run has two phases. First the coefficient loader copies ass from SRAM
// bank 0 into the N x M cells of the network. Then the bank reader streams
// the k columns of bss from bank 1 as M-item vectors, closed by an
// end-of-transmission (EOT) token; the vector fork hands item j of each
// vector to the top of network column j; every row of the network turns
// out one item of the matching result column; the join packs the N row
// results into one vector; and the bank writer stores it in bank 2. The b
// values and the EOT that leave the bottom of the network go to a sink
// (always ready); the EOT that leaves the last column also tells the join
// that the stream is over. When the writer has taken the join's EOT, the
// run is done. k is set at run time and the network does not depend on it.
//
// Interface: start (pulse) with k_len; busy/done (done is a one-cycle
// pulse); three single-port SRAM bank ports: bank 0 and bank 1 read (one
// cycle latency), bank 2 write. sink_count counts the b values absorbed by
// the sinks in the current run; stored_count the result columns stored.
//
// Timing: loading takes N*M+2 cycles. In the run the single-ported banks
// set the pace: the reader needs M+2 cycles per column and the writer N+1,
// while the network could take one column per cycle. The network structure
// follows the published 2D pipelined design; the bank layout, the control
// sequence and the handshakes are this design's choice.
module mm_top
  import mm_pkg::*;
#(
  parameter int unsigned N = N_ROWS,
  parameter int unsigned M = M_COLS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start_i,
  input  logic [K_W-1:0]     k_len_i,
  output logic               busy_o,
  output logic               done_o,
  output logic [31:0]        sink_count_o,
  output logic [K_W-1:0]     stored_count_o,
  // bank 0: ass (read)
  output logic               bank0_en_o,
  output logic [BANK_AW-1:0] bank0_addr_o,
  input  logic [BANK_DW-1:0] bank0_rdata_i,
  // bank 1: bss (read)
  output logic               bank1_en_o,
  output logic [BANK_AW-1:0] bank1_addr_o,
  input  logic [BANK_DW-1:0] bank1_rdata_i,
  // bank 2: css (write)
  output logic               bank2_we_o,
  output logic [BANK_AW-1:0] bank2_addr_o,
  output logic [BANK_DW-1:0] bank2_wdata_o
);

  typedef enum logic [1:0] {T_IDLE, T_LOAD, T_RUN} top_state_e;

  top_state_e     state_q;
  logic [K_W-1:0] k_len_q;

  // coefficient loader -> network
  logic                 ld_start, ld_done;
  logic                 coef_we;
  logic [$clog2(N)-1:0] coef_row;
  logic [$clog2(M)-1:0] coef_col;
  data_t                coef_data;

  // reader -> fork
  logic  rd_start;
  data_t bvec [M];
  logic  bvec_eot, bvec_valid, bvec_ready;

  // fork -> network columns
  item_t        col_in [M];
  logic [M-1:0] col_in_valid, col_in_ready;

  // network bottom -> sinks
  item_t        bot_out [M];
  logic [M-1:0] bot_out_valid;

  // network rows -> join
  item_t        row_out [N];
  logic [N-1:0] row_out_valid, row_out_ready;

  // join -> writer
  data_t cvec [N];
  logic  cvec_eot, cvec_valid, cvec_ready;
  logic  wr_done;

  // ---------------------------------------------------------------- control
  assign ld_start = (state_q == T_IDLE) && start_i;
  assign rd_start = (state_q == T_LOAD) && ld_done;
  assign busy_o   = (state_q != T_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q <= T_IDLE;
      k_len_q <= '0;
      done_o  <= 1'b0;
    end else begin
      done_o <= 1'b0;
      unique case (state_q)
        T_IDLE: if (start_i) begin
          k_len_q <= k_len_i;
          state_q <= T_LOAD;
        end
        T_LOAD: if (ld_done) state_q <= T_RUN;
        T_RUN:  if (wr_done) begin
          done_o  <= 1'b1;
          state_q <= T_IDLE;
        end
        default: state_q <= T_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------- datapath
  mm_coef_loader #(.N(N), .M(M)) u_loader (
    .clk         (clk),
    .rst_n       (rst_n),
    .start_i     (ld_start),
    .busy_o      (),
    .done_o      (ld_done),
    .bank_en_o   (bank0_en_o),
    .bank_addr_o (bank0_addr_o),
    .bank_rdata_i(bank0_rdata_i),
    .coef_we_o   (coef_we),
    .coef_row_o  (coef_row),
    .coef_col_o  (coef_col),
    .coef_data_o (coef_data)
  );

  mm_bank_reader #(.W(M)) u_reader (
    .clk         (clk),
    .rst_n       (rst_n),
    .start_i     (rd_start),
    .k_len_i     (k_len_q),
    .busy_o      (),
    .bank_en_o   (bank1_en_o),
    .bank_addr_o (bank1_addr_o),
    .bank_rdata_i(bank1_rdata_i),
    .vec_o       (bvec),
    .eot_o       (bvec_eot),
    .vec_valid_o (bvec_valid),
    .vec_ready_i (bvec_ready)
  );

  mm_vec_fork #(.W(M)) u_fork (
    .clk         (clk),
    .rst_n       (rst_n),
    .vec_i       (bvec),
    .eot_i       (bvec_eot),
    .vec_valid_i (bvec_valid),
    .vec_ready_o (bvec_ready),
    .lane_o      (col_in),
    .lane_valid_o(col_in_valid),
    .lane_ready_i(col_in_ready)
  );

  mm_grid #(.N(N), .M(M)) u_grid (
    .clk          (clk),
    .rst_n        (rst_n),
    .coef_we      (coef_we),
    .coef_row     (coef_row),
    .coef_col     (coef_col),
    .coef_data    (coef_data),
    .col_in       (col_in),
    .col_in_valid (col_in_valid),
    .col_in_ready (col_in_ready),
    .bot_out      (bot_out),
    .bot_out_valid(bot_out_valid),
    .bot_out_ready({M{1'b1}}),     // SINK under every column
    .row_out      (row_out),
    .row_out_valid(row_out_valid),
    .row_out_ready(row_out_ready)
  );

  // Sinks: count the b values they absorb in a run.
  logic [$clog2(M+1)-1:0] sunk_now;
  always_comb begin
    sunk_now = '0;
    for (int j = 0; j < M; j++)
      sunk_now += $clog2(M+1)'(bot_out_valid[j] && !bot_out[j].eot);
  end

  always_ff @(posedge clk) begin
    if (!rst_n || ld_start) sink_count_o <= '0;
    else                    sink_count_o <= sink_count_o + 32'(sunk_now);
  end

  mm_css_join #(.N(N)) u_join (
    .clk        (clk),
    .rst_n      (rst_n),
    .row_i      (row_out),
    .row_valid_i(row_out_valid),
    .row_ready_o(row_out_ready),
    .eot_seen_i (bot_out_valid[M-1] && bot_out[M-1].eot),
    .vec_o      (cvec),
    .eot_o      (cvec_eot),
    .vec_valid_o(cvec_valid),
    .vec_ready_i(cvec_ready)
  );

  mm_bank_writer #(.W(N)) u_writer (
    .clk         (clk),
    .rst_n       (rst_n),
    .vec_i       (cvec),
    .eot_i       (cvec_eot),
    .vec_valid_i (cvec_valid),
    .vec_ready_o (cvec_ready),
    .bank_we_o   (bank2_we_o),
    .bank_addr_o (bank2_addr_o),
    .bank_wdata_o(bank2_wdata_o),
    .done_o      (wr_done),
    .count_o     (stored_count_o)
  );

endmodule
