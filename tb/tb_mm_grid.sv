// tb_mm_grid: self-checking test of the N x M systolic network at its
// default size.
//
// A random A is loaded through the coefficient port. Then K random columns
// b_k, followed by an EOT token, are fed to the tops of the columns, each
// column from its own queue with its own random valid gaps, so the columns
// run out of step and the cells' handshakes have to line them up. Row
// outputs and bottom outputs are drained with random ready. Row i must
// produce c[i][k] = sum_j A[i][j]*b_k[j] (mod 2^16) in order; column j's
// bottom must produce b_k[j] in order and then the EOT. A second stream
// with every input valid and every output ready checks the latency: row
// i's first result is valid i+M cycles after the inputs are first offered.
module tb_mm_grid;
  import mm_pkg::*;

  localparam int unsigned N = N_ROWS;
  localparam int unsigned M = M_COLS;
  localparam int unsigned K = 30;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  logic                 coef_we;
  logic [$clog2(N)-1:0] coef_row;
  logic [$clog2(M)-1:0] coef_col;
  data_t                coef_data;
  item_t                col_in [M], bot_out [M], row_out [N];
  logic [M-1:0]         col_v, col_r, bot_v, bot_r;
  logic [N-1:0]         row_v, row_r;

  mm_grid dut (
    .clk(clk), .rst_n(rst_n),
    .coef_we(coef_we), .coef_row(coef_row), .coef_col(coef_col), .coef_data(coef_data),
    .col_in(col_in), .col_in_valid(col_v), .col_in_ready(col_r),
    .bot_out(bot_out), .bot_out_valid(bot_v), .bot_out_ready(bot_r),
    .row_out(row_out), .row_out_valid(row_v), .row_out_ready(row_r)
  );

  int checks = 0, failures = 0;
  data_t a_m [N][M];
  item_t col_q  [M][$];
  item_t exp_bot[M][$];
  data_t exp_row[N][$];
  bit    rand_mode = 1'b1;
  bit    col_taken [M];
  int    n_eot = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic make_stream(input int k);
    data_t b [M];
    for (int c = 0; c < k; c++) begin
      for (int j = 0; j < M; j++) begin
        b[j] = data_t'($urandom);
        col_q[j].push_back('{eot: 1'b0, data: b[j]});
        exp_bot[j].push_back('{eot: 1'b0, data: b[j]});
      end
      for (int i = 0; i < N; i++) begin
        data_t acc = '0;
        for (int j = 0; j < M; j++) acc += a_m[i][j] * b[j];
        exp_row[i].push_back(acc);
      end
    end
    for (int j = 0; j < M; j++) begin
      col_q[j].push_back(ITEM_EOT);
      exp_bot[j].push_back(ITEM_EOT);
    end
  endtask

  function automatic bit all_empty();
    for (int j = 0; j < M; j++) if (exp_bot[j].size() > 0) return 0;
    for (int i = 0; i < N; i++) if (exp_row[i].size() > 0) return 0;
    return 1;
  endfunction

  always @(negedge clk) begin
    if (!rst_n) begin
      col_v = '0; bot_r = '0; row_r = '0;
    end else begin
      for (int j = 0; j < M; j++)
        if (!col_v[j] || col_taken[j]) begin
          col_v[j] = (col_q[j].size() > 0) && (!rand_mode || $urandom % 3 != 0);
          if (col_v[j]) col_in[j] = col_q[j][0];
        end
      for (int j = 0; j < M; j++) bot_r[j] = !rand_mode || ($urandom % 4 != 0);
      for (int i = 0; i < N; i++) row_r[i] = !rand_mode || ($urandom % 4 != 0);
    end
  end

  always @(posedge clk) begin
    for (int j = 0; j < M; j++) col_taken[j] = col_v[j] && col_r[j];
    if (rst_n) begin
      for (int j = 0; j < M; j++) begin
        if (col_taken[j]) void'(col_q[j].pop_front());
        if (bot_v[j] && bot_r[j]) begin
          check(exp_bot[j].size() > 0, $sformatf("unexpected bottom output, column %0d", j));
          if (exp_bot[j].size() > 0) check(bot_out[j] == exp_bot[j].pop_front(),
            $sformatf("bottom of column %0d = %h", j, bot_out[j]));
          if (bot_out[j].eot) n_eot++;
        end
      end
      for (int i = 0; i < N; i++)
        if (row_v[i] && row_r[i]) begin
          check(exp_row[i].size() > 0 && !row_out[i].eot, $sformatf("unexpected output, row %0d", i));
          if (exp_row[i].size() > 0) check(row_out[i].data == exp_row[i].pop_front(),
            $sformatf("row %0d result = %h", i, row_out[i].data));
        end
    end
  end

  initial begin
    int t0;
    int first_valid [N];
    rst_n = 0; coef_we = 0; coef_row = '0; coef_col = '0; coef_data = '0;
    for (int j = 0; j < M; j++) col_in[j] = ITEM_ZERO;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < M; j++) begin
        a_m[i][j] = data_t'($urandom);
        coef_we = 1; coef_row = i[$clog2(N)-1:0]; coef_col = j[$clog2(M)-1:0];
        coef_data = a_m[i][j];
        @(negedge clk);
      end
    coef_we = 0;
    make_stream(K);
    while (!all_empty()) @(negedge clk);
    check(n_eot == M, $sformatf("%0d EOT tokens left the bottom, expected %0d", n_eot, M));
    // Phase 2: all valid, all ready; record when each row first has a result.
    rand_mode = 1'b0;
    repeat (2) @(negedge clk);
    make_stream(5);
    for (int i = 0; i < N; i++) first_valid[i] = -1;
    @(posedge clk);
    t0 = $time / 10;
    while (!all_empty()) begin
      @(posedge clk);
      for (int i = 0; i < N; i++)
        if (row_v[i] && first_valid[i] < 0) first_valid[i] = $time / 10 - t0;
    end
    for (int i = 0; i < N; i++)
      check(first_valid[i] == i + M,
            $sformatf("row %0d first result after %0d cycles, expected %0d", i, first_valid[i], i + M));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
