// tb_mm_row: self-checking test of one pipe stage (a row of M cells fed by
// the constant-0 producer).
//
// Random coefficients are loaded into the cells. K random vectors b_k and
// then an EOT token are fed to the M up channels, each column from its own
// queue with random valid gaps; the right and down outputs are drained with
// random ready. The right stream must be as . b_k (mod 2^16) for each k in
// order, with no output for the EOT; every down channel must repeat its up
// stream, EOT included. A final vector with all inputs valid and outputs
// ready must give its result M cycles after it is offered.
module tb_mm_row;
  import mm_pkg::*;

  localparam int unsigned M = M_COLS;
  localparam int unsigned K = 40;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  logic [M-1:0] coef_we;
  data_t        coef;
  item_t        up [M], down [M], right;
  logic [M-1:0] up_v, up_r, down_v, down_r;
  logic         right_v, right_r;

  mm_row dut (
    .clk(clk), .rst_n(rst_n), .coef_we(coef_we), .coef_i(coef),
    .up_i(up), .up_valid_i(up_v), .up_ready_o(up_r),
    .down_o(down), .down_valid_o(down_v), .down_ready_i(down_r),
    .right_o(right), .right_valid_o(right_v), .right_ready_i(right_r)
  );

  int checks = 0, failures = 0;
  data_t a [M];
  item_t up_q [M][$], exp_down [M][$];
  data_t exp_right [$];
  bit    rand_mode = 1'b1;
  bit    taken [M];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic make_stream(input int k, input bit with_eot);
    for (int c = 0; c < k; c++) begin
      data_t acc = '0;
      for (int j = 0; j < M; j++) begin
        item_t u = '{eot: 1'b0, data: data_t'($urandom)};
        up_q[j].push_back(u);
        exp_down[j].push_back(u);
        acc += a[j] * u.data;
      end
      exp_right.push_back(acc);
    end
    if (with_eot)
      for (int j = 0; j < M; j++) begin
        up_q[j].push_back(ITEM_EOT);
        exp_down[j].push_back(ITEM_EOT);
      end
  endtask

  function automatic bit all_empty();
    for (int j = 0; j < M; j++) if (exp_down[j].size() > 0) return 0;
    return exp_right.size() == 0;
  endfunction

  always @(negedge clk) begin
    if (!rst_n) begin
      up_v = '0; down_r = '0; right_r = 0;
    end else begin
      for (int j = 0; j < M; j++)
        if (!up_v[j] || taken[j]) begin
          up_v[j] = (up_q[j].size() > 0) && (!rand_mode || $urandom % 3 != 0);
          if (up_v[j]) up[j] = up_q[j][0];
        end
      for (int j = 0; j < M; j++) down_r[j] = !rand_mode || ($urandom % 4 != 0);
      right_r = !rand_mode || ($urandom % 4 != 0);
    end
  end

  always @(posedge clk) begin
    for (int j = 0; j < M; j++) taken[j] = up_v[j] && up_r[j];
    if (rst_n) begin
      for (int j = 0; j < M; j++) begin
        if (taken[j]) void'(up_q[j].pop_front());
        if (down_v[j] && down_r[j]) begin
          check(exp_down[j].size() > 0, $sformatf("unexpected down output, column %0d", j));
          if (exp_down[j].size() > 0) check(down[j] == exp_down[j].pop_front(),
            $sformatf("down of column %0d = %h", j, down[j]));
        end
      end
      if (right_v && right_r) begin
        check(exp_right.size() > 0 && !right.eot, "unexpected right output");
        if (exp_right.size() > 0) check(right.data == exp_right.pop_front(),
          $sformatf("scalar product = %h", right.data));
      end
    end
  end

  initial begin
    int t0, lat;
    rst_n = 0; coef_we = '0; coef = '0;
    for (int j = 0; j < M; j++) up[j] = ITEM_ZERO;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < M; j++) begin
      a[j] = data_t'($urandom);
      coef_we = '0; coef_we[j] = 1'b1; coef = a[j];
      @(negedge clk);
    end
    coef_we = '0;
    make_stream(K, 1'b1);
    while (!all_empty()) @(negedge clk);
    rand_mode = 1'b0;
    @(negedge clk);
    make_stream(1, 1'b0);
    @(posedge clk);
    t0 = $time / 10;
    lat = -1;
    while (!all_empty()) begin
      @(posedge clk);
      if (right_v && lat < 0) lat = $time / 10 - t0;
    end
    check(lat == M, $sformatf("row latency %0d cycles, expected %0d", lat, M));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
