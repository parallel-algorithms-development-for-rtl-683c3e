// tb_mm_css_join: self-checking test of the result join.
//
// N row streams of random results are offered, each row with its own random
// valid gaps, and the joined vectors are drained with random ready. Every
// output vector k must hold the k-th result of each row. Then the EOT pulse
// is given while some rows still hold results: the join's EOT must come
// only after every result has been sent, exactly once.
module tb_mm_css_join;
  import mm_pkg::*;

  localparam int unsigned N = N_ROWS;
  localparam int unsigned K = 60;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  item_t        row [N];
  logic [N-1:0] rv, rr;
  logic         eot_seen;
  data_t        vec [N];
  logic         eot, vv, vr;

  mm_css_join dut (
    .clk(clk), .rst_n(rst_n), .row_i(row), .row_valid_i(rv), .row_ready_o(rr),
    .eot_seen_i(eot_seen), .vec_o(vec), .eot_o(eot), .vec_valid_o(vv), .vec_ready_i(vr)
  );

  int checks = 0, failures = 0;
  data_t row_q [N][$];
  data_t exp_q [N][$];
  bit    taken [N];
  int    n_vec = 0, n_eot = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(negedge clk) begin
    if (!rst_n) begin rv = '0; vr = 0; end
    else begin
      for (int i = 0; i < N; i++)
        if (!rv[i] || taken[i]) begin
          rv[i] = (row_q[i].size() > 0) && ($urandom % 3 != 0);
          if (rv[i]) row[i] = '{eot: 1'b0, data: row_q[i][0]};
        end
      vr = ($urandom % 4 != 0);
    end
  end

  always @(posedge clk) begin
    for (int i = 0; i < N; i++) taken[i] = rv[i] && rr[i];
    if (rst_n) begin
      for (int i = 0; i < N; i++) if (taken[i]) void'(row_q[i].pop_front());
      if (vv && vr) begin
        if (eot) begin
          n_eot++;
          check(exp_q[0].size() == 0, "EOT sent before the last vector");
        end else begin
          check(exp_q[0].size() > 0, "unexpected vector");
          if (exp_q[0].size() > 0)
            for (int i = 0; i < N; i++) begin
              data_t e;
              e = exp_q[i].pop_front();
              check(vec[i] == e, $sformatf("vector %0d row %0d = %h, expected %h", n_vec, i, vec[i], e));
            end
          n_vec++;
        end
      end
    end
  end

  initial begin
    rst_n = 0; eot_seen = 0; rv = '0; vr = 0;
    for (int i = 0; i < N; i++) row[i] = ITEM_ZERO;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < K; k++)
      for (int i = 0; i < N; i++) begin
        data_t e;
        e = data_t'($urandom);
        row_q[i].push_back(e);
        exp_q[i].push_back(e);
      end
    repeat (K / 2) @(negedge clk);
    check(exp_q[0].size() > 0, "results drained too early for the EOT test");
    eot_seen = 1;
    @(negedge clk);
    eot_seen = 0;
    repeat (20 * K) @(negedge clk);
    check(n_vec == K, $sformatf("%0d vectors out, expected %0d", n_vec, K));
    check(n_eot == 1, $sformatf("%0d EOT tokens out, expected 1", n_eot));
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
