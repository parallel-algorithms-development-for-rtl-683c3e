// tb_mm_cell: self-checking test of one systolic cell.
//
// Random up tokens (values, with an EOT now and then) and random left
// partial sums are offered with random valid gaps, and both outputs are
// drained with random ready. The expected down stream is the up stream
// itself; the expected right stream pairs every up value, in order, with
// the next left item: l + u*a modulo 2^16. EOT tokens must not consume a
// left item. A second phase with everything always valid and ready checks
// one-cycle latency and one operation per cycle.
module tb_mm_cell;
  import mm_pkg::*;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  logic  coef_we;
  data_t coef;
  item_t up, left, right, down;
  logic  up_v, up_r, left_v, left_r, right_v, right_r, down_v, down_r;

  mm_cell dut (
    .clk(clk), .rst_n(rst_n), .coef_we(coef_we), .coef_i(coef),
    .up_i(up), .up_valid_i(up_v), .up_ready_o(up_r),
    .left_i(left), .left_valid_i(left_v), .left_ready_o(left_r),
    .right_o(right), .right_valid_o(right_v), .right_ready_i(right_r),
    .down_o(down), .down_valid_o(down_v), .down_ready_i(down_r)
  );

  int checks = 0, failures = 0;
  item_t up_q[$], left_q[$], exp_right[$], exp_down[$];
  data_t a;
  int    n_eot = 0;
  bit    rand_mode = 1'b1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Build the stimulus and the expected output streams.
  task automatic make_stream(input int len);
    int li = left_q.size();
    for (int t = 0; t < len; t++) begin
      item_t u, l;
      u.eot  = ($urandom % 8 == 0);
      u.data = u.eot ? data_t'(0) : data_t'($urandom);
      up_q.push_back(u);
      exp_down.push_back(u);
      if (!u.eot) begin
        l.eot  = 1'b0;
        l.data = data_t'($urandom);
        left_q.push_back(l);
        exp_right.push_back('{eot: 1'b0, data: data_t'(l.data + u.data * a)});
      end
    end
  endtask

  // Drivers: offer the head of each queue, with random gaps in phase 1.
  always @(negedge clk) begin
    if (!rst_n) begin
      up_v = 0; left_v = 0; right_r = 0; down_r = 0;
    end else begin
      if (!up_v || up_r_taken) begin
        up_v = (up_q.size() > 0) && (!rand_mode || $urandom % 3 != 0);
        if (up_v) up = up_q[0];
      end
      if (!left_v || left_r_taken) begin
        left_v = (left_q.size() > 0) && (!rand_mode || $urandom % 3 != 0);
        if (left_v) left = left_q[0];
      end
      right_r = !rand_mode || ($urandom % 4 != 0);
      down_r  = !rand_mode || ($urandom % 4 != 0);
    end
  end

  bit up_r_taken, left_r_taken;
  int fires = 0;
  always @(posedge clk) begin
    up_r_taken   = up_v && up_r;
    left_r_taken = left_v && left_r;
    if (rst_n) begin
      if (up_r_taken) begin
        void'(up_q.pop_front());
        fires++;
        if (up.eot) n_eot++;
      end
      if (left_r_taken) void'(left_q.pop_front());
      if (right_v && right_r) begin
        check(exp_right.size() > 0, "unexpected right output");
        if (exp_right.size() > 0) check(right == exp_right.pop_front(),
          $sformatf("right = %h", right));
      end
      if (down_v && down_r) begin
        check(exp_down.size() > 0, "unexpected down output");
        if (exp_down.size() > 0) check(down == exp_down.pop_front(),
          $sformatf("down = %h", down));
      end
    end
  end

  initial begin
    int t0;
    rst_n = 0; coef_we = 0; coef = '0;
    up = ITEM_ZERO; left = ITEM_ZERO;
    repeat (2) @(negedge clk);
    rst_n = 1;
    a = data_t'($urandom);
    coef = a; coef_we = 1;
    @(negedge clk);
    coef_we = 0;
    make_stream(400);
    while (exp_down.size() > 0 || exp_right.size() > 0) @(negedge clk);
    check(left_q.size() == 0, "left items left over");
    check(n_eot > 0, "no EOT token was exercised");
    // Phase 2: full rate. 50 value tokens, all valid and ready.
    rand_mode = 1'b0;
    a = data_t'($urandom);
    @(negedge clk);
    coef = a; coef_we = 1;
    @(negedge clk);
    coef_we = 0;
    for (int t = 0; t < 50; t++) begin
      item_t u, l;
      u = '{eot: 1'b0, data: data_t'($urandom)};
      l = '{eot: 1'b0, data: data_t'($urandom)};
      up_q.push_back(u); exp_down.push_back(u);
      left_q.push_back(l);
      exp_right.push_back('{eot: 1'b0, data: data_t'(l.data + u.data * a)});
    end
    fires = 0;
    t0 = $time;
    while (exp_right.size() > 0) @(posedge clk);
    // 50 operations, plus one cycle to present the first and one to register the last.
    check(($time - t0) / 10 <= 52, $sformatf("50 operations took %0d cycles", ($time - t0) / 10));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
