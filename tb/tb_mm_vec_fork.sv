// tb_mm_vec_fork: self-checking test of the vector producer (fork).
//
// Random vectors, with an EOT token now and then, are offered one at a time
// and held until acknowledged. Each lane is drained with its own random
// ready. Every lane must deliver item j of every vector (or the EOT) exactly
// once and in order, and the input must be acknowledged once per vector.
// With all lanes ready the fork must pass one vector per cycle.
module tb_mm_vec_fork;
  import mm_pkg::*;

  localparam int unsigned W = M_COLS;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  data_t        vec [W];
  logic         eot, vv, vr;
  item_t        lane [W];
  logic [W-1:0] lv, lr;

  mm_vec_fork dut (
    .clk(clk), .rst_n(rst_n), .vec_i(vec), .eot_i(eot), .vec_valid_i(vv),
    .vec_ready_o(vr), .lane_o(lane), .lane_valid_o(lv), .lane_ready_i(lr)
  );

  int checks = 0, failures = 0;
  item_t exp_lane [W][$];
  bit    rand_ready = 1'b1;
  int    acks = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(negedge clk)
    for (int j = 0; j < W; j++) lr[j] = !rand_ready || ($urandom % 3 != 0);

  always @(posedge clk) if (rst_n) begin
    if (vv && vr) acks++;
    for (int j = 0; j < W; j++)
      if (lv[j] && lr[j]) begin
        check(exp_lane[j].size() > 0, $sformatf("unexpected item on lane %0d", j));
        if (exp_lane[j].size() > 0) check(lane[j] == exp_lane[j].pop_front(),
          $sformatf("lane %0d = %h", j, lane[j]));
      end
  end

  task automatic send(input bit is_eot);
    eot = is_eot;
    for (int j = 0; j < W; j++) begin
      vec[j] = data_t'($urandom);
      exp_lane[j].push_back(is_eot ? ITEM_EOT : '{eot: 1'b0, data: vec[j]});
    end
    vv = 1'b1;
    do @(posedge clk); while (!(vv && vr));
    @(negedge clk);
    vv = 1'b0;
  endtask

  initial begin
    int t0, n;
    rst_n = 0; vv = 0; eot = 0; lr = '0;
    for (int j = 0; j < W; j++) vec[j] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    n = 0;
    for (int v = 0; v < 200; v++) begin
      send($urandom % 10 == 0);
      n++;
      if ($urandom % 2) @(negedge clk);
    end
    repeat (3) @(negedge clk);
    check(acks == n, $sformatf("%0d acknowledgements for %0d vectors", acks, n));
    for (int j = 0; j < W; j++)
      check(exp_lane[j].size() == 0, $sformatf("lane %0d missed items", j));
    // Full rate: 20 back-to-back vectors with every lane ready.
    rand_ready = 1'b0;
    @(negedge clk);
    acks = 0;
    vv = 1'b1; eot = 1'b0;
    t0 = $time / 10;
    for (int v = 0; v < 20; v++) begin
      for (int j = 0; j < W; j++) begin
        vec[j] = data_t'($urandom);
        exp_lane[j].push_back('{eot: 1'b0, data: vec[j]});
      end
      @(negedge clk);
    end
    vv = 1'b0;
    check(acks == 20 && ($time / 10 - t0) == 20,
          $sformatf("%0d vectors in %0d cycles at full rate", acks, $time / 10 - t0));
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
