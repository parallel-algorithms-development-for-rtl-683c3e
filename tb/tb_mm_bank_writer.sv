// tb_mm_bank_writer: self-checking test of the css store.
//
// K random result vectors and then an EOT token are offered with random
// gaps. The bank model must end up holding item i of vector k at word
// k*W + i, sign-extended, and nothing past the last vector; done must pulse
// once, when the EOT is taken, with count = K. A vector must be taken
// again W+1 cycles after the previous one when offered back to back. A
// second stream must be stored from address 0 again.
module tb_mm_bank_writer;
  import mm_pkg::*;

  localparam int unsigned W = N_ROWS;
  localparam int unsigned K = 30;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  data_t              vec [W];
  logic               eot, vv, vr, we, done;
  logic [BANK_AW-1:0] addr;
  logic [BANK_DW-1:0] wdata, rdata;
  logic [K_W-1:0]     count;

  mm_bank_writer dut (
    .clk(clk), .rst_n(rst_n), .vec_i(vec), .eot_i(eot), .vec_valid_i(vv), .vec_ready_o(vr),
    .bank_we_o(we), .bank_addr_o(addr), .bank_wdata_o(wdata), .done_o(done), .count_o(count)
  );

  mm_sram_model #(.WORDS(1024)) bank (.clk(clk), .en(1'b0), .we(we), .addr(addr), .wdata(wdata), .rdata(rdata));

  int checks = 0, failures = 0;
  int n_done = 0;
  data_t exp_m [K][W];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n && done) begin
    n_done++;
    check(count == K_W'(K), $sformatf("count %0d at done", count));
  end

  task automatic offer(input bit is_eot);
    eot = is_eot;
    vv  = 1;
    do @(posedge clk); while (!vr);
    @(negedge clk);
    vv = 0;
  endtask

  task automatic stream(input bit gaps);
    int t_prev, t_now;
    for (int w = 0; w < 1024; w++) bank.mem[w] = 32'h5A5A_5A5A;
    t_prev = -1;
    for (int k = 0; k < K; k++) begin
      for (int i = 0; i < W; i++) begin
        exp_m[k][i] = data_t'($urandom);
        vec[i] = exp_m[k][i];
      end
      offer(1'b0);
      t_now = $time / 10;
      if (!gaps && t_prev >= 0)
        check(t_now - t_prev == W + 1, $sformatf("vectors taken %0d cycles apart", t_now - t_prev));
      t_prev = t_now;
      if (gaps) repeat ($urandom % 4) @(negedge clk);
    end
    offer(1'b1);
    repeat (W + 3) @(negedge clk);
    for (int k = 0; k < K; k++)
      for (int i = 0; i < W; i++)
        check(bank.mem[k*W + i] == BANK_DW'(signed'(exp_m[k][i])),
              $sformatf("word %0d = %h", k*W + i, bank.mem[k*W + i]));
    check(bank.mem[K*W] == 32'h5A5A_5A5A, "write past the last vector");
  endtask

  initial begin
    rst_n = 0; vv = 0; eot = 0;
    for (int i = 0; i < W; i++) vec[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    stream(1'b1);
    stream(1'b0);
    check(n_done == 2, $sformatf("done pulsed %0d times, expected 2", n_done));
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
