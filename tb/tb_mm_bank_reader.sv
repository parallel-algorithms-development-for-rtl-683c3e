// tb_mm_bank_reader: self-checking test of the bss producer.
//
// A bank model holds K random columns of W items (upper word bits filled
// with junk). After start the reader must offer the K columns in order,
// then one EOT token, then go idle; the consumer takes them with random
// ready. With the consumer always ready, the K columns must take exactly
// K*(W+2)+2 cycles from start to the EOT being offered (one cycle to
// leave idle, W+2 per column, one to register the EOT). A run with k = 0 must
// give only the EOT.
module tb_mm_bank_reader;
  import mm_pkg::*;

  localparam int unsigned W = M_COLS;
  localparam int unsigned K = 25;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  logic               start, busy, en, eot, vv, vr;
  logic [K_W-1:0]     k_len;
  logic [BANK_AW-1:0] addr;
  logic [BANK_DW-1:0] rdata;
  data_t              vec [W];

  mm_bank_reader dut (
    .clk(clk), .rst_n(rst_n), .start_i(start), .k_len_i(k_len), .busy_o(busy),
    .bank_en_o(en), .bank_addr_o(addr), .bank_rdata_i(rdata),
    .vec_o(vec), .eot_o(eot), .vec_valid_o(vv), .vec_ready_i(vr)
  );

  mm_sram_model #(.WORDS(1024)) bank (.clk(clk), .en(en), .we(1'b0), .addr(addr), .wdata('0), .rdata(rdata));

  int checks = 0, failures = 0;
  int n_vec, n_eot;
  bit rand_ready;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(negedge clk) vr = !rand_ready || ($urandom % 3 == 0);

  always @(posedge clk) if (rst_n && vv && vr) begin
    if (eot) n_eot++;
    else begin
      for (int j = 0; j < W; j++)
        check(vec[j] == data_t'(bank.mem[n_vec*W + j][DATA_W-1:0]),
              $sformatf("column %0d item %0d = %h", n_vec, j, vec[j]));
      n_vec++;
    end
  end

  task automatic run(input int k, input bit rnd);
    int t0, t_eot;
    rand_ready = rnd;
    n_vec = 0; n_eot = 0;
    @(negedge clk);
    k_len = K_W'(k); start = 1;
    t0 = $time / 10;
    @(negedge clk);
    start = 0;
    t_eot = -1;
    while (busy) begin
      @(posedge clk);
      if (vv && eot && t_eot < 0) t_eot = $time / 10 - t0;
      @(negedge clk);
    end
    check(n_vec == k, $sformatf("%0d columns out, expected %0d", n_vec, k));
    check(n_eot == 1, $sformatf("%0d EOT tokens out", n_eot));
    if (!rnd) check(t_eot == k*(W+2) + 2,
                    $sformatf("EOT offered after %0d cycles, expected %0d", t_eot, k*(W+2) + 2));
  endtask

  initial begin
    rst_n = 0; start = 0; k_len = '0; vr = 0;
    for (int w = 0; w < 1024; w++) bank.mem[w] = $urandom;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(K, 1'b1);
    run(K, 1'b0);
    run(0, 1'b1);
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
