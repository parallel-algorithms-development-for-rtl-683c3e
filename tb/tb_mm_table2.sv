// tb_mm_table2: runs the 11 x 11 multiplier on the problem sizes of the
// published speed comparison: A is 11 x 11 and B is 11 x k for
// k = 11, 99, 199, 299, 599, 999, 2999, 6999 and 9999.
//
// For each k a random A and B are placed in the bank models, the run is
// started and, after done, every item of C in bank 2 is compared with
// A x B worked out here (16-bit wrapping arithmetic). The cycle count of
// each run is printed and checked against N*M + 2 + k*(M+2) + 2*N + M + 10,
// the pace set by the single-ported bss bank (M+2 cycles per column).
module tb_mm_table2;
  import mm_pkg::*;

  localparam int unsigned N = N_ROWS;
  localparam int unsigned M = M_COLS;
  localparam int unsigned WORDS = 131072;
  localparam int KS [9] = '{11, 99, 199, 299, 599, 999, 2999, 6999, 9999};

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  logic               start;
  logic [K_W-1:0]     k_len;
  logic               busy, done;
  logic [31:0]        sink_count;
  logic [K_W-1:0]     stored_count;
  logic               b0_en, b1_en, b2_we;
  logic [BANK_AW-1:0] b0_addr, b1_addr, b2_addr;
  logic [BANK_DW-1:0] b0_rdata, b1_rdata, b2_wdata, b2_rdata;

  mm_top dut (
    .clk(clk), .rst_n(rst_n), .start_i(start), .k_len_i(k_len),
    .busy_o(busy), .done_o(done), .sink_count_o(sink_count),
    .stored_count_o(stored_count),
    .bank0_en_o(b0_en), .bank0_addr_o(b0_addr), .bank0_rdata_i(b0_rdata),
    .bank1_en_o(b1_en), .bank1_addr_o(b1_addr), .bank1_rdata_i(b1_rdata),
    .bank2_we_o(b2_we), .bank2_addr_o(b2_addr), .bank2_wdata_o(b2_wdata)
  );

  mm_sram_model #(.WORDS(256))   bank0 (.clk(clk), .en(b0_en), .we(1'b0), .addr(b0_addr), .wdata('0), .rdata(b0_rdata));
  mm_sram_model #(.WORDS(WORDS)) bank1 (.clk(clk), .en(b1_en), .we(1'b0), .addr(b1_addr), .wdata('0), .rdata(b1_rdata));
  mm_sram_model #(.WORDS(WORDS)) bank2 (.clk(clk), .en(1'b0), .we(b2_we), .addr(b2_addr), .wdata(b2_wdata), .rdata(b2_rdata));

  int checks = 0, failures = 0;
  data_t a_m [N][M];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input int k);
    int t0, t_end, bad;
    logic [DATA_W-1:0] acc;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < M; j++) begin
        a_m[i][j] = data_t'($urandom);
        bank0.mem[i*M + j] = 32'(a_m[i][j]);
      end
    for (int w = 0; w < k*M; w++) bank1.mem[w] = $urandom;
    @(negedge clk);
    k_len = K_W'(k);
    start = 1'b1;
    t0 = $time / 10;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    t_end = $time / 10;
    bad = 0;
    for (int c = 0; c < k; c++)
      for (int i = 0; i < N; i++) begin
        acc = '0;
        for (int j = 0; j < M; j++) acc += a_m[i][j] * bank1.mem[c*M + j][DATA_W-1:0];
        if (bank2.mem[c*N + i] != BANK_DW'(signed'(data_t'(acc)))) bad++;
      end
    check(bad == 0, $sformatf("k=%0d: %0d wrong items of C", k, bad));
    check(int'(stored_count) == k, $sformatf("k=%0d: %0d columns stored", k, stored_count));
    check(t_end - t0 <= N*M + 2 + k*(M+2) + 2*N + M + 10,
          $sformatf("k=%0d: %0d cycles", k, t_end - t0));
    $display("11x11x%0d: %0d cycles, %0d items of C", k, t_end - t0, k*N);
  endtask

  initial begin
    rst_n = 1'b0; start = 1'b0; k_len = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    foreach (KS[r]) run(KS[r]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
