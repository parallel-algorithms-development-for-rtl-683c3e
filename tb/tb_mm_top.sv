// tb_mm_top: end-to-end test of the systolic matrix multiplier at its
// default size (11 x 11 cells).
//
// Each run writes a random A (N x M) into bank 0 and a random B (M x k)
// into bank 1, pulses start, waits for done and compares bank 2 with
// C = A x B worked out here with 16-bit wrapping arithmetic. Runs: k = 1,
// k = 11, a random k and a run with k = 0 (an empty stream: only the EOT
// travels), each with a new A, so the network is also reloaded and
// restarted. A second phase holds bank 2's writer back through its
// single-port pace, which stalls the network.
//
// Counted mechanisms (each must happen at least once): coefficient loads,
// cells stalled by a full output, EOT tokens reaching the sinks, the join's
// own EOT, restarts of the network after an EOT. Checked timing: loading
// takes N*M+2 cycles from start to the reader's start, and a run ends
// within the bank-limited bound N*M + 2 + k*(M+2) + 2*N + M + 10 cycles
// (the bank reader delivers one column every M+2 cycles).
module tb_mm_top;
  import mm_pkg::*;

  localparam int unsigned N = N_ROWS;
  localparam int unsigned M = M_COLS;
  localparam int unsigned KMAX = 40;

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

  mm_sram_model #(.WORDS(1024)) bank0 (.clk(clk), .en(b0_en), .we(1'b0), .addr(b0_addr), .wdata('0), .rdata(b0_rdata));
  mm_sram_model #(.WORDS(1024)) bank1 (.clk(clk), .en(b1_en), .we(1'b0), .addr(b1_addr), .wdata('0), .rdata(b1_rdata));
  mm_sram_model #(.WORDS(1024)) bank2 (.clk(clk), .en(1'b0), .we(b2_we), .addr(b2_addr), .wdata(b2_wdata), .rdata(b2_rdata));

  int checks = 0, failures = 0;
  int n_coef = 0, n_stall = 0, n_sink_eot = 0, n_join_eot = 0, n_restart = 0;
  int runs_done = 0;

  // -------------------------------------------------------- event counters
  always @(posedge clk) if (rst_n) begin
    if (dut.coef_we) n_coef++;
    for (int i = 0; i < N; i++)
      n_stall += $countones(dut.u_grid.vlink_valid[i] & ~dut.u_grid.vlink_ready[i]);
    for (int j = 0; j < M; j++)
      if (dut.bot_out_valid[j] && dut.bot_out[j].eot) n_sink_eot++;
    if (dut.cvec_valid && dut.cvec_eot && dut.cvec_ready) n_join_eot++;
  end

  // ---------------------------------------------------------------- helpers
  data_t a_m [N][M];
  data_t b_m [M][KMAX];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run(input int k);
    int t0, t_rd, t_end;
    logic [DATA_W-1:0] acc;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < M; j++) begin
        a_m[i][j] = data_t'($urandom);
        bank0.mem[i*M + j] = BANK_DW'($urandom) & 32'hFFFF_0000 | 32'(a_m[i][j]);
      end
    for (int c = 0; c < k; c++)
      for (int j = 0; j < M; j++) begin
        b_m[j][c] = data_t'($urandom);
        bank1.mem[c*M + j] = {16'hABCD, b_m[j][c]};
      end
    for (int w = 0; w < 1024; w++) bank2.mem[w] = 32'hDEAD_BEEF;
    @(negedge clk);
    k_len = K_W'(k);
    start = 1'b1;
    t0 = $time / 10;
    @(negedge clk);
    start = 1'b0;
    t_rd = -1;
    while (!done) begin
      if (dut.rd_start && t_rd < 0) t_rd = $time / 10;
      @(negedge clk);
    end
    t_end = $time / 10;
    check(t_rd - t0 == N*M + 2, $sformatf("load time %0d, expected %0d", t_rd - t0, N*M + 2));
    check(t_end - t0 <= N*M + 2 + k*(M+2) + 2*N + M + 10,
          $sformatf("run of k=%0d took %0d cycles", k, t_end - t0));
    check(int'(stored_count) == k || k == 0, $sformatf("stored %0d columns, expected %0d", stored_count, k));
    check(sink_count == 32'(k*M), $sformatf("sinks absorbed %0d values, expected %0d", sink_count, k*M));
    for (int c = 0; c < k; c++)
      for (int i = 0; i < N; i++) begin
        acc = '0;
        for (int j = 0; j < M; j++) acc += a_m[i][j] * b_m[j][c];
        check(bank2.mem[c*N + i] == BANK_DW'(signed'(data_t'(acc))),
              $sformatf("k=%0d c[%0d][%0d] = %h, expected %h", k, i, c, bank2.mem[c*N + i], acc));
      end
    check(bank2.mem[k*N] == 32'hDEAD_BEEF, "writer wrote past the last column");
    $display("run k=%0d: %0d cycles (load %0d)", k, t_end - t0, t_rd - t0);
    runs_done++;
    if (runs_done > 1) n_restart++;
  endtask

  // ------------------------------------------------------------------ main
  initial begin
    rst_n = 1'b0;
    start = 1'b0;
    k_len = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(1);
    run(11);
    run(1 + ($urandom % KMAX));
    run(0);
    run(KMAX);
    check(n_coef == 5*N*M, $sformatf("coefficient writes %0d", n_coef));
    check(n_stall > 0,    "no cell was ever stalled");
    check(n_sink_eot == 5*M, $sformatf("EOT tokens at the sinks %0d, expected %0d", n_sink_eot, 5*M));
    check(n_join_eot == 5, $sformatf("join EOT tokens %0d", n_join_eot));
    check(n_restart > 0,  "the network never restarted");
    $display("mechanisms: coef_writes=%0d stalls=%0d sink_eot=%0d join_eot=%0d restarts=%0d",
             n_coef, n_stall, n_sink_eot, n_join_eot, n_restart);
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
