// tb_mm_coef_loader: self-checking test of the ass loader.
//
// A bank model holds random words. After start the loader must write every
// coefficient (i,j) exactly once with the low 16 bits of word i*M + j, take
// N*M+1 cycles from start to the last write, pulse done once in the cycle
// after it and ignore a start while busy. It is run twice.
module tb_mm_coef_loader;
  import mm_pkg::*;

  localparam int unsigned N = N_ROWS;
  localparam int unsigned M = M_COLS;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  logic                 start, busy, done, en, we;
  logic [BANK_AW-1:0]   addr;
  logic [BANK_DW-1:0]   rdata;
  logic [$clog2(N)-1:0] row;
  logic [$clog2(M)-1:0] col;
  data_t                data;

  mm_coef_loader dut (
    .clk(clk), .rst_n(rst_n), .start_i(start), .busy_o(busy), .done_o(done),
    .bank_en_o(en), .bank_addr_o(addr), .bank_rdata_i(rdata),
    .coef_we_o(we), .coef_row_o(row), .coef_col_o(col), .coef_data_o(data)
  );

  mm_sram_model #(.WORDS(256)) bank (.clk(clk), .en(en), .we(1'b0), .addr(addr), .wdata('0), .rdata(rdata));

  int checks = 0, failures = 0;
  int    seen [N][M];
  data_t got  [N][M];
  int    n_done, t_last, t_done;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (we) begin
      seen[row][col]++;
      got[row][col] = data;
      t_last = $time / 10;
    end
    if (done) begin n_done++; t_done = $time / 10; end
  end

  task automatic run();
    int t0;
    for (int w = 0; w < 256; w++) bank.mem[w] = $urandom;
    for (int i = 0; i < N; i++) for (int j = 0; j < M; j++) seen[i][j] = 0;
    n_done = 0;
    @(negedge clk);
    start = 1;
    t0 = $time / 10;
    @(negedge clk);
    @(negedge clk);   // a second start while busy must be ignored
    start = 0;
    repeat (N*M + 10) @(negedge clk);
    for (int i = 0; i < N; i++)
      for (int j = 0; j < M; j++) begin
        check(seen[i][j] == 1, $sformatf("coefficient (%0d,%0d) written %0d times", i, j, seen[i][j]));
        check(got[i][j] == data_t'(bank.mem[i*M + j][DATA_W-1:0]),
              $sformatf("coefficient (%0d,%0d) = %h", i, j, got[i][j]));
      end
    check(t_last - t0 == N*M + 1, $sformatf("last write %0d cycles after start", t_last - t0));
    check(n_done == 1 && t_done == t_last + 1, "done pulse");
  endtask

  initial begin
    rst_n = 0; start = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run();
    run();
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
