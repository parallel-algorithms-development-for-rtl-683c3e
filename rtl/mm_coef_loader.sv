// mm_coef_loader: loads the N x M matrix ass from an external SRAM bank into
// the coefficient registers of the systolic network.
//
// ass[i][j] is read from word address i*M + j (the low DATA_W bits). One
// word is read per cycle; each word is written into cell (i,j) of the
// network one cycle later, when the bank returns it.
//
// Interface: start (pulse); SRAM read port bank_en/bank_addr/bank_rdata
// with a read latency of one cycle; coefficient write port coef_we,
// coef_row, coef_col, coef_data; busy_o, done_o (one-cycle pulse).
//
// Timing: N*M+1 cycles from start to the last coefficient write; done_o
// is pulsed in the cycle after it. Keeping ass on the chip and loading it
// from bank 0 before the run follows the published code; the order and
// address layout are this design's choice.
module mm_coef_loader
  import mm_pkg::*;
#(
  parameter int unsigned N = N_ROWS,
  parameter int unsigned M = M_COLS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start_i,
  output logic                 busy_o,
  output logic                 done_o,
  // SRAM bank read port
  output logic                 bank_en_o,
  output logic [BANK_AW-1:0]   bank_addr_o,
  input  logic [BANK_DW-1:0]   bank_rdata_i,
  // coefficient write port
  output logic                 coef_we_o,
  output logic [$clog2(N)-1:0] coef_row_o,
  output logic [$clog2(M)-1:0] coef_col_o,
  output data_t                coef_data_o
);

  localparam int unsigned RW = $clog2(N);
  localparam int unsigned CW = $clog2(M);

  logic          reading_q;
  logic [RW-1:0] row_q, row_d_q;
  logic [CW-1:0] col_q, col_d_q;
  logic          rd_pend_q;
  logic [BANK_AW-1:0] addr_q;

  assign busy_o      = reading_q || rd_pend_q;
  assign bank_en_o   = reading_q;
  assign bank_addr_o = addr_q;
  assign coef_we_o   = rd_pend_q;
  assign coef_row_o  = row_d_q;
  assign coef_col_o  = col_d_q;
  assign coef_data_o = data_t'(bank_rdata_i[DATA_W-1:0]);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      reading_q <= 1'b0;
      rd_pend_q <= 1'b0;
      row_q     <= '0;
      col_q     <= '0;
      row_d_q   <= '0;
      col_d_q   <= '0;
      addr_q    <= '0;
      done_o    <= 1'b0;
    end else begin
      rd_pend_q <= reading_q;
      done_o    <= rd_pend_q && !reading_q;
      if (start_i && !busy_o) begin
        reading_q <= 1'b1;
        row_q     <= '0;
        col_q     <= '0;
        addr_q    <= '0;
      end else if (reading_q) begin
        row_d_q <= row_q;
        col_d_q <= col_q;
        addr_q  <= addr_q + 1'b1;
        if (col_q == CW'(M-1)) begin
          col_q <= '0;
          if (row_q == RW'(N-1)) reading_q <= 1'b0;
          else                   row_q <= row_q + 1'b1;
        end else begin
          col_q <= col_q + 1'b1;
        end
      end
    end
  end

endmodule
