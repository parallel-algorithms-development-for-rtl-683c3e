// mm_bank_reader: produces the matrix bss, held column by column in an
// external SRAM bank, as a stream of W-item vectors closed by an
// end-of-transmission token.
//
// The bank is single-ported, so a vector is fetched one item per cycle: item
// j of column k is at word address k*W + j (the low DATA_W bits of the
// word). A fetched vector moves into the output register as soon as that
// is free, and the fetch of the next column starts at once, so fetching
// overlaps with waiting for the consumer. After k_len columns the reader
// offers the EOT token and returns to idle.
//
// Interface: start (pulse) with k_len, the number of columns; SRAM read
// port bank_en/bank_addr/bank_rdata with a read latency of one cycle;
// vector output vec_o/eot_o with a valid/ready handshake; busy_o.
//
// Timing: W+2 cycles per column when the consumer keeps up (W reads, the
// return of the last word, the move into the output register). The bank
// and the sequential access follow the published board code; the address
// layout, the latency and the overlap are this design's choice.
module mm_bank_reader
  import mm_pkg::*;
#(
  parameter int unsigned W = M_COLS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start_i,
  input  logic [K_W-1:0]     k_len_i,
  output logic               busy_o,
  // SRAM bank read port
  output logic               bank_en_o,
  output logic [BANK_AW-1:0] bank_addr_o,
  input  logic [BANK_DW-1:0] bank_rdata_i,
  // vector stream out
  output data_t              vec_o     [W],
  output logic               eot_o,
  output logic               vec_valid_o,
  input  logic               vec_ready_i
);

  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_HOLD, S_EOT, S_DRAIN} state_e;

  localparam int unsigned JW = (W > 1) ? $clog2(W) : 1;

  state_e             state_q;
  data_t              fbuf_q [W]; // vector being fetched
  logic [JW-1:0]      j_q;        // item being addressed
  logic [JW-1:0]      j_d_q;      // item whose data returns this cycle
  logic               rd_pend_q;  // a read was issued last cycle
  logic               last_in;    // the last word of the vector returns now
  logic               out_free;   // the output register can take a vector
  logic [K_W-1:0]     k_q, k_len_q;
  logic [BANK_AW-1:0] addr_q;

  assign last_in     = rd_pend_q && (j_d_q == JW'(W-1));
  assign out_free    = !vec_valid_o || vec_ready_i;
  assign busy_o      = (state_q != S_IDLE);
  assign bank_en_o   = (state_q == S_FETCH) && !last_in;
  assign bank_addr_o = addr_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q     <= S_IDLE;
      j_q         <= '0;
      j_d_q       <= '0;
      rd_pend_q   <= 1'b0;
      k_q         <= '0;
      k_len_q     <= '0;
      addr_q      <= '0;
      vec_valid_o <= 1'b0;
      eot_o       <= 1'b0;
      for (int j = 0; j < W; j++) begin
        vec_o[j]  <= '0;
        fbuf_q[j] <= '0;
      end
    end else begin
      rd_pend_q <= bank_en_o;
      if (bank_en_o) begin
        j_d_q  <= j_q;
        j_q    <= (j_q == JW'(W-1)) ? '0 : j_q + 1'b1;
        addr_q <= addr_q + 1'b1;
      end
      if (rd_pend_q) fbuf_q[j_d_q] <= data_t'(bank_rdata_i[DATA_W-1:0]);
      if (vec_valid_o && vec_ready_i) vec_valid_o <= 1'b0;

      unique case (state_q)
        S_IDLE: if (start_i) begin
          k_len_q <= k_len_i;
          k_q     <= '0;
          j_q     <= '0;
          addr_q  <= '0;
          state_q <= (k_len_i == '0) ? S_EOT : S_FETCH;
        end
        S_FETCH: if (last_in) state_q <= S_HOLD;
        S_HOLD: if (out_free) begin
          vec_o       <= fbuf_q;
          eot_o       <= 1'b0;
          vec_valid_o <= 1'b1;
          k_q         <= k_q + 1'b1;
          state_q     <= (k_q + 1'b1 == k_len_q) ? S_EOT : S_FETCH;
        end
        S_EOT: if (out_free) begin
          eot_o       <= 1'b1;
          vec_valid_o <= 1'b1;
          state_q     <= S_DRAIN;
        end
        S_DRAIN: if (vec_ready_i) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // Handshake rule: an offered vector stays offered, unchanged, until taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    vec_valid_o && !vec_ready_i |=> vec_valid_o && $stable(eot_o) && $stable(vec_o[0]));

endmodule
