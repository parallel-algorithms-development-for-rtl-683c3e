// mm_bank_writer: stores a stream of W-item result vectors (the columns cs_k
// of C) into an external SRAM bank, and reports the end of the stream.
//
// The bank is single-ported, so a vector is written one item per cycle:
// item i of the k-th vector goes to word address k*W + i, sign-extended to
// the bank word. The writer takes a vector only when it is idle, which
// holds the network back while it writes. When it takes the EOT token it
// pulses done_o and restarts its address at 0 for the next stream.
//
// Interface: vector input vec_i/eot_i with valid/ready; SRAM write port
// bank_we/bank_addr/bank_wdata; done_o (one-cycle pulse); count_o, the
// number of vectors stored in the current stream.
//
// Timing: W cycles of writing per vector plus one cycle to take it. The
// bank and the item-by-item store follow the published board code; the
// address layout is this design's choice.
module mm_bank_writer
  import mm_pkg::*;
#(
  parameter int unsigned W = N_ROWS
) (
  input  logic               clk,
  input  logic               rst_n,
  // vector stream in
  input  data_t              vec_i     [W],
  input  logic               eot_i,
  input  logic               vec_valid_i,
  output logic               vec_ready_o,
  // SRAM bank write port
  output logic               bank_we_o,
  output logic [BANK_AW-1:0] bank_addr_o,
  output logic [BANK_DW-1:0] bank_wdata_o,
  // status
  output logic               done_o,
  output logic [K_W-1:0]     count_o
);

  localparam int unsigned IW = (W > 1) ? $clog2(W) : 1;

  data_t              buf_q [W];
  logic               writing_q;
  logic [IW-1:0]      i_q;
  logic [BANK_AW-1:0] addr_q;
  logic               fresh_q;   // next vector starts a new stream

  assign vec_ready_o  = !writing_q;
  assign bank_we_o    = writing_q;
  assign bank_addr_o  = addr_q;
  assign bank_wdata_o = BANK_DW'(signed'(buf_q[i_q]));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      writing_q <= 1'b0;
      i_q       <= '0;
      addr_q    <= '0;
      done_o    <= 1'b0;
      count_o   <= '0;
      fresh_q   <= 1'b1;
      for (int i = 0; i < W; i++) buf_q[i] <= '0;
    end else begin
      done_o <= 1'b0;
      if (vec_valid_i && vec_ready_o) begin
        if (eot_i) begin
          done_o  <= 1'b1;
          addr_q  <= '0;
          fresh_q <= 1'b1;
        end else begin
          buf_q     <= vec_i;
          writing_q <= 1'b1;
          i_q       <= '0;
          count_o   <= fresh_q ? K_W'(1) : count_o + 1'b1;
          fresh_q   <= 1'b0;
        end
      end
      if (writing_q) begin
        addr_q <= addr_q + 1'b1;
        if (i_q == IW'(W-1)) writing_q <= 1'b0;
        else                 i_q <= i_q + 1'b1;
      end
    end
  end

endmodule
