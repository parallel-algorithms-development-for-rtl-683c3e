// mm_css_join: gathers the N row result streams of the systolic network
// into one stream of N-item vectors, the columns cs_k of C, and closes that
// stream with an end-of-transmission token.
//
// A vector is offered when every row has a result waiting; all N results
// are taken together when the vector is accepted. The end of the input
// stream is learned from the EOT token that leaves the bottom of the last
// network column (eot_seen_i). That token overtakes no result: the last
// cell of every row writes its final result before it passes the EOT
// down. So once the EOT has been seen, the join waits until no row holds a
// result any more and then sends its own EOT token (the final
// "cssFinal.eotChannel ! True" of the published main program).
//
// Interface: row_i[N] valid/ready in; vec_o/eot_o with a valid/ready
// handshake out; eot_seen_i is a one-cycle pulse.
//
// Timing: combinational join, no added latency; the EOT goes out at the
// earliest one cycle after eot_seen_i. How the columns are joined is this
// design's choice.
module mm_css_join
  import mm_pkg::*;
#(
  parameter int unsigned N = N_ROWS
) (
  input  logic         clk,
  input  logic         rst_n,
  input  item_t        row_i        [N],
  input  logic [N-1:0] row_valid_i,
  output logic [N-1:0] row_ready_o,
  input  logic         eot_seen_i,
  output data_t        vec_o        [N],
  output logic         eot_o,
  output logic         vec_valid_o,
  input  logic         vec_ready_i
);

  logic eot_pend_q;
  logic all_valid;

  assign all_valid = &row_valid_i;

  always_comb begin
    for (int i = 0; i < N; i++) vec_o[i] = row_i[i].data;
    eot_o       = !all_valid && eot_pend_q && (row_valid_i == '0);
    vec_valid_o = all_valid || eot_o;
    row_ready_o = {N{all_valid && vec_ready_i}};
  end

  always_ff @(posedge clk) begin
    if (!rst_n)                            eot_pend_q <= 1'b0;
    else if (eot_o && vec_ready_i)         eot_pend_q <= 1'b0;
    else if (eot_seen_i)                   eot_pend_q <= 1'b1;
  end

endmodule
