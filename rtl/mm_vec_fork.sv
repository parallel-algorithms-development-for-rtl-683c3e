// mm_vec_fork: produces one vector on W parallel channels (the PRD process
// for vectors), so that every item of the vector can be taken by its own
// consumer independently.
//
// The input is one handshake carrying a whole vector of W items, or an
// end-of-transmission token. Lane j offers item j (or the EOT token) until
// its consumer takes it; a flag remembers which lanes have already been
// served. The input is acknowledged in the cycle its last outstanding lane
// is taken, and the flags clear for the next vector.
//
// Interface: vec_i/eot_i with vec_valid_i/vec_ready_o in; lane_o[W] with
// per-lane valid/ready out.
//
// Timing: combinational from input to lanes (no added latency); when all
// consumers are ready the fork passes one vector per cycle. The per-lane
// handshake is this design's choice; the published code produces the
// vector with a parallel loop of single-item sends.
module mm_vec_fork
  import mm_pkg::*;
#(
  parameter int unsigned W = M_COLS
) (
  input  logic         clk,
  input  logic         rst_n,
  input  data_t        vec_i        [W],
  input  logic         eot_i,
  input  logic         vec_valid_i,
  output logic         vec_ready_o,
  output item_t        lane_o       [W],
  output logic [W-1:0] lane_valid_o,
  input  logic [W-1:0] lane_ready_i
);

  logic [W-1:0] sent_q;
  logic [W-1:0] done_now;

  always_comb begin
    for (int j = 0; j < W; j++) begin
      lane_o[j].eot   = eot_i;
      lane_o[j].data  = eot_i ? data_t'(0) : vec_i[j];
      lane_valid_o[j] = vec_valid_i && !sent_q[j];
    end
  end

  assign done_now    = sent_q | (lane_valid_o & lane_ready_i);
  assign vec_ready_o = vec_valid_i && (&done_now);

  always_ff @(posedge clk) begin
    if (!rst_n)          sent_q <= '0;
    else if (vec_ready_o) sent_q <= '0;
    else if (vec_valid_i) sent_q <= done_now;
  end

endmodule
