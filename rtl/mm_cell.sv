// mm_cell: one systolic multiply-accumulate cell of the 2D pipelined matrix
// multiplier.
//
// The cell holds one coefficient a = ass[i][j]. Each time it fires it takes a
// value u from its up channel and a partial sum l from its left channel,
// sends l + u*a to the right and passes u on downward. When the token on the
// up channel is an end-of-transmission token, the cell passes it downward
// and neither reads the left channel nor writes the right one. This is the
// cell of the published systolic network:
//   CELL(a) = up?u -> down!u -> (SKIP if u = eot else left?l -> right!(u*a+l)).
// After an EOT the cell is ready for the next stream (the process restarts),
// which is this design's choice.
//
// Interface: up/left inputs and right/down outputs are valid/ready channels
// of mm_pkg::item_t. coef_we loads coef_i into the coefficient register.
//
// Timing: the cell fires in the cycle in which up (and, for a value token,
// left) is valid and the output registers it writes are empty or being
// emptied. Its outputs are registered, so a value crosses one cell per
// cycle and a cell accepts a new operand pair every cycle. The product and
// sum wrap to 16 bits, like the Int16 arithmetic of the reference design.
module mm_cell
  import mm_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  // coefficient load
  input  logic  coef_we,
  input  data_t coef_i,
  // up channel (b values and EOT)
  input  item_t up_i,
  input  logic  up_valid_i,
  output logic  up_ready_o,
  // left channel (partial sums)
  input  item_t left_i,
  input  logic  left_valid_i,
  output logic  left_ready_o,
  // right channel (partial sum + u*a)
  output item_t right_o,
  output logic  right_valid_o,
  input  logic  right_ready_i,
  // down channel (u forwarded)
  output item_t down_o,
  output logic  down_valid_o,
  input  logic  down_ready_i
);

  data_t coef_q;
  logic  right_free, down_free, fire, is_eot;

  always_ff @(posedge clk) begin
    if (!rst_n)       coef_q <= '0;
    else if (coef_we) coef_q <= coef_i;
  end

  assign is_eot     = up_i.eot;
  assign right_free = !right_valid_o || right_ready_i;
  assign down_free  = !down_valid_o  || down_ready_i;
  // A value needs both inputs and both output slots; an EOT needs only the
  // up input and the down slot.
  assign fire = up_valid_i && down_free &&
                (is_eot || (left_valid_i && right_free));

  assign up_ready_o   = fire;
  assign left_ready_o = fire && !is_eot;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      right_valid_o <= 1'b0;
      down_valid_o  <= 1'b0;
      right_o       <= ITEM_ZERO;
      down_o        <= ITEM_ZERO;
    end else begin
      if (right_valid_o && right_ready_i) right_valid_o <= 1'b0;
      if (down_valid_o  && down_ready_i)  down_valid_o  <= 1'b0;
      if (fire) begin
        down_o       <= up_i;
        down_valid_o <= 1'b1;
        if (!is_eot) begin
          right_o.eot   <= 1'b0;
          right_o.data  <= data_t'(left_i.data + up_i.data * coef_q);
          right_valid_o <= 1'b1;
        end
      end
    end
  end

  // Handshake rule: an offered token stays offered, unchanged, until taken.
  a_right_hold: assert property (@(posedge clk) disable iff (!rst_n)
    right_valid_o && !right_ready_i |=> right_valid_o && $stable(right_o));
  a_down_hold: assert property (@(posedge clk) disable iff (!rst_n)
    down_valid_o && !down_ready_i |=> down_valid_o && $stable(down_o));

endmodule
