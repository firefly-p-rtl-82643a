// lif_unit: one lane of the neuron dynamic unit (leaky integrate-and-fire).
//
// Computes V(t) = V(t-1) + (I(t) - V(t-1)) / tau_m with tau_m = 2. The
// division is an exponent decrement (fp16_half), so the lane needs two adders
// and no multiplier. A spike is emitted when the new potential is strictly
// greater than the threshold v_th. After a spike the potential is reset to
// zero; the reset rule is this design's choice.
//
// Interface: purely combinational; i_cur is the tile's accumulated psum,
// v_prev the stored potential, v_next the value to store back.
module lif_unit
  import fp16_pkg::*;
(
  input  fp16_t i_cur,
  input  fp16_t v_prev,
  input  fp16_t v_th,
  output fp16_t v_next,
  output logic  spike
);

  fp16_t diff, v_int;

  fp16_add u_diff (.a(i_cur), .b(fp16_neg(v_prev)), .y(diff));
  fp16_add u_int  (.a(v_prev), .b(fp16_half(diff)), .y(v_int));

  assign spike  = fp16_gt(v_int, v_th);
  assign v_next = spike ? FP16_ZERO : v_int;

endmodule
