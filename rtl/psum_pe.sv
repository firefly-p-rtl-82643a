// psum_pe: one processing element of the forward engine's psum calculation
// unit.
//
// The PE is output-stationary: it owns one postsynaptic neuron of the current
// tile and keeps that neuron's input current I(t) in a local register while
// the presynaptic inputs stream past, one per cycle, so no partial sum goes
// back to memory. Each enabled cycle adds w*x to the register. When the input
// x is zero the update is suppressed ("gated if zero"): the register keeps its
// value and 'gated' reports the skipped operation. With SPIKE_INPUT set the
// input is a binary spike (1.0 or 0) and the product is the weight itself, so
// no multiplier is built; this is how the design treats the second layer,
// whose inputs are the first layer's spikes.
//
// Interface: clr zeroes the psum at the next edge (and wins over en); en with
// w and x accumulates at the next edge; psum is the register output.
module psum_pe
  import fp16_pkg::*;
#(
  parameter bit SPIKE_INPUT = 1'b0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clr,
  input  logic  en,
  input  fp16_t w,
  input  fp16_t x,
  output fp16_t psum,
  output logic  gated
);

  fp16_t prod, sum;

  if (SPIKE_INPUT) begin : g_spike
    assign prod = w;
  end else begin : g_mul
    fp16_mul u_mul (.a(w), .b(x), .y(prod));
  end

  fp16_add u_add (.a(psum), .b(prod), .y(sum));

  assign gated = en && fp16_is_zero(x);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                          psum <= FP16_ZERO;
    else if (clr)                        psum <= FP16_ZERO;
    else if (en && !fp16_is_zero(x))     psum <= sum;
  end

endmodule
