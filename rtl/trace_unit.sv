// trace_unit: one lane of the online spike-trace update.
//
// A trace is an exponentially decaying record of a neuron's recent activity:
// S(t) = lambda * S(t-1) + s(t). The lane multiplies the stored trace by the
// decay constant and adds the new event. For spiking neurons x is 1.0 or 0;
// for the network inputs, which are real-valued sensor readings, this design
// feeds the input value itself.
//
// Interface: purely combinational; s_next = lambda_ * s_prev + x, each
// operation rounded to binary16.
module trace_unit
  import fp16_pkg::*;
(
  input  fp16_t s_prev,
  input  fp16_t lambda_,
  input  fp16_t x,
  output fp16_t s_next
);

  fp16_t decayed;

  fp16_mul u_mul (.a(lambda_), .b(s_prev), .y(decayed));
  fp16_add u_add (.a(decayed), .b(x), .y(s_next));

endmodule
