// fp16_pkg: number format and shared helpers of the plasticity accelerator.
//
// Every datapath value (weights, input currents, membrane potentials, spike
// traces and the four plasticity coefficients) is an IEEE-754 binary16 number:
// 1 sign bit, 5 exponent bits (bias 15) and 10 fraction bits. The format is the
// one the design is built around; the rounding policy is this design's choice:
// round to nearest, ties to even, with subnormal inputs and results flushed to
// a signed zero, overflow to infinity and no NaN generation except inf-inf.
//
// The package holds the types, the constants, the final rounding/packing step
// shared by the adder and the multiplier (fp16_round), and three small
// operations that need no arithmetic unit: negation, halving by exponent
// decrement (the tau_m = 2 leak of the LIF neuron) and ordered comparison.
package fp16_pkg;

  typedef logic [15:0] fp16_t;

  // Four per-synapse plasticity coefficients, fetched together in one wide
  // word: dw = alpha*Sj*Si + beta*Sj + gamma*Si + delta.
  typedef struct packed {
    fp16_t alpha;
    fp16_t beta;
    fp16_t gamma;
    fp16_t delta;
  } prm_t;

  localparam fp16_t FP16_ZERO = 16'h0000;
  localparam fp16_t FP16_ONE  = 16'h3C00;
  localparam fp16_t FP16_PINF = 16'h7C00;
  localparam fp16_t FP16_QNAN = 16'h7E00;

  function automatic logic fp16_is_zero(fp16_t a);
    return a[14:10] == 5'd0;  // zero or (flushed) subnormal
  endfunction

  function automatic logic fp16_is_inf(fp16_t a);
    return a[14:10] == 5'h1F;
  endfunction

  function automatic fp16_t fp16_neg(fp16_t a);
    return {~a[15], a[14:0]};
  endfunction

  // a / 2 by exponent decrement; a result that would be subnormal is flushed.
  function automatic fp16_t fp16_half(fp16_t a);
    if (a[14:10] <= 5'd1) return {a[15], 15'd0};
    if (a[14:10] == 5'h1F) return a;
    return {a[15], a[14:10] - 5'd1, a[9:0]};
  endfunction

  // Map to an unsigned key whose order is the numeric order (+0 == -0).
  function automatic logic [15:0] fp16_key(fp16_t a);
    logic [14:0] mag;
    mag = fp16_is_zero(a) ? 15'd0 : a[14:0];
    if (a[15] && mag != 15'd0) return {1'b0, ~mag};
    return {1'b1, mag};
  endfunction

  function automatic logic fp16_gt(fp16_t a, fp16_t b);
    return fp16_key(a) > fp16_key(b);
  endfunction

  // Round an exact result to binary16. sig holds 11 significand bits with the
  // leading one at bit 10, exp is the biased exponent of that leading one,
  // half is the first dropped bit and sticky the OR of all bits below it.
  function automatic fp16_t fp16_round(logic sign, logic signed [7:0] exp,
                                       logic [10:0] sig, logic half, logic sticky);
    logic [11:0]        sr;
    logic signed [7:0]  e;
    sr = {1'b0, sig} + {11'd0, half && (sticky || sig[0])};
    e  = exp;
    if (sr[11]) begin
      sr = sr >> 1;
      e  = e + 8'sd1;
    end
    if (e <= 8'sd0)  return {sign, 15'd0};
    if (e >= 8'sd31) return {sign, 15'h7C00};
    return {sign, e[4:0], sr[9:0]};
  endfunction

endpackage
