// fp16_mul: combinational binary16 multiplier.
//
// Used by the psum PEs of layers with real-valued inputs, the trace decay
// (lambda * S) and the four products of each plasticity PE. The 11-bit
// significands (hidden one restored) are multiplied exactly into 22 bits; the
// product is normalised by at most one position and rounded once to nearest
// even through fp16_round. A zero (or subnormal) operand gives a signed zero,
// an infinite operand an infinity. On an FPGA the 11x11 product maps onto one
// DSP slice; here it is written as plain logic.
//
// Interface: a, b in, y = a * b out; no clock, zero latency.
module fp16_mul
  import fp16_pkg::*;
(
  input  fp16_t a,
  input  fp16_t b,
  output fp16_t y
);

  always_comb begin
    logic [21:0]       p;
    logic signed [7:0] e;
    logic              s;
    s = a[15] ^ b[15];
    p = {1'b1, a[9:0]} * {1'b1, b[9:0]};
    e = 8'(signed'({3'b000, a[14:10]})) + 8'(signed'({3'b000, b[14:10]})) - 8'sd15;
    if (p[21]) y = fp16_round(s, e + 8'sd1, p[21:11], p[10], |p[9:0]);
    else       y = fp16_round(s, e,         p[20:10], p[9],  |p[8:0]);
    if (fp16_is_zero(a) || fp16_is_zero(b)) y = {s, 15'd0};
    else if (fp16_is_inf(a) || fp16_is_inf(b)) y = {s, 15'h7C00};
  end

endmodule
