// fp16_add: combinational binary16 adder.
//
// Used wherever the design sums: the psum accumulators of the forward engine,
// the leaky-integrate step of the LIF neurons, the trace update and the adder
// tree of the plasticity PEs. The operand of larger magnitude is kept
// unshifted; the other is aligned right by the exponent difference. When the
// difference is 13 or more the smaller operand is below a quarter of an ulp of
// the larger and cannot change the correctly rounded result, so the larger
// operand is returned. Otherwise both significands are placed in a 24-bit
// window in which the sum or difference is exact, the result is normalised by
// a leading-zero count and rounded once (round to nearest even, see
// fp16_pkg). Subnormals are treated as zero.
//
// Interface: a, b in, y = a + b out; no clock, zero latency.
module fp16_add
  import fp16_pkg::*;
(
  input  fp16_t a,
  input  fp16_t b,
  output fp16_t y
);

  always_comb begin
    fp16_t              hi_op, lo_op;
    logic [10:0]        sb, ss;
    logic [4:0]         d;
    logic [23:0]        xb, xs, r, n;
    logic [4:0]         lz;
    logic signed [7:0]  e;
    logic               sub;

    if ((fp16_is_zero(a) ? 15'd0 : a[14:0]) >= (fp16_is_zero(b) ? 15'd0 : b[14:0])) begin
      hi_op = a; lo_op = b;
    end else begin
      hi_op = b; lo_op = a;
    end
    sb  = {1'b1, hi_op[9:0]};
    ss  = {1'b1, lo_op[9:0]};
    d   = hi_op[14:10] - lo_op[14:10];
    sub = hi_op[15] ^ lo_op[15];
    xb  = {1'b0, sb, 12'd0};
    xs  = {1'b0, ss, 12'd0} >> d;
    r   = sub ? (xb - xs) : (xb + xs);
    lz  = 5'd0;
    for (int i = 0; i < 24; i++) begin
      if (r[i]) lz = 5'(23 - i);
    end
    n   = r << lz;
    e   = 8'(signed'({3'b000, hi_op[14:10]})) + 8'sd1 - 8'(signed'({3'b000, lz}));
    y   = fp16_round(hi_op[15], e, n[23:13], n[12], |n[11:0]);

    if (fp16_is_inf(a) || fp16_is_inf(b)) begin
      if (fp16_is_inf(a) && fp16_is_inf(b) && (a[15] != b[15])) y = FP16_QNAN;
      else y = fp16_is_inf(a) ? {a[15], 15'h7C00} : {b[15], 15'h7C00};
    end else if (fp16_is_zero(hi_op)) begin
      y = {hi_op[15] & lo_op[15], 15'd0};
    end else if (fp16_is_zero(lo_op) || d >= 5'd13) begin
      y = hi_op;
    end else if (r == 24'd0) begin
      y = FP16_ZERO;
    end
  end

endmodule
