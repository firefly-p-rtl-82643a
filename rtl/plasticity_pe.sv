// plasticity_pe: one synapse lane of the plasticity engine.
//
// Evaluates the four-term rule
//     dw = alpha*Sj*Si + beta*Sj + gamma*Si + delta
// and returns the updated weight w + dw. The associative, presynaptic and
// postsynaptic products are formed in parallel multipliers and the terms are
// summed by a small adder tree, pipelined as follows:
//   stage 1: Sj*Si, beta*Sj, gamma*Si          (three multipliers)
//   stage 2: alpha*(Sj*Si), beta*Sj + gamma*Si (multiplier and adder)
//   stage 3: alpha-term + delta
//   output : dw = stage-3 sum + (beta+gamma sum), w_new = w_old + dw
// The stage split is this design's choice; the operand set, the parallel
// products and the adder tree are the rule's.
//
// Interface: operands are sampled with in_valid; out_valid, dw and w_new
// follow three cycles later (outputs are combinational from the stage-3
// registers). One new synapse can enter every cycle.
module plasticity_pe
  import fp16_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  prm_t  prm,
  input  fp16_t s_pre,
  input  fp16_t s_post,
  input  fp16_t w_old,
  output logic  out_valid,
  output fp16_t dw,
  output fp16_t w_new
);

  fp16_t m_ss, m_b, m_c, m_a, s_bc, s_ad;

  // stage 1
  fp16_t r1_ss, r1_b, r1_c, r1_alpha, r1_delta, r1_w;
  logic  v1;
  fp16_mul u_ss (.a(s_pre),      .b(s_post), .y(m_ss));
  fp16_mul u_b  (.a(prm.beta),   .b(s_pre),  .y(m_b));
  fp16_mul u_c  (.a(prm.gamma),  .b(s_post), .y(m_c));

  // stage 2
  fp16_t r2_a, r2_bc, r2_delta, r2_w;
  logic  v2;
  fp16_mul u_a  (.a(r1_alpha), .b(r1_ss), .y(m_a));
  fp16_add u_bc (.a(r1_b),     .b(r1_c),  .y(s_bc));

  // stage 3
  fp16_t r3_ad, r3_bc, r3_w;
  logic  v3;
  fp16_add u_ad (.a(r2_a), .b(r2_delta), .y(s_ad));

  // output adders
  fp16_add u_dw (.a(r3_ad), .b(r3_bc), .y(dw));
  fp16_add u_w  (.a(r3_w),  .b(dw),    .y(w_new));

  always_ff @(posedge clk) begin
    r1_ss <= m_ss;  r1_b <= m_b;  r1_c <= m_c;
    r1_alpha <= prm.alpha;  r1_delta <= prm.delta;  r1_w <= w_old;
    r2_a <= m_a;  r2_bc <= s_bc;  r2_delta <= r1_delta;  r2_w <= r1_w;
    r3_ad <= s_ad;  r3_bc <= r2_bc;  r3_w <= r2_w;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) {v1, v2, v3} <= '0;
    else        {v1, v2, v3} <= {in_valid, v1, v2};
  end

  assign out_valid = v3;

endmodule
