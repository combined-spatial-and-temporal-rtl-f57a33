// diffusion2d_lane: one vector lane of the Diffusion 2D cell update.
//
// Computes  cc*C + cw*W + ce*E + cs*S + cn*N  in single precision, summed
// left to right exactly as the C expression of the stencil is written
// (five multiplies, then a chain of four adds), so the result matches a
// scalar reference bit for bit.  When fwd is set the lane instead passes the
// centre cell through unchanged: this is how a PE that has no time step to
// compute in the current pass forwards its data.
//
// Timing: a 5-stage pipeline (multiply, then one stage per add).  All stages
// advance together when en is high and hold when it is low, so the owner of
// the lane can stall it; LATENCY is exported for that owner's valid chain.
// The neighbour values arrive already boundary-corrected.  The split into
// stages is this design's choice; the paper gives only the expression.
module diffusion2d_lane
  import stencil_pkg::*;
#(
  parameter int unsigned LATENCY = 5   // fixed by the structure below
) (
  input  logic         clk,
  input  logic         en,
  input  diff2d_coef_t coef,
  input  logic         fwd,
  input  fp32_t        c, w, e, s, n,
  output fp32_t        y
);
  fp32_t m0, m1, m2, m3, m4;
  fp32_t a1_d, a2_d, a3_d, a4_d;

  // stage registers
  fp32_t p0_q, p1_q, p2_q, p3_q, p4_q, c1_q;  logic f1_q;
  fp32_t s2_q, p2_2q, p3_2q, p4_2q, c2_q;     logic f2_q;
  fp32_t s3_q, p3_3q, p4_3q, c3_q;            logic f3_q;
  fp32_t s4_q, p4_4q, c4_q;                   logic f4_q;
  fp32_t y_q;

  fp32_mul u_m0 (.a(coef.cc), .b(c), .y(m0));
  fp32_mul u_m1 (.a(coef.cw), .b(w), .y(m1));
  fp32_mul u_m2 (.a(coef.ce), .b(e), .y(m2));
  fp32_mul u_m3 (.a(coef.cs), .b(s), .y(m3));
  fp32_mul u_m4 (.a(coef.cn), .b(n), .y(m4));

  fp32_add u_a1 (.a(p0_q), .b(p1_q),  .y(a1_d));
  fp32_add u_a2 (.a(s2_q), .b(p2_2q), .y(a2_d));
  fp32_add u_a3 (.a(s3_q), .b(p3_3q), .y(a3_d));
  fp32_add u_a4 (.a(s4_q), .b(p4_4q), .y(a4_d));

  always_ff @(posedge clk) begin
    if (en) begin
      p0_q <= m0; p1_q <= m1; p2_q <= m2; p3_q <= m3; p4_q <= m4;
      c1_q <= c;  f1_q <= fwd;

      s2_q <= a1_d; p2_2q <= p2_q; p3_2q <= p3_q; p4_2q <= p4_q;
      c2_q <= c1_q; f2_q <= f1_q;

      s3_q <= a2_d; p3_3q <= p3_2q; p4_3q <= p4_2q;
      c3_q <= c2_q; f3_q <= f2_q;

      s4_q <= a3_d; p4_4q <= p4_3q;
      c4_q <= c3_q; f4_q <= f3_q;

      y_q <= f4_q ? c4_q : a4_d;
    end
  end

  assign y = y_q;
endmodule
