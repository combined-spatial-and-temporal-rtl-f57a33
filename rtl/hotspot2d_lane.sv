// hotspot2d_lane: one vector lane of the Hotspot 2D cell update.
//
// Computes, in single precision,
//   C + sdc * (P + (N + S - 2*C)*ry1 + (E + W - 2*C)*rx1 + (TEMP_AMB - C)*rz1)
// where C, N, S, E, W are temperatures, P the power of the centre cell,
// sdc, rx1, ry1, rz1 run-time coefficients and TEMP_AMB a compile-time
// constant (the ambient temperature, 80.0 by default).  Operations are
// evaluated in the order of the C expression above, each rounded to single
// precision. The expression has 15 operations; 2*C appears twice and is
// computed once, leaving 5 multiplies and 9 additions/subtractions.  When fwd
// is set the centre temperature passes through unchanged (forwarding PE).
//
// Timing: an 8-stage pipeline that advances on en and holds otherwise:
//   1: N+S, E+W, 2*C, TEMP_AMB-C      2: (..)-2C twice, (TEMP_AMB-C)*rz1
//   3: *ry1, *rx1                      4: P + ..       5: + ..*rx1
//   6: + ..*rz1                        7: sdc * ..     8: C + ..
// The staging is this design's choice; the expression is the benchmark's.
module hotspot2d_lane
  import stencil_pkg::*;
#(
  parameter fp32_t       TEMP_AMB = 32'h42A0_0000,  // 80.0
  parameter int unsigned LATENCY  = 8               // fixed by the structure below
) (
  input  logic     clk,
  input  logic     en,
  input  hs_coef_t coef,
  input  logic     fwd,
  input  fp32_t    c, w, e, s, n, p,
  output fp32_t    y
);
  localparam fp32_t TWO = 32'h4000_0000;

  // stage 1
  fp32_t ns_d, ew_d, c2_d, ta_d;
  fp32_t ns_q, ew_q, c2_q, ta_q, p1_q, c1_q; logic f1_q;
  // stage 2
  fp32_t a_d, b_d, z_d;
  fp32_t a_q, b_q, z_q, p2_q, c2c_q;         logic f2_q;
  // stage 3
  fp32_t ay_d, bx_d;
  fp32_t ay_q, bx_q, z3_q, p3_q, c3_q;       logic f3_q;
  // stage 4..8
  fp32_t t4_d, t5_d, t6_d, t7_d, t8_d;
  fp32_t t4_q, bx4_q, z4_q, c4_q;            logic f4_q;
  fp32_t t5_q, z5_q, c5_q;                   logic f5_q;
  fp32_t t6_q, c6_q;                         logic f6_q;
  fp32_t t7_q, c7_q;                         logic f7_q;
  fp32_t y_q;

  fp32_add u_ns (.a(n), .b(s), .y(ns_d));
  fp32_add u_ew (.a(e), .b(w), .y(ew_d));
  fp32_mul u_c2 (.a(TWO), .b(c), .y(c2_d));
  fp32_add u_ta (.a(TEMP_AMB), .b({~c[31], c[30:0]}), .y(ta_d));

  fp32_add u_a  (.a(ns_q), .b({~c2_q[31], c2_q[30:0]}), .y(a_d));
  fp32_add u_b  (.a(ew_q), .b({~c2_q[31], c2_q[30:0]}), .y(b_d));
  fp32_mul u_z  (.a(ta_q), .b(coef.rz1), .y(z_d));

  fp32_mul u_ay (.a(a_q), .b(coef.ry1), .y(ay_d));
  fp32_mul u_bx (.a(b_q), .b(coef.rx1), .y(bx_d));

  fp32_add u_t4 (.a(p3_q), .b(ay_q),  .y(t4_d));
  fp32_add u_t5 (.a(t4_q), .b(bx4_q), .y(t5_d));
  fp32_add u_t6 (.a(t5_q), .b(z5_q),  .y(t6_d));
  fp32_mul u_t7 (.a(coef.sdc), .b(t6_q), .y(t7_d));
  fp32_add u_t8 (.a(c7_q), .b(t7_q),  .y(t8_d));

  always_ff @(posedge clk) begin
    if (en) begin
      ns_q <= ns_d; ew_q <= ew_d; c2_q <= c2_d; ta_q <= ta_d; p1_q <= p; c1_q <= c; f1_q <= fwd;
      a_q <= a_d; b_q <= b_d; z_q <= z_d; p2_q <= p1_q; c2c_q <= c1_q; f2_q <= f1_q;
      ay_q <= ay_d; bx_q <= bx_d; z3_q <= z_q; p3_q <= p2_q; c3_q <= c2c_q; f3_q <= f2_q;
      t4_q <= t4_d; bx4_q <= bx_q; z4_q <= z3_q; c4_q <= c3_q; f4_q <= f3_q;
      t5_q <= t5_d; z5_q <= z4_q; c5_q <= c4_q; f5_q <= f4_q;
      t6_q <= t6_d; c6_q <= c5_q; f6_q <= f5_q;
      t7_q <= t7_d; c7_q <= c6_q; f7_q <= f6_q;
      y_q  <= f7_q ? c7_q : t8_d;
    end
  end

  assign y = y_q;
endmodule
