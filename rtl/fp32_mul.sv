// fp32_mul: combinational IEEE-754 single-precision multiplier.
//
// Computes a*b rounded to nearest, ties to even.  Subnormal inputs and
// results are flushed to signed zero, as FPGA floating-point cores commonly
// do; infinities and NaNs propagate (a NaN result is the canonical quiet
// NaN).  The 24x24-bit significand product is normalised by at most one
// bit, then rounded with a guard bit and a sticky bit.  Purely
// combinational: callers place pipeline registers around it.
module fp32_mul
  import stencil_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);
  logic        sa, sb, sy;
  logic [7:0]  ea, eb;
  logic [23:0] ma, mb;
  logic [47:0] prod;
  logic [9:0]  e_sum;    // signed biased exponent with headroom
  logic [9:0]  e_norm;
  logic [23:0] mant;
  logic        guard, sticky, rnd;
  logic [24:0] mant_r;
  logic [9:0]  e_fin;
  logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;

  always_comb begin
    sa = a[31]; sb = b[31]; sy = sa ^ sb;
    ea = a[30:23]; eb = b[30:23];
    a_zero = (ea == 8'd0);
    b_zero = (eb == 8'd0);
    a_inf  = (ea == 8'hFF) && (a[22:0] == '0);
    b_inf  = (eb == 8'hFF) && (b[22:0] == '0);
    a_nan  = (ea == 8'hFF) && (a[22:0] != '0);
    b_nan  = (eb == 8'hFF) && (b[22:0] != '0);
    ma = {1'b1, a[22:0]};
    mb = {1'b1, b[22:0]};
    prod  = ma * mb;
    e_sum = {2'b00, ea} + {2'b00, eb} - 10'd127;
    if (prod[47]) begin
      mant   = prod[47:24];
      guard  = prod[23];
      sticky = |prod[22:0];
      e_norm = e_sum + 10'd1;
    end else begin
      mant   = prod[46:23];
      guard  = prod[22];
      sticky = |prod[21:0];
      e_norm = e_sum;
    end
    rnd    = guard & (sticky | mant[0]);
    mant_r = {1'b0, mant} + {24'd0, rnd};
    e_fin  = mant_r[24] ? e_norm + 10'd1 : e_norm;

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero))
      y = 32'h7FC0_0000;
    else if (a_inf || b_inf)
      y = {sy, 8'hFF, 23'd0};
    else if (a_zero || b_zero)
      y = {sy, 31'd0};
    else if (e_fin[9] || e_fin == 10'd0)         // underflow: flush to zero
      y = {sy, 31'd0};
    else if (e_fin >= 10'd255)                   // overflow
      y = {sy, 8'hFF, 23'd0};
    else
      y = {sy, e_fin[7:0], mant_r[24] ? mant_r[23:1] : mant_r[22:0]};
  end
endmodule
