// fp32_add: combinational IEEE-754 single-precision adder.
//
// Computes a+b rounded to nearest, ties to even.  Subnormal inputs and
// results are flushed to signed zero; infinities and NaNs propagate
// (inf-inf gives the canonical quiet NaN).  The operand of smaller
// magnitude is aligned into a 27-bit significand (hidden bit, 23 fraction
// bits, guard, round, sticky), the two are added or subtracted, the sum is
// normalised with a leading-zero count and then rounded.  An exact
// cancellation gives +0.  Purely combinational.
module fp32_add
  import stencil_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);
  fp32_t       hi, lo;
  logic [7:0]  eb, es;
  logic [7:0]  d;
  logic [26:0] mb, ms, ms_sh;
  logic        sticky;
  logic [27:0] sum;
  logic [26:0] norm;
  logic [9:0]  e_norm;
  logic [4:0]  lz;
  logic        rnd;
  logic [24:0] mant_r;
  logic [9:0]  e_fin;
  logic        hi_inf, lo_inf, hi_nan, lo_nan, sub;

  always_comb begin
    // Flush subnormal inputs to zero, then order by magnitude.
    fp32_t fa, fb;
    fa = (a[30:23] == 8'd0) ? {a[31], 31'd0} : a;
    fb = (b[30:23] == 8'd0) ? {b[31], 31'd0} : b;
    if (fa[30:0] >= fb[30:0]) begin hi = fa; lo = fb; end
    else                      begin hi = fb; lo = fa; end
    eb = hi[30:23];
    es = lo[30:23];
    hi_inf   = (eb == 8'hFF) && (hi[22:0] == '0);
    hi_nan   = (eb == 8'hFF) && (hi[22:0] != '0);
    lo_inf = (es == 8'hFF) && (lo[22:0] == '0);
    lo_nan = (es == 8'hFF) && (lo[22:0] != '0);
    sub = hi[31] ^ lo[31];

    mb = {1'b1, hi[22:0], 3'b000};
    ms = (es == 8'd0) ? 27'd0 : {1'b1, lo[22:0], 3'b000};
    d  = eb - es;
    if (d >= 8'd27) begin
      ms_sh  = 27'd0;
      sticky = (ms != 27'd0);
    end else begin
      ms_sh  = ms >> d;
      sticky = ((ms_sh << d) != ms);
    end
    ms_sh[0] = ms_sh[0] | sticky;

    sum = sub ? ({1'b0, mb} - {1'b0, ms_sh}) : ({1'b0, mb} + {1'b0, ms_sh});

    lz = 5'd0;
    if (sum[27]) begin
      norm   = sum[27:1];
      norm[0] = sum[1] | sum[0];
      e_norm = {2'b00, eb} + 10'd1;
    end else begin
      for (int i = 26; i >= 0; i--) begin
        if (sum[i]) begin
          lz = 5'(26 - i);
          break;
        end
      end
      norm   = sum[26:0] << lz;
      e_norm = {2'b00, eb} - {5'd0, lz};
    end

    rnd    = norm[2] & (norm[1] | norm[0] | norm[3]);
    mant_r = {1'b0, norm[26:3]} + {24'd0, rnd};
    e_fin  = mant_r[24] ? e_norm + 10'd1 : e_norm;

    if (hi_nan || lo_nan || (hi_inf && lo_inf && sub))
      y = 32'h7FC0_0000;
    else if (hi_inf)
      y = hi;
    else if (eb == 8'd0)                              // both zero
      y = {hi[31] & lo[31], 31'd0};
    else if (sum == 28'd0)                            // exact cancellation
      y = 32'd0;
    else if (e_fin[9] || e_fin == 10'd0)              // underflow: flush to zero
      y = {hi[31], 31'd0};
    else if (e_fin >= 10'd255)
      y = {hi[31], 8'hFF, 23'd0};
    else
      y = {hi[31], e_fin[7:0], mant_r[24] ? mant_r[23:1] : mant_r[22:0]};
  end
endmodule
