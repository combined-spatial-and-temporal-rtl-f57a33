// tb_hotspot2d_lane: checks the pipelined Hotspot 2D lane against the
// scalar reference of stencil_ref_pkg (a 3 x 3 grid whose centre cell has
// the random neighbours, so the reference's own evaluation order is used),
// with random enables (stalls), random coefficients and forwarding, and
// checks that each result appears LATENCY enabled cycles after its inputs.
module tb_hotspot2d_lane;
  import stencil_pkg::*;
  import fp_ref_pkg::*;
  import stencil_ref_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  logic     en, fwd;
  hs_coef_t coef;
  fp32_t    c, w, e, s, n, p, y;
  int checks = 0, failures = 0, fwd_seen = 0, stalls = 0;
  fp32_t expq[$];

  hotspot2d_lane dut (.*);

  function automatic fp32_t model(hs_coef_t k, logic f, fp32_t vc, vw, ve, vs, vn, vp);
    fp32_t g[], pw[], o[];
    if (f) return vc;
    g  = '{0, vn, 0, vw, vc, ve, 0, vs, 0};
    pw = '{0, 0, 0, 0, vp, 0, 0, 0, 0};
    hotspot2d_step(g, pw, o, 3, 3, k, 32'h42A0_0000);
    return o[4];
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int enabled = 0;
    coef = '{sdc: rand_fp(115, 125), rx1: rand_fp(120, 127),
             ry1: rand_fp(120, 127), rz1: rand_fp(115, 125)};
    en = 0; fwd = 0; c = 0; w = 0; e = 0; s = 0; n = 0; p = 0;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      en  = ($urandom % 4) != 0;
      fwd = ($urandom % 8) == 0;
      c = rand_fp(133, 135) & 32'h7FFF_FFFF; w = rand_fp(133, 135) & 32'h7FFF_FFFF;
      e = rand_fp(133, 135) & 32'h7FFF_FFFF; s = rand_fp(133, 135) & 32'h7FFF_FFFF;
      n = rand_fp(133, 135) & 32'h7FFF_FFFF; p = rand_fp(110, 125);
      if (!en) stalls++;
      if (en) begin
        expq.push_back(model(coef, fwd, c, w, e, s, n, p));
        if (fwd) fwd_seen++;
        enabled++;
      end
      @(posedge clk);
      #1;
      if (en && enabled >= dut.LATENCY) begin
        fp32_t want;
        want = expq.pop_front();
        checks++;
        if (y !== want) begin
          failures++;
          if (failures < 10) $display("LANE MISMATCH got %h want %h", y, want);
        end
      end
    end
    checks++;
    if (fwd_seen == 0 || stalls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
