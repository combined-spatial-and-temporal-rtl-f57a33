// tb_diffusion2d_lane: checks the pipelined Diffusion 2D lane.
// Random cells and coefficients are fed with a random enable pattern
// (stalls); a software model of the pipeline (a queue advanced only on
// enabled cycles) predicts each output from fp_ref_pkg arithmetic in the
// same summation order.  Also checks the forwarding mode and that the
// result appears exactly LATENCY enabled cycles after the inputs.
module tb_diffusion2d_lane;
  import stencil_pkg::*;
  import fp_ref_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  logic         en;
  diff2d_coef_t coef;
  logic         fwd;
  fp32_t        c, w, e, s, n, y;
  int checks = 0, failures = 0, fwd_seen = 0, stalls = 0;
  fp32_t expq[$];   // expected result per enabled cycle, in order

  diffusion2d_lane dut (.*);

  function automatic fp32_t model(diff2d_coef_t k, logic f, fp32_t vc, vw, ve, vs, vn);
    fp32_t acc;
    if (f) return vc;
    acc = fadd(fmul(k.cc, vc), fmul(k.cw, vw));
    acc = fadd(acc, fmul(k.ce, ve));
    acc = fadd(acc, fmul(k.cs, vs));
    acc = fadd(acc, fmul(k.cn, vn));
    return acc;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int enabled = 0;
    coef = '{cc: rand_fp(120, 126), cw: rand_fp(120, 126), ce: rand_fp(120, 126),
             cs: rand_fp(120, 126), cn: rand_fp(120, 126)};
    en = 0; fwd = 0; c = 0; w = 0; e = 0; s = 0; n = 0;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      en  = ($urandom % 4) != 0;
      fwd = ($urandom % 8) == 0;
      c = rand_fp(110, 140); w = rand_fp(110, 140); e = rand_fp(110, 140);
      s = rand_fp(110, 140); n = rand_fp(110, 140);
      if (!en) stalls++;
      if (en) begin
        expq.push_back(model(coef, fwd, c, w, e, s, n));
        if (fwd) fwd_seen++;
        enabled++;
      end
      @(posedge clk);
      #1;
      // after LATENCY enabled edges the oldest entry must be on y
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
