// tb_fp32_mul: self-checking test of the single-precision multiplier.
// Random operands over a wide exponent range (including products that
// overflow and underflow), plus hand-picked special cases, are compared
// bit for bit with the double-precision reference in fp_ref_pkg.
module tb_fp32_mul;
  import fp_ref_pkg::*;
  logic [31:0] a, b, y, exp_y;
  int checks = 0, failures = 0;

  fp32_mul dut (.a(a), .b(b), .y(y));

  task automatic check(input logic [31:0] ta, input logic [31:0] tb_, input logic [31:0] want);
    a = ta; b = tb_;
    #1;
    checks++;
    if (y !== want) begin
      failures++;
      if (failures < 10) $display("MUL MISMATCH %h * %h = %h, want %h", ta, tb_, y, want);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // special cases
    check(32'h3F80_0000, 32'h4000_0000, 32'h4000_0000);  // 1*2
    check(32'hBFC0_0000, 32'h3FC0_0000, 32'hC010_0000);  // -1.5*1.5 = -2.25
    check(32'h0000_0000, 32'h4000_0000, 32'h0000_0000);  // 0*2
    check(32'h8000_0000, 32'h4000_0000, 32'h8000_0000);  // -0*2
    check(32'h7F80_0000, 32'h4000_0000, 32'h7F80_0000);  // inf*2
    check(32'h7F80_0000, 32'h0000_0000, 32'h7FC0_0000);  // inf*0
    check(32'h7F00_0000, 32'h7F00_0000, 32'h7F80_0000);  // overflow
    check(32'h0080_0000, 32'h3F00_0000, 32'h0000_0000);  // underflow flushes
    // random, normal range
    for (int i = 0; i < 20000; i++) begin
      logic [31:0] ra, rb;
      ra = rand_fp(60, 190);
      rb = rand_fp(60, 190);
      check(ra, rb, fmul(ra, rb));
    end
    // random, full range (overflow / underflow paths)
    for (int i = 0; i < 5000; i++) begin
      logic [31:0] ra, rb;
      ra = rand_fp(1, 254);
      rb = rand_fp(1, 254);
      check(ra, rb, fmul(ra, rb));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
