// tb_fp32_add: self-checking test of the single-precision adder.
// Random operands with close and distant exponents (to exercise alignment,
// carry-out and massive cancellation) plus special cases are compared bit
// for bit with the double-precision reference in fp_ref_pkg.
module tb_fp32_add;
  import fp_ref_pkg::*;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp32_add dut (.a(a), .b(b), .y(y));

  task automatic check(input logic [31:0] ta, input logic [31:0] tb_, input logic [31:0] want);
    a = ta; b = tb_;
    #1;
    checks++;
    if (y !== want) begin
      failures++;
      if (failures < 10) $display("ADD MISMATCH %h + %h = %h, want %h", ta, tb_, y, want);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(32'h3F80_0000, 32'h3F80_0000, 32'h4000_0000);  // 1+1
    check(32'h3F80_0000, 32'hBF80_0000, 32'h0000_0000);  // 1-1 = +0
    check(32'h4040_0000, 32'hBF80_0000, 32'h4000_0000);  // 3-1
    check(32'h0000_0000, 32'h8000_0000, 32'h0000_0000);  // 0 + -0
    check(32'h8000_0000, 32'h8000_0000, 32'h8000_0000);  // -0 + -0
    check(32'h7F80_0000, 32'hFF80_0000, 32'h7FC0_0000);  // inf-inf
    check(32'h7F80_0000, 32'h3F80_0000, 32'h7F80_0000);  // inf+1
    check(32'h3F80_0000, 32'h3380_0000, 32'h3F80_0000);  // 1 + 2^-24: tie to even
    check(32'h3F80_0001, 32'h3380_0000, 32'h3F80_0002);  // tie rounds up to even
    for (int i = 0; i < 20000; i++) begin
      logic [31:0] ra, rb;
      int          e;
      e  = 100 + int'($urandom % 40);
      ra = rand_fp(e, e);
      rb = rand_fp(e - int'($urandom % 30), e);
      if ($urandom % 2) check(ra, rb, fadd(ra, rb));
      else              check(rb, ra, fadd(rb, ra));
    end
    for (int i = 0; i < 5000; i++) begin
      logic [31:0] ra, rb;
      ra = rand_fp(80, 170);
      rb = {ra[31] ^ ($urandom % 2 == 0), ra[30:8], 8'($urandom)};  // near cancellation
      check(ra, rb, fadd(ra, rb));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
