// tb_block_walker: steps the walker through a whole block stream with a
// random step pattern and compares every position with nested loops
// (block, row, vector) evaluated independently in the testbench, including
// the host-side trip count bnum_x*(bsize_x/par_vec)*dim_y.
module tb_block_walker;
  import stencil_pkg::*;
  localparam int BX = 32, PV = 4, PT = 3;
  localparam int HALO = PT, CS = BX - 2 * HALO;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, start, step;
  logic [AW-1:0] dim_x, dim_y, num_vecs, lx0, y, row_off, blk, index;
  logic signed [AW-1:0] gx0;
  logic done;
  int checks = 0, failures = 0;

  block_walker #(.BSIZE_X(BX), .PAR_VEC(PV), .PAR_TIME(PT)) dut (.*);

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("WALKER MISMATCH %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; start = 0; step = 0;
    dim_x = 61; dim_y = 5;
    num_vecs = ((61 + CS - 1) / CS) * (BX / PV) * 5;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int b = 0; b < (61 + CS - 1) / CS; b++)
      for (int r = 0; r < 5; r++)
        for (int v = 0; v < BX / PV; v++) begin
          chk(!done, "done early");
          chk(lx0 == AW'(v * PV), $sformatf("lx0 %0d vs %0d", lx0, v * PV));
          chk(gx0 == AW'(b * CS - HALO + v * PV), $sformatf("gx0 %0d", gx0));
          chk(y == AW'(r) && row_off == AW'(r * 61) && blk == AW'(b), "y/row/blk");
          // random stalls
          while ($urandom % 3 == 0) @(negedge clk);
          step = 1; @(negedge clk); step = 0;
        end
    chk(done, "done at end");
    chk(index == num_vecs, "index at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
