// tb_stencil_shift_reg: pushes a stream of numbered cells (each cell's
// value is its position in the stream) with random gaps, and checks every
// tap against the cell that sits bsize_x cells before/after and one cell
// left/right of the centre, computed from the stream position.
module tb_stencil_shift_reg;
  import stencil_pkg::*;
  localparam int BX = 32, PV = 4, W = BX / PV;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, push;
  fp32_t [PV-1:0] din, north, south, center, west, east;
  int checks = 0, failures = 0;

  stencil_shift_reg #(.BSIZE_X(BX), .PAR_VEC(PV)) dut (.*);

  task automatic chk(input fp32_t got, input int want, input string what);
    checks++;
    if (got !== fp32_t'(want)) begin
      failures++;
      if (failures < 10) $display("SR MISMATCH %s got %0d want %0d", what, got, want);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; push = 0; din = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 20 * W; k++) begin
      @(negedge clk);
      for (int l = 0; l < PV; l++) din[l] = fp32_t'(k * PV + l + 1);
      while ($urandom % 4 == 0) begin push = 0; @(negedge clk); end
      push = 1;
      #1;
      if (k >= 2 * W) begin
        for (int l = 0; l < PV; l++) begin
          int cpos;
          cpos = (k - W) * PV + l + 1;
          chk(south[l],  k * PV + l + 1,      "south");
          chk(center[l], cpos,                "center");
          chk(north[l],  cpos - BX,           "north");
          chk(west[l],   cpos - 1,            "west");
          chk(east[l],   cpos + 1,            "east");
        end
      end
      @(posedge clk);
    end
    @(negedge clk); push = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
