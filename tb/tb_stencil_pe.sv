// tb_stencil_pe: one PE (bsize_x 16, par_vec 4) on a 20 x 5 grid split into
// two overlapped blocks.  The testbench builds the block stream itself from
// nested loops (block, row, vector), with random garbage in out-of-grid
// lanes, and feeds it with random valid gaps while the consumer applies
// random back-pressure.  Checked against the scalar reference: every output
// lane whose cell is in the grid and at least one column inside its block
// (the region a single time step can compute correctly).  A second run with
// active = 0 checks forwarding (output = input), and a third run with no
// gaps checks that num_vecs outputs take at most num_vecs + W + 10 cycles.
module tb_stencil_pe;
  import stencil_pkg::*;
  import fp_ref_pkg::*;
  import stencil_ref_pkg::*;
  localparam int BX = 16, PV = 4, PT = 2, W = BX / PV;
  localparam int DX = 20, DY = 5, HALO = PT, CS = BX - 2 * HALO;
  localparam int NB = (DX + CS - 1) / CS, NV = NB * W * DY;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, start, in_valid, in_ready, out_valid, out_ready, busy;
  pass_cfg_t cfg;
  fp32_t [PV-1:0] in_data, out_data;
  int checks = 0, failures = 0;

  stencil_pe #(.BSIZE_X(BX), .PAR_VEC(PV), .PAR_TIME(PT), .PE_ID(0)) dut (.*);

  fp32_t grid[], ref1[];
  fp32_t [PV-1:0] stream[NV];
  int gaps = 1;   // 1: random gaps and back-pressure

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // producer
  task automatic produce();
    for (int k = 0; k < NV; k++) begin
      @(negedge clk);
      while (gaps && $urandom % 3 == 0) begin in_valid = 0; @(negedge clk); end
      in_valid = 1; in_data = stream[k];
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    @(negedge clk); in_valid = 0;
  endtask

  // consumer: returns number of cycles from start
  task automatic consume(input bit fwd_mode);
    int k;
    k = 0;
    while (k < NV) begin
      @(negedge clk);
      out_ready = !gaps || ($urandom % 4 != 0);
      @(posedge clk);
      if (out_valid && out_ready) begin
        int b, r, v;
        b = k / (W * DY); r = (k / W) % DY; v = k % W;
        for (int l = 0; l < PV; l++) begin
          int lx, gx;
          lx = v * PV + l;
          gx = b * CS - HALO + lx;
          if (fwd_mode) begin
            checks++;
            if (out_data[l] !== stream[k][l]) failures++;
          end else if (gx >= 0 && gx < DX && lx >= 1 && lx <= BX - 2) begin
            checks++;
            if (out_data[l] !== ref1[r * DX + gx]) begin
              failures++;
              if (failures < 10) $display("PE MISMATCH x=%0d y=%0d got %h want %h",
                                          gx, r, out_data[l], ref1[r * DX + gx]);
            end
          end
        end
        k++;
      end
    end
  endtask

  task automatic run(input int active, input bit fwd_mode, output int cycles);
    int t0;
    cfg = '0;
    cfg.dim_x = DX; cfg.dim_y = DY; cfg.num_vecs = NV; cfg.active = active;
    cfg.coef = diff2d_coef();
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    t0 = $time;
    fork
      produce();
      consume(fwd_mode);
    join
    cycles = ($time - t0) / 10;
    @(posedge clk); #1;
    checks++;
    if (busy || out_valid) failures++;
  endtask

  initial begin
    int cyc;
    rst_n = 0; start = 0; in_valid = 0; in_data = '0; out_ready = 0; cfg = '0;
    grid = new[DX * DY];
    foreach (grid[i]) grid[i] = rand_fp(120, 130);
    diff2d_step(grid, ref1, DX, DY, diff2d_coef());
    for (int k = 0; k < NV; k++) begin
      int b, r, v;
      b = k / (W * DY); r = (k / W) % DY; v = k % W;
      for (int l = 0; l < PV; l++) begin
        int gx;
        gx = b * CS - HALO + v * PV + l;
        stream[k][l] = (gx >= 0 && gx < DX) ? grid[r * DX + gx] : rand_fp(100, 150);
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(1, 0, cyc);               // compute
    run(0, 1, cyc);               // forward
    gaps = 0;
    run(1, 0, cyc);               // full rate
    $display("full-rate pass: %0d vectors in %0d cycles", NV, cyc);
    checks++;
    if (cyc > NV + W + 10) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
