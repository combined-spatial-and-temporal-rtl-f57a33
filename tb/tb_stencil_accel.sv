// tb_stencil_accel: end-to-end test of the accelerator at reduced size
// (bsize_x 32, par_vec 4, par_time 4).  A 50 x 9 grid of random values is
// placed in a behavioural DDR model, and the host loop is played: passes of
// par_time steps with the source and destination buffers swapped between
// passes, the last pass with fewer active PEs.  The grid after all steps is
// compared cell by cell with the scalar reference, and the cells outside
// the grid in the destination buffer must stay untouched.
//
// Mechanisms that must occur at least once (counted, failure if never):
// several spatial blocks per row, read lanes masked outside the grid,
// vectors dropped entirely by the write kernel (halo only), partial write
// masks, memory stalls on reads and writes, back-pressure inside the PE
// chain, drain iterations, forwarding PEs, boundary fall-back.  One pass
// runs with a stall-free memory and must then take at most
// num_vecs + par_time*(W+8) + 40 cycles (one vector per cycle).
module tb_stencil_accel;
  import stencil_pkg::*;
  import fp_ref_pkg::*;
  import stencil_ref_pkg::*;

  localparam int BX = 32, PV = 4, PT = 4, W = BX / PV;
  localparam int DX = 50, DY = 9;
  localparam int PAD = PT % 8;            // buffer padding of the paper
  localparam int BUF_A = PAD, BUF_B = 1024 + PAD;
  localparam int CELLS = 2048;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, start, busy;
  pass_cfg_t cfg;
  logic rd_req_valid, rd_req_ready, rd_resp_valid, wr_valid, wr_ready;
  logic [AW-1:0] rd_req_addr, wr_addr;
  logic [PV-1:0] rd_req_mask, wr_mask;
  fp32_t [PV-1:0] rd_resp_data, wr_data;
  logic pw_req_valid, pw_req_ready, pw_resp_valid;
  logic [AW-1:0] pw_req_addr;
  logic [PV-1:0] pw_req_mask;
  fp32_t [PV-1:0] pw_resp_data;
  assign pw_req_ready = 1'b0;
  assign pw_resp_valid = 1'b0;
  assign pw_resp_data = '0;

  int checks = 0, failures = 0;

  stencil_accel #(.BSIZE_X(BX), .PAR_VEC(PV), .PAR_TIME(PT)) dut (.*);
  ddr_model #(.PAR_VEC(PV), .CELLS(CELLS)) u_mem (.*);

  // ---- mechanism counters ----
  int n_multiblock = 0, n_rd_masked = 0, n_wr_skipped = 0, n_wr_partial = 0;
  int n_chain_bp = 0, n_drain = 0, n_fwd = 0, n_boundary = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_write.step && dut.u_write.blk != 0) n_multiblock++;
    if (rd_req_valid && rd_req_ready && rd_req_mask != '1) n_rd_masked++;
    if (dut.u_write.step && !dut.u_write.any) n_wr_skipped++;
    if (wr_valid && wr_ready && wr_mask != '1) n_wr_partial++;
    if (dut.g_pe[1].u_pe.in_valid && !dut.g_pe[1].u_pe.in_ready && dut.g_pe[1].u_pe.busy)
      n_chain_bp++;
    if (dut.g_pe[PT-1].u_pe.out_valid && !dut.g_pe[PT-1].u_pe.out_ready)
      n_chain_bp++;
    if (dut.g_pe[0].u_pe.iter_go && !dut.g_pe[0].u_pe.have_in) n_drain++;
    if (dut.g_pe[PT-1].u_pe.produce && dut.g_pe[PT-1].u_pe.fwd) n_fwd++;
    if (dut.g_pe[0].u_pe.produce && dut.g_pe[0].u_pe.gx0 == 0) n_boundary++;
  end

  task automatic need(input int n, input string what);
    checks++;
    if (n == 0) begin
      failures++;
      $display("MECHANISM NEVER SEEN: %s", what);
    end else $display("  %-28s %0d", what, n);
  endtask

  task automatic run_pass(input int src, input int dst, input int active, output int cycles);
    cfg.dim_x    = DX;
    cfg.dim_y    = DY;
    cfg.num_vecs = num_vecs(BX, PV, PT, DX, DY);
    cfg.src_base = src;
    cfg.dst_base = dst;
    cfg.active   = active;
    cfg.coef     = diff2d_coef();
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cycles = 1;
    while (busy) begin @(negedge clk); cycles++; end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp32_t g[], r[];
    int src, dst, left, cyc;
    int iters[3] = '{6, 4, 3};       // three runs: 4+2 steps, 4 steps, 3 steps
    rst_n = 0; start = 0; cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (iters[t]) begin
      // fresh random grid in buffer A, marker values in B
      g = new[DX * DY];
      foreach (g[i]) g[i] = rand_fp(120, 130) & 32'h7FFF_FFFF;
      for (int i = 0; i < CELLS; i++) u_mem.mem[i] = 32'hDEAD_BEEF;
      foreach (g[i]) u_mem.mem[BUF_A + i] = g[i];
      for (int s = 0; s < iters[t]; s++) begin
        diff2d_step(g, r, DX, DY, diff2d_coef());
        g = r;
      end
      u_mem.stall_pct = (t == 1) ? 0 : 30;
      src = BUF_A; dst = BUF_B; left = iters[t];
      while (left > 0) begin
        int act;
        act = (left >= PT) ? PT : left;
        run_pass(src, dst, act, cyc);
        $display("pass: active=%0d cycles=%0d stall_pct=%0d", act, cyc, u_mem.stall_pct);
        if (u_mem.stall_pct == 0) begin
          checks++;
          if (cyc > num_vecs(BX, PV, PT, DX, DY) + PT * (W + 8) + 40) begin
            failures++;
            $display("pass too slow: %0d cycles", cyc);
          end
        end
        left -= act;
        {src, dst} = {dst, src};
      end
      // result is in src now
      for (int i = 0; i < DX * DY; i++) begin
        checks++;
        if (u_mem.mem[src + i] !== g[i]) begin
          failures++;
          if (failures < 10)
            $display("RESULT MISMATCH run %0d cell (%0d,%0d): %h want %h",
                     t, i % DX, i / DX, u_mem.mem[src + i], g[i]);
        end
      end
      // nothing written outside the destination grid
      checks++;
      if (u_mem.mem[dst - 1] !== 32'hDEAD_BEEF && u_mem.mem[src - 1] !== 32'hDEAD_BEEF) failures++;
      checks++;
      if (u_mem.mem[src + DX * DY] !== 32'hDEAD_BEEF) failures++;
    end
    checks++;
    if (u_mem.bad_addr != 0) failures++;
    need(n_multiblock, "several blocks per row");
    need(n_rd_masked,  "out-of-grid read lanes");
    need(n_wr_skipped, "halo-only vectors dropped");
    need(n_wr_partial, "partial write masks");
    need(u_mem.rd_stalls, "read stalls");
    need(u_mem.wr_stalls, "write stalls");
    need(n_chain_bp,   "back-pressure in PE chain");
    need(n_drain,      "PE drain iterations");
    need(n_fwd,        "forwarding PE outputs");
    need(n_boundary,   "west boundary fall-back");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
