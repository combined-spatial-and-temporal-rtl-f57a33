// tb_stencil_accel_full: one complete pass of the accelerator with every
// parameter at its default (bsize_x 4096, par_vec 8, par_time 36): a
// 100 x 6 grid is advanced 36 time steps in a single pass through all 36
// PEs, and compared cell by cell with the scalar reference.  The memory
// stalls 20% of the time on both ports.
module tb_stencil_accel_full;
  import stencil_pkg::*;
  import fp_ref_pkg::*;
  import stencil_ref_pkg::*;

  localparam int BX = 4096, PV = 8, PT = 36;
  localparam int DX = 100, DY = 6;
  localparam int PAD = PT % 8;
  localparam int BUF_A = PAD, BUF_B = 4096 + PAD;
  localparam int CELLS = 8192;

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

  stencil_accel dut (.*);
  ddr_model #(.PAR_VEC(PV), .CELLS(CELLS)) u_mem (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp32_t g[], r[];
    int cyc;
    rst_n = 0; start = 0; cfg = '0;
    g = new[DX * DY];
    foreach (g[i]) g[i] = rand_fp(120, 130) & 32'h7FFF_FFFF;
    foreach (g[i]) u_mem.mem[BUF_A + i] = g[i];
    for (int s = 0; s < PT; s++) begin
      diff2d_step(g, r, DX, DY, diff2d_coef());
      g = r;
    end
    u_mem.stall_pct = 20;
    repeat (3) @(posedge clk);
    rst_n = 1;
    cfg.dim_x    = DX;
    cfg.dim_y    = DY;
    cfg.num_vecs = num_vecs(BX, PV, PT, DX, DY);
    cfg.src_base = BUF_A;
    cfg.dst_base = BUF_B;
    cfg.active   = PT;
    cfg.coef     = diff2d_coef();
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (busy) begin @(negedge clk); cyc++; end
    $display("pass of %0d vectors took %0d cycles", cfg.num_vecs, cyc);
    for (int i = 0; i < DX * DY; i++) begin
      checks++;
      if (u_mem.mem[BUF_B + i] !== g[i]) begin
        failures++;
        if (failures < 10)
          $display("RESULT MISMATCH cell (%0d,%0d): %h want %h",
                   i % DX, i / DX, u_mem.mem[BUF_B + i], g[i]);
      end
    end
    checks++;
    if (u_mem.bad_addr != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
