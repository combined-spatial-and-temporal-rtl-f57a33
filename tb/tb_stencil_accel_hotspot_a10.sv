// tb_stencil_accel_hotspot_a10: one complete Hotspot 2D pass at a published
// Arria 10 size: bsize_x 4096, par_vec 8, par_time 16 (the other parameters
// at their defaults).  A 100 x 6 temperature grid and its power grid are
// advanced 16 time steps in a single pass through all 16 PEs and compared
// cell by cell with the scalar reference.  Temperatures and power sit in
// two separate memories, each stalling 20% of the time; the testbench checks
// that both did stall.  With those stalls the pass time is not fixed, so it
// is printed, not checked (the reduced-size testbenches check it).
module tb_stencil_accel_hotspot_a10;
  import stencil_pkg::*;
  import fp_ref_pkg::*;
  import stencil_ref_pkg::*;

  localparam int BX = 4096, PV = 8, PT = 16;
  localparam int DX = 100, DY = 6;
  localparam int PAD = PT % 8;
  localparam int BUF_A = PAD, BUF_B = 4096 + PAD, BUF_P = PAD;
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
  logic pw_wr_ready;
  int checks = 0, failures = 0;

  stencil_accel #(.PAR_TIME(PT), .STENCIL(HOTSPOT_2D)) dut (.*);
  ddr_model #(.PAR_VEC(PV), .CELLS(CELLS)) u_mem (.*);
  ddr_model #(.PAR_VEC(PV), .CELLS(CELLS)) u_pmem (
    .clk, .rd_req_valid(pw_req_valid), .rd_req_ready(pw_req_ready), .rd_req_addr(pw_req_addr),
    .rd_req_mask(pw_req_mask), .rd_resp_valid(pw_resp_valid), .rd_resp_data(pw_resp_data),
    .wr_valid(1'b0), .wr_ready(pw_wr_ready), .wr_addr('0), .wr_mask('0), .wr_data('0));

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp32_t g[], pw[], r[];
    int cyc;
    rst_n = 0; start = 0; cfg = '0;
    g  = new[DX * DY];
    pw = new[DX * DY];
    foreach (g[i])  g[i]  = rand_fp(120, 130) & 32'h7FFF_FFFF;
    foreach (pw[i]) pw[i] = rand_fp(118, 124) & 32'h7FFF_FFFF;
    foreach (g[i])  u_mem.mem[BUF_A + i] = g[i];
    foreach (pw[i]) u_pmem.mem[BUF_P + i] = pw[i];
    for (int s = 0; s < PT; s++) begin
      hotspot2d_step(g, pw, r, DX, DY, hotspot2d_coef(), 32'h42A0_0000);
      g = r;
    end
    u_mem.stall_pct  = 20;
    u_pmem.stall_pct = 20;
    repeat (3) @(posedge clk);
    rst_n = 1;
    cfg.dim_x    = DX;
    cfg.dim_y    = DY;
    cfg.num_vecs = num_vecs(BX, PV, PT, DX, DY);
    cfg.src_base = BUF_A;
    cfg.dst_base = BUF_B;
    cfg.pw_base  = BUF_P;
    cfg.active   = PT;
    cfg.hs       = hotspot2d_coef();
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
    if (u_mem.bad_addr != 0 || u_pmem.bad_addr != 0) failures++;
    checks++;
    if (u_mem.rd_stalls == 0 || u_pmem.rd_stalls == 0) begin
      failures++;
      $display("memory stalls never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
