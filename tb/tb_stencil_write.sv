// tb_stencil_write: the write kernel (bsize_x 16, par_vec 4, par_time 2) on
// a 20 x 5 grid.  The stream it receives is tagged: each lane carries
// {block, row, block-local x}.  After the pass every grid cell must hold the
// tag of the one block whose compute block covers it (block gx / csize,
// local x gx % csize + halo), and no cell outside the grid may be written.
// The memory stalls randomly and the producer inserts gaps.
module tb_stencil_write;
  import stencil_pkg::*;
  localparam int BX = 16, PV = 4, PT = 2, W = BX / PV;
  localparam int DX = 20, DY = 5, HALO = PT, CS = BX - 2 * HALO;
  localparam int NB = (DX + CS - 1) / CS, NV = NB * W * DY, BASE = 40;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, start, busy, in_valid, in_ready;
  pass_cfg_t cfg;
  logic rd_req_valid, rd_req_ready, rd_resp_valid, wr_valid, wr_ready;
  logic [AW-1:0] rd_req_addr, wr_addr;
  logic [PV-1:0] rd_req_mask, wr_mask;
  fp32_t [PV-1:0] rd_resp_data, wr_data, in_data;
  int checks = 0, failures = 0;

  assign rd_req_valid = 1'b0;
  assign rd_req_addr = '0;
  assign rd_req_mask = '0;

  stencil_write #(.BSIZE_X(BX), .PAR_VEC(PV), .PAR_TIME(PT)) dut (.*);
  ddr_model #(.PAR_VEC(PV), .CELLS(256)) u_mem (.*);

  function automatic fp32_t tag(int b, int r, int lx);
    return {8'(b + 1), 12'(r), 12'(lx)};
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; start = 0; in_valid = 0; in_data = '0; cfg = '0;
    for (int i = 0; i < 256; i++) u_mem.mem[i] = 32'hDEAD_BEEF;
    u_mem.stall_pct = 30;
    repeat (3) @(posedge clk);
    rst_n = 1;
    cfg.dim_x = DX; cfg.dim_y = DY; cfg.num_vecs = NV; cfg.dst_base = BASE;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int k = 0; k < NV; k++) begin
      int b, r, v;
      b = k / (W * DY); r = (k / W) % DY; v = k % W;
      @(negedge clk);
      while ($urandom % 4 == 0) begin in_valid = 0; @(negedge clk); end
      in_valid = 1;
      for (int l = 0; l < PV; l++) in_data[l] = tag(b, r, v * PV + l);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    @(negedge clk); in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (busy) failures++;
    for (int a = 0; a < 256; a++) begin
      fp32_t want;
      int rel;
      rel = a - BASE;
      if (rel >= 0 && rel < DX * DY) begin
        int gx, r;
        gx = rel % DX; r = rel / DX;
        want = tag(gx / CS, r, gx % CS + HALO);
      end else want = 32'hDEAD_BEEF;
      checks++;
      if (u_mem.mem[a] !== want) begin
        failures++;
        if (failures < 10) $display("WRITE MISMATCH addr %0d got %h want %h", a, u_mem.mem[a], want);
      end
    end
    checks++;
    if (u_mem.wr_stalls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
