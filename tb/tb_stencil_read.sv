// tb_stencil_read: the read kernel (bsize_x 16, par_vec 4, par_time 2) on a
// 20 x 5 grid stored at cell address 3 of a behavioural memory with random
// stalls and latency.  The output stream, taken with random back-pressure,
// must be exactly the block stream: for vector k of block b, row r, lanes
// inside the grid hold the grid cell at column b*csize - halo + lane
// position, lanes outside hold zero.  Also checks the count and that busy
// drops at the end, and that one request per cycle is possible.
module tb_stencil_read;
  import stencil_pkg::*;
  import fp_ref_pkg::*;
  localparam int BX = 16, PV = 4, PT = 2, W = BX / PV;
  localparam int DX = 20, DY = 5, HALO = PT, CS = BX - 2 * HALO;
  localparam int NB = (DX + CS - 1) / CS, NV = NB * W * DY, BASE = 3;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, start, busy, out_valid, out_ready;
  pass_cfg_t cfg;
  logic rd_req_valid, rd_req_ready, rd_resp_valid, wr_valid, wr_ready;
  logic [AW-1:0] rd_req_addr, wr_addr;
  logic [PV-1:0] rd_req_mask, wr_mask;
  fp32_t [PV-1:0] rd_resp_data, wr_data, out_data;
  logic pw_req_valid, pw_req_ready, pw_resp_valid;
  logic [AW-1:0] pw_req_addr;
  logic [PV-1:0] pw_req_mask;
  fp32_t [PV-1:0] pw_resp_data;
  assign pw_req_ready = 1'b0;
  assign pw_resp_valid = 1'b0;
  assign pw_resp_data = '0;
  int checks = 0, failures = 0, back_to_back = 0;
  logic prev_issue = 0;

  assign wr_valid = 1'b0;
  assign wr_addr = '0;
  assign wr_mask = '0;
  assign wr_data = '0;

  stencil_read #(.BSIZE_X(BX), .PAR_VEC(PV), .PAR_TIME(PT)) dut (.*);
  ddr_model #(.PAR_VEC(PV), .CELLS(256)) u_mem (.*);

  always @(posedge clk) begin
    if (rd_req_valid && rd_req_ready && prev_issue) back_to_back++;
    prev_issue <= rd_req_valid && rd_req_ready;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int k;
    rst_n = 0; start = 0; out_ready = 0; cfg = '0;
    for (int i = 0; i < DX * DY; i++) u_mem.mem[BASE + i] = rand_fp(110, 140);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      u_mem.stall_pct = pass ? 0 : 30;
      cfg.dim_x = DX; cfg.dim_y = DY; cfg.num_vecs = NV; cfg.src_base = BASE;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      k = 0;
      while (k < NV) begin
        @(negedge clk);
        out_ready = pass ? 1'b1 : ($urandom % 3 != 0);
        @(posedge clk);
        if (out_valid && out_ready) begin
          int b, r, v;
          b = k / (W * DY); r = (k / W) % DY; v = k % W;
          for (int l = 0; l < PV; l++) begin
            int gx;
            fp32_t want;
            gx = b * CS - HALO + v * PV + l;
            want = (gx >= 0 && gx < DX) ? u_mem.mem[BASE + r * DX + gx] : '0;
            checks++;
            if (out_data[l] !== want) begin
              failures++;
              if (failures < 10) $display("READ MISMATCH k=%0d lane %0d got %h want %h",
                                          k, l, out_data[l], want);
            end
          end
          k++;
        end
      end
      @(negedge clk); out_ready = 0;
      repeat (20) @(posedge clk);
      checks++;
      if (busy || out_valid || u_mem.bad_addr != 0) failures++;
    end
    checks++;
    if (back_to_back == 0 || u_mem.rd_stalls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
