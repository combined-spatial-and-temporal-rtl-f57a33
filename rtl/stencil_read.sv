// stencil_read: read kernel, streams the overlapped spatial blocks.
//
// Walks the grid in the block order of block_walker and issues one external
// memory read per vector of par_vec consecutive cells.  Block b covers grid
// columns b*csize_x - halo .. b*csize_x - halo + bsize_x - 1, so adjacent
// blocks overlap by 2*halo columns (halo = rad*par_time) and the last PE of
// the chain still has a full compute block of csize_x valid columns.  Lanes
// whose column lies outside the grid are masked off in the request and are
// not read; the memory returns zeros for them.  Rows are not blocked.
//
// Addresses are cell addresses: src_base + y*dim_x + x.  The host chooses
// src_base; padding the buffer start by (par_time mod 8) cells, as the
// paper does to make the first compute block 512-bit aligned, is simply an
// offset in src_base.
//
// Hotspot 2D (STENCIL = HOTSPOT_2D) needs two reads per cell update: the
// temperature and the power grid.  The kernel then drives a second read
// port (pw_*) with the same request sequence at pw_base, issues on both
// ports in the same cycle, and pairs the two in-order response streams in
// two FIFOs: the output vector carries temperature in its lower and power
// in its upper par_vec cells.  For Diffusion 2D the pw_* port is idle.
//
// Flow control: requests use valid/ready, responses return in order one
// cycle or more later with no back-pressure.  The kernel keeps the number of
// requests in flight plus the words waiting in its output FIFO below the
// FIFO depth, so every response has room.  The output is a valid/ready
// stream of exactly cfg.num_vecs vectors per pass.  busy is high from start
// until the last response has been received.
module stencil_read
  import stencil_pkg::*;
#(
  parameter int unsigned BSIZE_X  = 4096,
  parameter int unsigned PAR_VEC  = 8,
  parameter int unsigned PAR_TIME = 36,
  parameter int unsigned FIFO_DEPTH = 16,
  parameter stencil_e    STENCIL  = DIFFUSION_2D
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  pass_cfg_t           cfg,
  // external memory read port
  output logic                rd_req_valid,
  input  logic                rd_req_ready,
  output logic [AW-1:0]       rd_req_addr,
  output logic [PAR_VEC-1:0]  rd_req_mask,
  input  logic                rd_resp_valid,
  input  fp32_t [PAR_VEC-1:0] rd_resp_data,
  // second read port: power grid (Hotspot 2D only)
  output logic                pw_req_valid,
  input  logic                pw_req_ready,
  output logic [AW-1:0]       pw_req_addr,
  output logic [PAR_VEC-1:0]  pw_req_mask,
  input  logic                pw_resp_valid,
  input  fp32_t [PAR_VEC-1:0] pw_resp_data,
  // stream to the first PE
  output logic                out_valid,
  input  logic                out_ready,
  output fp32_t [(STENCIL == HOTSPOT_2D ? 2 : 1)*PAR_VEC-1:0] out_data,
  output logic                busy
);
  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);
  localparam bit          HS = (STENCIL == HOTSPOT_2D);

  logic [AW-1:0]        dim_x, src_base, pw_base;
  logic [AW-1:0]        lx0, y, row_off, blk, index;
  logic signed [AW-1:0] gx0;
  logic                 walk_done, issue, running;
  logic [CW-1:0]        inflight, fifo_cnt, pw_inflight, pw_fifo_cnt;
  logic                 fifo_in_ready, pw_fifo_in_ready, room, pw_room;
  logic                 t_valid, t_ready, p_valid, p_ready;
  logic                 t_sent, p_sent, t_acc, p_acc, pair_open;
  fp32_t [PAR_VEC-1:0]  t_data, p_data;

  block_walker #(.BSIZE_X(BSIZE_X), .PAR_VEC(PAR_VEC), .PAR_TIME(PAR_TIME)) u_walk (
    .clk, .rst_n, .start,
    .dim_x(cfg.dim_x), .dim_y(cfg.dim_y), .num_vecs(cfg.num_vecs),
    .step(issue),
    .lx0, .gx0, .y, .row_off, .blk, .index, .done(walk_done)
  );

  always_comb begin
    for (int l = 0; l < int'(PAR_VEC); l++) begin
      logic signed [AW-1:0] gx;
      gx = gx0 + AW'(l);
      rd_req_mask[l] = (gx >= 0) && (gx < $signed(dim_x));
    end
  end

  assign room    = ((CW+1)'(inflight) + (CW+1)'(fifo_cnt) < (CW+1)'(FIFO_DEPTH));
  assign pw_room = !HS || ((CW+1)'(pw_inflight) + (CW+1)'(pw_fifo_cnt) < (CW+1)'(FIFO_DEPTH));

  // A request pair (one request per port) starts only with room on both
  // sides; each port may be accepted in a different cycle, and the walker
  // advances when both have been.  Valid never depends on ready.
  assign pair_open    = t_sent || p_sent;
  assign rd_req_addr  = src_base + row_off + gx0;
  assign rd_req_valid = running && !walk_done && !t_sent && (pair_open || (room && pw_room));
  assign pw_req_addr  = pw_base + row_off + gx0;
  assign pw_req_mask  = HS ? rd_req_mask : '0;
  assign pw_req_valid = HS && running && !walk_done && !p_sent && (pair_open || (room && pw_room));
  assign t_acc        = rd_req_valid && rd_req_ready;
  assign p_acc        = pw_req_valid && pw_req_ready;
  assign issue        = (t_sent || t_acc) && (!HS || p_sent || p_acc);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; inflight <= '0; pw_inflight <= '0; t_sent <= 1'b0; p_sent <= 1'b0;
      dim_x <= '0; src_base <= '0; pw_base <= '0;
    end else begin
      if (start) begin
        running  <= 1'b1;
        dim_x    <= cfg.dim_x;
        src_base <= cfg.src_base;
        pw_base  <= cfg.pw_base;
      end else if (running && walk_done && inflight == '0 && pw_inflight == '0) begin
        running <= 1'b0;
      end
      t_sent      <= !issue && (t_sent || t_acc);
      p_sent      <= !issue && (p_sent || p_acc);
      inflight    <= inflight + CW'(t_acc) - CW'(rd_resp_valid);
      pw_inflight <= pw_inflight + CW'(p_acc) - CW'(HS && pw_resp_valid);
    end
  end

  assign busy = running;

  stencil_channel #(.WIDTH(32 * PAR_VEC), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid(rd_resp_valid), .in_ready(fifo_in_ready), .in_data(rd_resp_data),
    .out_valid(t_valid), .out_ready(t_ready), .out_data(t_data), .count(fifo_cnt)
  );

  if (HS) begin : g_power
    stencil_channel #(.WIDTH(32 * PAR_VEC), .DEPTH(FIFO_DEPTH)) u_pw_fifo (
      .clk, .rst_n,
      .in_valid(pw_resp_valid), .in_ready(pw_fifo_in_ready), .in_data(pw_resp_data),
      .out_valid(p_valid), .out_ready(p_ready), .out_data(p_data), .count(pw_fifo_cnt)
    );
    assign out_valid = t_valid && p_valid;
    assign t_ready   = out_ready && p_valid;
    assign p_ready   = out_ready && t_valid;
    assign out_data  = {p_data, t_data};
  end else begin : g_temp_only
    assign pw_fifo_in_ready = 1'b1;
    assign pw_fifo_cnt      = '0;
    assign p_valid          = 1'b0;
    assign p_data           = '0;
    assign p_ready          = 1'b0;
    assign out_valid        = t_valid;
    assign t_ready          = out_ready;
    assign out_data         = t_data;
  end

  // The credit scheme guarantees room for every response.
  assert property (@(posedge clk) disable iff (!rst_n) rd_resp_valid |-> fifo_in_ready);
  assert property (@(posedge clk) disable iff (!rst_n) pw_resp_valid |-> pw_fifo_in_ready);
endmodule
