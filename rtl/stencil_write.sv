// stencil_write: write kernel, stores the compute blocks back to memory.
//
// Receives the block stream from the last PE and follows it with its own
// block_walker.  Of every spatial block only the compute block is written:
// block-local columns halo .. bsize_x-halo-1 that are also inside the grid.
// The halo columns, computed redundantly by the PEs, and out-of-grid
// columns are dropped through the per-lane write mask; a vector with no
// lane left is consumed without a memory access.  This is the only place
// where the design controls data flow by position; the PEs compute every
// cell.
//
// For Hotspot 2D the upper half of each input vector (power) is dropped.
// Addresses are cell addresses: dst_base + y*dim_x + x.  Flow control:
// valid/ready on the input stream and on the write port; the input vector
// is taken in the cycle its write is accepted (or at once if nothing of it
// is written), so a stalled memory stalls the whole chain.  busy is high
// from start until all cfg.num_vecs vectors have been handled.
module stencil_write
  import stencil_pkg::*;
#(
  parameter int unsigned BSIZE_X  = 4096,
  parameter int unsigned PAR_VEC  = 8,
  parameter int unsigned PAR_TIME = 36,
  parameter stencil_e    STENCIL  = DIFFUSION_2D
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  pass_cfg_t           cfg,
  input  logic                in_valid,
  output logic                in_ready,
  input  fp32_t [(STENCIL == HOTSPOT_2D ? 2 : 1)*PAR_VEC-1:0] in_data,
  // external memory write port
  output logic                wr_valid,
  input  logic                wr_ready,
  output logic [AW-1:0]       wr_addr,
  output logic [PAR_VEC-1:0]  wr_mask,
  output fp32_t [PAR_VEC-1:0] wr_data,
  output logic                busy
);
  localparam int unsigned HALO = RAD * PAR_TIME;

  logic [AW-1:0]        dim_x, dst_base;
  logic [AW-1:0]        lx0, y, row_off, blk, index;
  logic signed [AW-1:0] gx0;
  logic                 walk_done, running, step, any;

  block_walker #(.BSIZE_X(BSIZE_X), .PAR_VEC(PAR_VEC), .PAR_TIME(PAR_TIME)) u_walk (
    .clk, .rst_n, .start,
    .dim_x(cfg.dim_x), .dim_y(cfg.dim_y), .num_vecs(cfg.num_vecs),
    .step,
    .lx0, .gx0, .y, .row_off, .blk, .index, .done(walk_done)
  );

  always_comb begin
    for (int l = 0; l < int'(PAR_VEC); l++) begin
      logic [AW-1:0]        lx;
      logic signed [AW-1:0] gx;
      lx = lx0 + AW'(l);
      gx = gx0 + AW'(l);
      wr_mask[l] = (lx >= AW'(HALO)) && (lx < AW'(BSIZE_X - HALO)) &&
                   (gx >= 0) && (gx < $signed(dim_x));
    end
  end

  assign any      = |wr_mask;
  assign wr_addr  = dst_base + row_off + gx0;
  assign wr_data  = in_data[PAR_VEC-1:0];   // temperature only
  assign wr_valid = running && !walk_done && in_valid && any;
  assign in_ready = running && !walk_done && (!any || wr_ready);
  assign step     = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; dim_x <= '0; dst_base <= '0;
    end else if (start) begin
      running  <= 1'b1;
      dim_x    <= cfg.dim_x;
      dst_base <= cfg.dst_base;
    end else if (running && walk_done) begin
      running <= 1'b0;
    end
  end

  assign busy = running;
endmodule
