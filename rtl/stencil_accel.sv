// stencil_accel: 2D stencil accelerator with combined spatial and temporal
// blocking, for the first-order Diffusion 2D (default) or Hotspot 2D stencil.
//
// Structure: read kernel -> PE_0 -> PE_1 -> ... -> PE_{par_time-1} -> write
// kernel, each link a shallow stencil_channel.  One pass streams every
// overlapped spatial block of the grid once from the source buffer through
// the PE chain, which applies up to par_time time steps, and writes the
// compute blocks to the destination buffer.  The host runs
// ceil(iter/par_time) passes, swapping the two buffers between passes and
// setting cfg.active to the number of steps left for the last one.
//
// Interface: cfg is sampled on the start pulse; busy stays high until every
// kernel is done, i.e. the write kernel has issued the last write.  The external memory
// ports are cell-addressed, par_vec cells wide, with per-lane masks; reads
// return in order.  The pw_* read port fetches the power grid for Hotspot 2D
// and is idle for Diffusion 2D.  Defaults are the best Diffusion 2D configuration on the
// Arria 10 board of the evaluation: bsize_x 4096, par_vec 8, par_time 36.
// Channel depths are this design's choice.
module stencil_accel
  import stencil_pkg::*;
#(
  parameter int unsigned BSIZE_X    = 4096,
  parameter int unsigned PAR_VEC    = 8,
  parameter int unsigned PAR_TIME   = 36,
  parameter int unsigned CH_DEPTH   = 4,
  parameter int unsigned RD_DEPTH   = 16,
  parameter stencil_e    STENCIL    = DIFFUSION_2D
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  pass_cfg_t           cfg,
  output logic                busy,
  // external memory read port
  output logic                rd_req_valid,
  input  logic                rd_req_ready,
  output logic [AW-1:0]       rd_req_addr,
  output logic [PAR_VEC-1:0]  rd_req_mask,
  input  logic                rd_resp_valid,
  input  fp32_t [PAR_VEC-1:0] rd_resp_data,
  // external memory read port for the power grid (Hotspot 2D)
  output logic                pw_req_valid,
  input  logic                pw_req_ready,
  output logic [AW-1:0]       pw_req_addr,
  output logic [PAR_VEC-1:0]  pw_req_mask,
  input  logic                pw_resp_valid,
  input  fp32_t [PAR_VEC-1:0] pw_resp_data,
  // external memory write port
  output logic                wr_valid,
  input  logic                wr_ready,
  output logic [AW-1:0]       wr_addr,
  output logic [PAR_VEC-1:0]  wr_mask,
  output fp32_t [PAR_VEC-1:0] wr_data
);
  localparam int unsigned NS = (STENCIL == HOTSPOT_2D) ? 2 : 1;  // streams per vector
  localparam int unsigned VW = 32 * NS * PAR_VEC;

  // link i feeds PE i (link 0 from the read kernel); ch_* are the channel
  // outputs after PE i.
  logic                pe_in_valid [PAR_TIME];
  logic                pe_in_ready [PAR_TIME];
  fp32_t [NS*PAR_VEC-1:0] pe_in_data  [PAR_TIME];
  logic                pe_out_valid[PAR_TIME];
  logic                pe_out_ready[PAR_TIME];
  fp32_t [NS*PAR_VEC-1:0] pe_out_data [PAR_TIME];
  logic                ch_valid    [PAR_TIME];
  logic                ch_ready    [PAR_TIME];
  fp32_t [NS*PAR_VEC-1:0] ch_data     [PAR_TIME];
  logic                pe_busy     [PAR_TIME];
  logic                rd_busy, wr_busy;

  stencil_read #(.BSIZE_X(BSIZE_X), .PAR_VEC(PAR_VEC), .PAR_TIME(PAR_TIME),
                 .FIFO_DEPTH(RD_DEPTH), .STENCIL(STENCIL)) u_read (
    .clk, .rst_n, .start, .cfg,
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_req_mask,
    .rd_resp_valid, .rd_resp_data,
    .pw_req_valid, .pw_req_ready, .pw_req_addr, .pw_req_mask,
    .pw_resp_valid, .pw_resp_data,
    .out_valid(pe_in_valid[0]), .out_ready(pe_in_ready[0]), .out_data(pe_in_data[0]),
    .busy(rd_busy)
  );

  for (genvar i = 0; i < int'(PAR_TIME); i++) begin : g_pe
    stencil_pe #(.BSIZE_X(BSIZE_X), .PAR_VEC(PAR_VEC), .PAR_TIME(PAR_TIME),
                 .PE_ID(i), .STENCIL(STENCIL)) u_pe (
      .clk, .rst_n, .start, .cfg,
      .in_valid(pe_in_valid[i]), .in_ready(pe_in_ready[i]), .in_data(pe_in_data[i]),
      .out_valid(pe_out_valid[i]), .out_ready(pe_out_ready[i]), .out_data(pe_out_data[i]),
      .busy(pe_busy[i])
    );

    stencil_channel #(.WIDTH(VW), .DEPTH(CH_DEPTH)) u_ch (
      .clk, .rst_n,
      .in_valid(pe_out_valid[i]), .in_ready(pe_out_ready[i]), .in_data(pe_out_data[i]),
      .out_valid(ch_valid[i]), .out_ready(ch_ready[i]), .out_data(ch_data[i]),
      .count()
    );

    if (i + 1 < int'(PAR_TIME)) begin : g_link
      assign pe_in_valid[i+1] = ch_valid[i];
      assign pe_in_data[i+1]  = ch_data[i];
      assign ch_ready[i]      = pe_in_ready[i+1];
    end
  end

  stencil_write #(.BSIZE_X(BSIZE_X), .PAR_VEC(PAR_VEC), .PAR_TIME(PAR_TIME),
                  .STENCIL(STENCIL)) u_write (
    .clk, .rst_n, .start, .cfg,
    .in_valid(ch_valid[PAR_TIME-1]), .in_ready(ch_ready[PAR_TIME-1]),
    .in_data(ch_data[PAR_TIME-1]),
    .wr_valid, .wr_ready, .wr_addr, .wr_mask, .wr_data,
    .busy(wr_busy)
  );

  // busy while any kernel of the pass is still working.
  always_comb begin
    busy = rd_busy | wr_busy;
    for (int i = 0; i < int'(PAR_TIME); i++) busy |= pe_busy[i];
  end
endmodule
