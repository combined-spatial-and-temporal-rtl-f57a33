// stencil_pe: processing element, one time step of a 2D first-order stencil.
//
// A chain of par_time PEs forms the compute stage: PE i computes time step
// i of the pass on the block stream it receives from PE i-1 and passes the
// result on, one row (rad rows) behind its input.  Each PE buffers two rows
// plus one vector of its input in a stencil_shift_reg and updates par_vec
// cells per cycle with par_vec lane units: diffusion2d_lane when STENCIL is
// DIFFUSION_2D, hotspot2d_lane when it is HOTSPOT_2D.
//
// Hotspot 2D carries a second stream, the power grid, in the upper par_vec
// cells of each vector (the temperature is in the lower par_vec).  Power
// does not change over time, so only the centre value is needed: it goes
// through a one-row stencil_delay_line, the smaller second shift register,
// and then through as many stages as the lanes, so it leaves the PE aligned
// with the temperatures it belongs to.
//
// Stream: the input is the block stream described in block_walker, exactly
// cfg.num_vecs vectors long, and so is the output.  Output vector j is the
// update of input vector j; it can only be computed once input j+W (its
// south row, W = bsize_x/par_vec) has arrived, so after the last input the
// PE runs W more iterations on dummy data to drain its buffer.  The loop
// therefore iterates num_vecs + W times, decided by counters against
// num_vecs, not by the row/block variables.
//
// Boundaries: a neighbour that falls outside the grid is replaced by the
// cell itself (west at x = 0, east at x = dim_x-1, north at y = 0, south at
// y = dim_y-1).  Because rows of consecutive blocks follow each other in the
// stream, this rule also keeps data of the previous or next block out of
// the first and last rows.  Cells at the left and right edge of a spatial
// block read neighbours that belong to the previous/next row; those cells
// are halo and are never written back.  Cells outside the grid (x < 0 or
// x >= dim_x) are computed like any other and discarded later.
//
// Forwarding: when this PE's index is >= cfg.active, the pass has fewer
// time steps than PEs and the PE copies the centre value through instead.
//
// Flow control: valid/ready on both sides.  The lanes form a 5-stage (8 for
// Hotspot 2D)
// pipeline that advances only while the output register is free or being
// taken; an iteration (accepting an input or a drain step) needs the same
// enable.  The PE ID is a parameter, as the compiler-supplied ID of a
// replicated kernel would be.  The start pulse latches cfg.
module stencil_pe
  import stencil_pkg::*;
#(
  parameter int unsigned BSIZE_X  = 4096,
  parameter int unsigned PAR_VEC  = 8,
  parameter int unsigned PAR_TIME = 36,
  parameter int unsigned PE_ID    = 0,
  parameter stencil_e    STENCIL  = DIFFUSION_2D
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  pass_cfg_t           cfg,
  input  logic                in_valid,
  output logic                in_ready,
  input  fp32_t [(STENCIL == HOTSPOT_2D ? 2 : 1)*PAR_VEC-1:0] in_data,
  output logic                out_valid,
  input  logic                out_ready,
  output fp32_t [(STENCIL == HOTSPOT_2D ? 2 : 1)*PAR_VEC-1:0] out_data,
  output logic                busy
);
  localparam int unsigned W   = BSIZE_X / PAR_VEC;
  localparam bit          HS  = (STENCIL == HOTSPOT_2D);
  localparam int unsigned LAT = HS ? 8 : 5;

  // latched pass configuration
  logic [AW-1:0] dim_x, dim_y, num_vecs;
  diff2d_coef_t  coef;
  hs_coef_t      hs;
  logic          fwd;

  logic [AW-1:0] in_cnt;     // input vectors consumed
  logic [AW-1:0] warm_cnt;   // iterations so far, saturating at W
  logic          have_in, warm, en, iter_go, produce;
  logic [LAT-1:0] vld;

  // position of the centre vector being produced
  logic [AW-1:0]        lx0, y, row_off, blk, index;
  logic signed [AW-1:0] gx0;
  logic                 walk_done;

  fp32_t [PAR_VEC-1:0] din, north, south, center, west, east;
  fp32_t [PAR_VEC-1:0] ln, ls, lw, le;

  block_walker #(.BSIZE_X(BSIZE_X), .PAR_VEC(PAR_VEC), .PAR_TIME(PAR_TIME)) u_walk (
    .clk, .rst_n, .start,
    .dim_x(cfg.dim_x), .dim_y(cfg.dim_y), .num_vecs(cfg.num_vecs),
    .step(produce),
    .lx0, .gx0, .y, .row_off, .blk, .index, .done(walk_done)
  );

  stencil_shift_reg #(.BSIZE_X(BSIZE_X), .PAR_VEC(PAR_VEC)) u_sr (
    .clk, .rst_n, .push(iter_go), .din,
    .north, .south, .center, .west, .east
  );

  assign have_in  = (in_cnt != num_vecs);
  assign warm     = (warm_cnt == AW'(W));
  assign en       = !(vld[LAT-1] && !out_ready);
  assign iter_go  = busy && en && !walk_done && (have_in ? in_valid : 1'b1);
  assign produce  = iter_go && warm;
  assign in_ready = busy && en && !walk_done && have_in;
  assign din      = have_in ? in_data[PAR_VEC-1:0] : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; in_cnt <= '0; warm_cnt <= '0; vld <= '0;
      dim_x <= '0; dim_y <= '0; num_vecs <= '0; coef <= '0; hs <= '0; fwd <= 1'b0;
    end else begin
      if (start) begin
        busy     <= 1'b1;
        in_cnt   <= '0;
        warm_cnt <= '0;
        dim_x    <= cfg.dim_x;
        dim_y    <= cfg.dim_y;
        num_vecs <= cfg.num_vecs;
        coef     <= cfg.coef;
        hs       <= cfg.hs;
        fwd      <= (AW'(PE_ID) >= cfg.active);
      end else begin
        if (iter_go && have_in) in_cnt <= in_cnt + 1'b1;
        if (iter_go && !warm)   warm_cnt <= warm_cnt + 1'b1;
        if (busy && walk_done)  busy <= 1'b0;
      end
      if (en) vld <= {vld[LAT-2:0], produce};
    end
  end

  // boundary fall-back: an out-of-grid neighbour is the cell itself
  always_comb begin
    for (int l = 0; l < int'(PAR_VEC); l++) begin
      logic signed [AW-1:0] gx;
      gx    = gx0 + AW'(l);
      lw[l] = (gx == '0)                    ? center[l] : west[l];
      le[l] = (gx == $signed(dim_x - 1'b1)) ? center[l] : east[l];
      ln[l] = (y == '0)                     ? center[l] : north[l];
      ls[l] = (y == dim_y - 1'b1)           ? center[l] : south[l];
    end
  end

  if (HS) begin : g_hotspot
    fp32_t [PAR_VEC-1:0] pw_c;            // power of the centre vector
    fp32_t [PAR_VEC-1:0] pw_pipe [LAT];   // travels beside the lanes

    stencil_delay_line #(.WIDTH(32 * PAR_VEC), .DEPTH(W)) u_pw (
      .clk, .rst_n, .push(iter_go),
      .din(have_in ? in_data[2*PAR_VEC-1:PAR_VEC] : '0),
      .dout(pw_c)
    );

    always_ff @(posedge clk) begin
      if (en) begin
        pw_pipe[0] <= pw_c;
        for (int i = 1; i < int'(LAT); i++) pw_pipe[i] <= pw_pipe[i-1];
      end
    end
    assign out_data[2*PAR_VEC-1:PAR_VEC] = pw_pipe[LAT-1];

    for (genvar l = 0; l < int'(PAR_VEC); l++) begin : g_lane
      hotspot2d_lane u_lane (
        .clk, .en, .coef(hs), .fwd,
        .c(center[l]), .w(lw[l]), .e(le[l]), .s(ls[l]), .n(ln[l]), .p(pw_c[l]),
        .y(out_data[l])
      );
    end
  end else begin : g_diffusion
    for (genvar l = 0; l < int'(PAR_VEC); l++) begin : g_lane
      diffusion2d_lane u_lane (
        .clk, .en, .coef, .fwd,
        .c(center[l]), .w(lw[l]), .e(le[l]), .s(ls[l]), .n(ln[l]),
        .y(out_data[l])
      );
    end
  end

  assign out_valid = vld[LAT-1];

  // An output offered and not taken must stay put.
  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
