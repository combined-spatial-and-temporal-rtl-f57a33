// stencil_shift_reg: shift-register line buffer of a 2D first-order stencil.
//
// The grid is streamed row by row, par_vec cells per push.  To update a cell
// its north and south neighbours, one row (bsize_x cells) away, must still
// be on chip, so the buffer holds 2*rad*bsize_x + par_vec cells: the newest
// vector (din, the south row) plus the 2*bsize_x/par_vec vectors before it.
// Every neighbour then sits at a fixed distance from the newest cell, so the
// taps are static.  As on an FPGA, the shifting is done by moving a write
// pointer through a block RAM of 2*bsize_x/par_vec vector words instead of
// moving the data: advancing the start address shifts the stencil forward.
//
// Taps, valid combinationally for the current din, before the push:
//   south  = din                       (vector k)
//   center = vector k - W              (W = bsize_x/par_vec)
//   north  = vector k - 2W
//   west/east = center shifted by one lane, the end lanes filled from
//               vectors k-W-1 and k-W+1.
// On the clock edge with push high, din is written and the pointer moves.
// Four reads and one write per cycle: an FPGA tool replicates the RAM for
// the extra read ports.  bsize_x/par_vec must be a power of two and at
// least 2 (the paper restricts bsize_x and par_vec to powers of two).
module stencil_shift_reg
  import stencil_pkg::*;
#(
  parameter int unsigned BSIZE_X = 4096,
  parameter int unsigned PAR_VEC = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      push,
  input  fp32_t [PAR_VEC-1:0]       din,
  output fp32_t [PAR_VEC-1:0]       north,
  output fp32_t [PAR_VEC-1:0]       south,
  output fp32_t [PAR_VEC-1:0]       center,
  output fp32_t [PAR_VEC-1:0]       west,
  output fp32_t [PAR_VEC-1:0]       east
);
  localparam int unsigned W     = BSIZE_X / PAR_VEC;
  localparam int unsigned DEPTH = 2 * W;
  localparam int unsigned PW    = $clog2(DEPTH);

  fp32_t [PAR_VEC-1:0] mem [DEPTH];
  logic  [PW-1:0]      wp;
  fp32_t [PAR_VEC-1:0] wsrc, esrc;

  initial begin
    assert (W >= 2 && (W & (W - 1)) == 0)
      else $error("bsize_x/par_vec must be a power of two >= 2");
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wp <= '0;
    else if (push) wp <= wp + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= din;
  end

  always_comb begin
    south  = din;
    north  = mem[wp];
    center = mem[wp - PW'(W)];
    wsrc   = mem[wp - PW'(W + 1)];
    esrc   = mem[wp - PW'(W - 1)];
    for (int l = 0; l < int'(PAR_VEC); l++) begin
      west[l] = (l == 0)                 ? wsrc[PAR_VEC-1] : center[l-1];
      east[l] = (l == int'(PAR_VEC) - 1) ? esrc[0]         : center[l+1];
    end
  end
endmodule
