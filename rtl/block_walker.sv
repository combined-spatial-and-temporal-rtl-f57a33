// block_walker: collapsed-loop position generator for the block stream.
//
// The accelerator walks the grid in overlapped spatial blocks of bsize_x
// cells: blocks go left to right, and inside a block the rows are streamed
// top to bottom (no blocking in y), each row as bsize_x/par_vec vectors.
// Instead of three nested loops this module keeps one set of state
// registers that is updated once per step (loop collapsing), and decides
// the end of the walk with a single counter compared against the trip count
// the host pre-computed (exit-condition optimisation): done is
// (index == num_vecs), with no comparison chain on the dimension variables.
//
// Outputs describe the vector at the current position:
//   lx0     block-local x of lane 0 (0 .. bsize_x-par_vec)
//   gx0     global x of lane 0, signed; block b starts at b*csize_x - halo,
//           with halo = rad*par_time and csize_x = bsize_x - 2*halo
//   y       row, row_off = y*dim_x (kept by accumulation, no multiplier)
//   blk     block index
// Timing: start clears the walk; each cycle with step high advances it by
// one vector.  All outputs are registers.
module block_walker
  import stencil_pkg::*;
#(
  parameter int unsigned BSIZE_X  = 4096,
  parameter int unsigned PAR_VEC  = 8,
  parameter int unsigned PAR_TIME = 36
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [AW-1:0]        dim_x,
  input  logic [AW-1:0]        dim_y,
  input  logic [AW-1:0]        num_vecs,
  input  logic                 step,
  output logic [AW-1:0]        lx0,
  output logic signed [AW-1:0] gx0,
  output logic [AW-1:0]        y,
  output logic [AW-1:0]        row_off,
  output logic [AW-1:0]        blk,
  output logic [AW-1:0]        index,
  output logic                 done
);
  localparam int unsigned HALO  = RAD * PAR_TIME;
  localparam int unsigned CSIZE = BSIZE_X - 2 * HALO;

  logic signed [AW-1:0] blk_base;

  initial begin
    assert (BSIZE_X % PAR_VEC == 0) else $error("bsize_x must be divisible by par_vec");
    assert (BSIZE_X > 2 * HALO)     else $error("bsize_x too small for the halo");
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lx0 <= '0; gx0 <= '0; y <= '0; row_off <= '0; blk <= '0;
      blk_base <= '0; index <= '0;
    end else if (start) begin
      lx0      <= '0;
      y        <= '0;
      row_off  <= '0;
      blk      <= '0;
      index    <= '0;
      blk_base <= -AW'(HALO);
      gx0      <= -AW'(HALO);
    end else if (step) begin
      index <= index + 1'b1;
      if (lx0 == AW'(BSIZE_X - PAR_VEC)) begin
        lx0 <= '0;
        if (y == dim_y - 1'b1) begin
          y        <= '0;
          row_off  <= '0;
          blk      <= blk + 1'b1;
          blk_base <= blk_base + AW'(CSIZE);
          gx0      <= blk_base + AW'(CSIZE);
        end else begin
          y       <= y + 1'b1;
          row_off <= row_off + dim_x;
          gx0     <= blk_base;
        end
      end else begin
        lx0 <= lx0 + AW'(PAR_VEC);
        gx0 <= gx0 + AW'(PAR_VEC);
      end
    end
  end

  assign done = (index == num_vecs);
endmodule
