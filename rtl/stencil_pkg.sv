// stencil_pkg: types and constants shared by the 2D stencil accelerator.
//
// Grid cells are IEEE-754 single-precision floats (fp32_t).  A pass of the
// accelerator is described by pass_cfg_t, which the host fills in before
// each pass: the grid size, the collapsed-loop trip count it pre-computes
// (number of par_vec-wide vectors in the whole block stream), the base
// addresses of the source and destination buffers (in cells), the alignment
// pad, and how many of the PEs compute a time step in this pass (the rest
// forward).  diff2d_coef_t holds the five run-time coefficients of the
// Diffusion 2D stencil, hs_coef_t the four of Hotspot 2D; stencil_e selects
// which of the two stencils an accelerator is built for.  Hotspot 2D also
// reads a power grid (pw_base), which is constant over the time steps.  The
// stencil radius is fixed at one, the order of every stencil the design
// targets.
package stencil_pkg;

  typedef logic [31:0] fp32_t;

  // Stencil radius (first-order stencils only).
  localparam int unsigned RAD = 1;

  // Width of cell addresses, counters and grid dimensions.
  localparam int unsigned AW = 32;

  typedef struct packed {
    fp32_t cc;  // centre
    fp32_t cw;  // west
    fp32_t ce;  // east
    fp32_t cs;  // south
    fp32_t cn;  // north
  } diff2d_coef_t;

  typedef enum logic [0:0] {
    DIFFUSION_2D = 1'b0,
    HOTSPOT_2D   = 1'b1
  } stencil_e;

  typedef struct packed {
    fp32_t sdc;  // step divided by capacitance
    fp32_t rx1;  // 1/Rx
    fp32_t ry1;  // 1/Ry
    fp32_t rz1;  // 1/Rz
  } hs_coef_t;

  typedef struct packed {
    logic [AW-1:0] dim_x;     // grid width in cells
    logic [AW-1:0] dim_y;     // grid height in cells
    logic [AW-1:0] num_vecs;  // bnum_x * (bsize_x/par_vec) * dim_y, from the host
    logic [AW-1:0] src_base;  // cell address of cell (0,0) of the source grid
    logic [AW-1:0] dst_base;  // cell address of cell (0,0) of the destination grid
    logic [AW-1:0] pw_base;   // cell address of cell (0,0) of the power grid (Hotspot 2D)
    logic [AW-1:0] active;    // number of PEs that compute in this pass (1..par_time)
    diff2d_coef_t  coef;      // Diffusion 2D coefficients
    hs_coef_t      hs;        // Hotspot 2D coefficients
  } pass_cfg_t;

endpackage
