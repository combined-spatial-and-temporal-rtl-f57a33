// stencil_delay_line: delay of DEPTH pushes for a vector stream.
//
// A circular RAM of DEPTH words with one pointer: on a push the word written
// DEPTH pushes ago is presented on dout (combinationally, before the edge)
// and replaced by din.  The Hotspot 2D PE uses it as the small shift
// register of the power input, which only needs the centre cell, one row
// (bsize_x/par_vec vectors) behind the incoming vector.  DEPTH must be a
// power of two.
module stencil_delay_line #(
  parameter int unsigned WIDTH = 256,
  parameter int unsigned DEPTH = 512
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  output logic [WIDTH-1:0] dout
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wp;

  initial begin
    assert (DEPTH >= 2 && (DEPTH & (DEPTH - 1)) == 0)
      else $error("delay depth must be a power of two >= 2");
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wp <= '0;
    else if (push) wp <= wp + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= din;
  end

  assign dout = mem[wp];
endmodule
