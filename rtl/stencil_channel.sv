// stencil_channel: shallow FIFO channel between kernels and between PEs.
//
// Carries one par_vec-wide vector per transfer with a valid/ready handshake
// on both sides (a transfer happens on a clock edge where valid and ready
// are both high).  It decouples neighbouring pipeline stages so that a stall
// in one PE does not immediately stop the one before it.  The storage is a
// circular buffer of DEPTH entries; out_data is read combinationally from
// the head, so a word written in one cycle can leave in the next.  count
// gives the occupancy (the read kernel uses it for flow control).  The depth
// is this design's choice: the paper only calls the channels shallow.
module stencil_channel #(
  parameter int unsigned WIDTH = 256,
  parameter int unsigned DEPTH = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [WIDTH-1:0]           in_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [WIDTH-1:0]           out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH + 1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    rp, wp;
  logic             do_push, do_pop;

  assign in_ready  = (count != CW'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rp];
  assign do_push   = in_valid && in_ready;
  assign do_pop    = out_valid && out_ready;

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; count <= '0;
    end else begin
      if (do_push) wp <= inc(wp);
      if (do_pop)  rp <= inc(rp);
      count <= count + CW'(do_push) - CW'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= in_data;
  end

  // A word offered on the output stays offered, unchanged, until taken.
  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
