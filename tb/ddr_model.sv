// ddr_model: behavioural model of the external DDR memory and its
// controller, for simulation only (not synthesizable, not part of the
// design).  Cell-addressed, PAR_VEC cells per access, per-lane masks.
// Reads are accepted with valid/ready and answered in order after a random
// latency of 1..MAX_LAT cycles; masked-off lanes read as zero.  Writes are
// accepted with valid/ready and applied at once.  stall_pct (settable at
// run time) is the chance, in percent, that a port is not ready in a cycle.
// The cell array mem is public so a testbench can load and inspect it.
module ddr_model
  import stencil_pkg::*;
#(
  parameter int unsigned PAR_VEC = 8,
  parameter int unsigned CELLS   = 4096,
  parameter int unsigned MAX_LAT = 8
) (
  input  logic                clk,
  input  logic                rd_req_valid,
  output logic                rd_req_ready,
  input  logic [AW-1:0]       rd_req_addr,
  input  logic [PAR_VEC-1:0]  rd_req_mask,
  output logic                rd_resp_valid,
  output fp32_t [PAR_VEC-1:0] rd_resp_data,
  input  logic                wr_valid,
  output logic                wr_ready,
  input  logic [AW-1:0]       wr_addr,
  input  logic [PAR_VEC-1:0]  wr_mask,
  input  fp32_t [PAR_VEC-1:0] wr_data
);
  fp32_t mem [CELLS];
  int    stall_pct = 0;
  longint cycle = 0;
  int    rd_stalls = 0, wr_stalls = 0, bad_addr = 0;

  typedef struct { longint due; fp32_t [PAR_VEC-1:0] data; } resp_t;
  resp_t  q[$];
  longint last_due = 0;

  initial begin
    rd_req_ready = 1'b0; wr_ready = 1'b0; rd_resp_valid = 1'b0; rd_resp_data = '0;
    foreach (mem[i]) mem[i] = '0;
  end

  always @(posedge clk) begin
    cycle++;
    if (rd_req_valid && !rd_req_ready) rd_stalls++;
    if (wr_valid && !wr_ready) wr_stalls++;
    // accept a read
    if (rd_req_valid && rd_req_ready) begin
      resp_t r;
      for (int l = 0; l < int'(PAR_VEC); l++) begin
        logic [AW-1:0] a;
        a = rd_req_addr + AW'(l);
        if (!rd_req_mask[l]) r.data[l] = '0;
        else if (a >= AW'(CELLS)) begin r.data[l] = '0; bad_addr++; end
        else r.data[l] = mem[a];
      end
      r.due = cycle + 1 + longint'($urandom % MAX_LAT);
      if (r.due <= last_due) r.due = last_due + 1;
      last_due = r.due;
      q.push_back(r);
    end
    // accept a write
    if (wr_valid && wr_ready) begin
      for (int l = 0; l < int'(PAR_VEC); l++) begin
        logic [AW-1:0] a;
        a = wr_addr + AW'(l);
        if (wr_mask[l]) begin
          if (a >= AW'(CELLS)) bad_addr++;
          else mem[a] = wr_data[l];
        end
      end
    end
    // drive outputs for the next cycle
    rd_resp_valid <= (q.size() > 0) && (q[0].due <= cycle + 1);
    if ((q.size() > 0) && (q[0].due <= cycle + 1)) begin
      rd_resp_data <= q[0].data;
      void'(q.pop_front());
    end
    rd_req_ready <= (int'($urandom % 100) >= stall_pct);
    wr_ready     <= (int'($urandom % 100) >= stall_pct);
  end
endmodule
