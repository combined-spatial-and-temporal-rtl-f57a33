// tb_stencil_channel: random producer and consumer (each with random idle
// cycles) move a numbered sequence through the FIFO; the consumer checks
// order and completeness, and the test checks that full and empty were
// both reached and that a word written into an empty FIFO is readable on
// the next cycle.
module tb_stencil_channel;
  localparam int WIDTH = 16, DEPTH = 4, N = 2000;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, in_valid, in_ready, out_valid, out_ready;
  logic [WIDTH-1:0] in_data, out_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0, sent = 0, got = 0, full_seen = 0;

  stencil_channel #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (count == DEPTH[$clog2(DEPTH+1)-1:0]) full_seen++;
    if (in_valid && in_ready) sent++;
    if (out_valid && out_ready) begin
      checks++;
      if (out_data !== WIDTH'(got)) begin
        failures++;
        if (failures < 10) $display("FIFO MISMATCH got %0d want %0d", out_data, got);
      end
      got++;
    end
  end

  always @(negedge clk) begin
    in_valid  = (sent < N) && ($urandom % 3 != 0);
    in_data   = WIDTH'(sent);
    out_ready = ($urandom % 3 != 0) && (got > 300 || got < 100 || $urandom % 8 == 0);
  end

  initial begin
    rst_n = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (out_valid || !in_ready) failures++;     // empty after reset
    rst_n = 1;
    wait (got == N);
    @(posedge clk);
    checks++;
    if (full_seen == 0 || out_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
