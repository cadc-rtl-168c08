// tb_psum_buffer -- self-checking test of the psum buffer (8 entries of 10 bits).
//
// Random writes and reads against a queue kept here: data must come out in order,
// wr_ready must be low exactly when 8 beats are held, rd_valid exactly when one is, and
// level must equal the occupancy. Both the full and the empty state must occur.
`timescale 1ns/1ps
module tb_psum_buffer;

  localparam int DW = 10;
  localparam int DEPTH = 8;

  logic clk = 1'b0;
  logic rst_n = 1'b1;
  initial #0.25 rst_n = 1'b0;   // an edge, so that the asynchronous resets act
  always #0.5 clk = ~clk;

  logic          wr_valid = 1'b0, wr_ready, rd_valid, rd_ready = 1'b0;
  logic [DW-1:0] wr_data = '0, rd_data;
  logic [$clog2(DEPTH):0] level;

  psum_buffer #(.DW(DW), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, n_full = 0, n_empty = 0;
  logic [DW-1:0] q [$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 3000; t++) begin
      automatic int phase = (t / 300) % 2;    // alternate write-heavy and read-heavy periods
      @(negedge clk);
      wr_valid = (phase == 0) ? ($urandom_range(3) != 0) : ($urandom_range(3) == 0);
      rd_ready = (phase == 1) ? ($urandom_range(3) != 0) : ($urandom_range(3) == 0);
      wr_data  = DW'($urandom);
      #0.2;
      checks++;
      if (wr_ready != (q.size() < DEPTH) || rd_valid != (q.size() > 0) || int'(level) != q.size()) begin
        failures++;
        $display("t=%0d: wr_ready=%0d rd_valid=%0d level=%0d, held %0d", t, wr_ready, rd_valid, level, q.size());
      end
      if (q.size() == DEPTH) n_full++;
      if (q.size() == 0) n_empty++;
      if (rd_valid && rd_ready) begin
        automatic logic [DW-1:0] e = q.pop_front();
        checks++;
        if (rd_data != e) begin failures++; $display("t=%0d: read %h expected %h", t, rd_data, e); end
      end
      if (wr_valid && wr_ready) q.push_back(wr_data);
    end
    checks++;
    if (n_full == 0 || n_empty == 0) begin failures++; $display("full %0d empty %0d", n_full, n_empty); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
