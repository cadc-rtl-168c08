// tb_zero_skip_accumulator -- self-checking test of the zero-skipping accumulator (S=9, W=8).
//
// Groups are encoded here as mask + nonzero beats (the worked example 15 + 67 + 17 = 99
// first, then random groups with 0..100 % zeros) and streamed with random gaps and random
// back-pressure on the result. Each result must equal the group's sum, the number of
// additions must be the sum over groups of (nonzero count - 1), and the data beats must
// take one cycle each (no stall without back-pressure), the zeros none.
`timescale 1ns/1ps
module tb_zero_skip_accumulator;

  localparam int S = 9;
  localparam int W = 8;
  localparam int BW = 9;
  localparam int YW = W + $clog2(S);

  logic clk = 1'b0;
  logic rst_n = 1'b1;
  initial #0.25 rst_n = 1'b0;   // an edge, so that the asynchronous resets act
  always #0.5 clk = ~clk;

  logic          in_valid = 1'b0, in_ready, in_is_mask = 1'b0;
  logic [BW-1:0] in_data = '0;
  logic          out_valid, out_ready = 1'b1, add_fire;
  logic [YW-1:0] out_y;

  zero_skip_accumulator #(.S(S), .W(W)) dut (.*);

  int checks = 0, failures = 0;
  int exp_sum [$];
  int exp_adds = 0, n_adds = 0, nrecv = 0, nsent = 0;
  bit bp = 1'b0;
  int n_stall = 0;

  always @(posedge clk) if (in_valid && !in_ready) n_stall++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (add_fire) n_adds++;
    if (out_valid && out_ready) begin
      automatic int e = exp_sum.pop_front();
      checks++;
      if (int'(out_y) != e) begin failures++; $display("group %0d: y=%0d expected %0d", nrecv, out_y, e); end
      nrecv++;
    end
  end

  always @(negedge clk) out_ready <= bp ? ($urandom_range(2) == 0) : 1'b1;

  task automatic beat(input bit is_mask, input int d, input bit gaps);
    @(negedge clk);
    while (gaps && $urandom_range(3) == 0) begin in_valid = 1'b0; @(negedge clk); end
    in_valid = 1'b1; in_is_mask = is_mask; in_data = BW'(d);
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    #0.1 in_valid = 1'b0;
  endtask

  task automatic send_group(input int v [S], input bit gaps);
    automatic int mask = 0, n = 0, sum = 0;
    for (int s = 0; s < S; s++) if (v[s] != 0) begin mask |= (1 << s); n++; sum += v[s]; end
    exp_sum.push_back(sum);
    exp_adds += (n > 0) ? n - 1 : 0;
    nsent++;
    beat(1'b1, mask, gaps);
    for (int s = 0; s < S; s++) if (v[s] != 0) beat(1'b0, v[s], gaps);
  endtask

  initial begin
    automatic int v [S];
    automatic int t0, t1;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    v = '{0, 15, 0, 0, 0, 0, 0, 67, 17};
    send_group(v, 1'b0);
    wait (nrecv == 1);
    checks++;
    if (n_adds != 2) begin failures++; $display("example: %0d additions, expected 2", n_adds); end
    // cycle cost: without back-pressure every beat is taken in its own cycle, so a group
    // of n nonzero psums costs 1 + n cycles and zeros cost nothing
    n_stall = 0;
    for (int n = 0; n <= S; n += 3) begin
      for (int s = 0; s < S; s++) v[s] = (s >= S - n) ? 200 : 0;
      send_group(v, 1'b0);
    end
    checks++;
    if (n_stall != 0) begin failures++; $display("%0d stalled beats without back-pressure", n_stall); end
    bp = 1'b1;
    for (int t = 0; t < 400; t++) begin
      automatic int zp = $urandom_range(100);
      for (int s = 0; s < S; s++) v[s] = ($urandom_range(99) < zp) ? 0 : 1 + $urandom_range(254);
      send_group(v, 1'b1);
    end
    wait (nrecv == nsent);
    checks++;
    if (n_adds != exp_adds) begin failures++; $display("additions %0d expected %0d", n_adds, exp_adds); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
