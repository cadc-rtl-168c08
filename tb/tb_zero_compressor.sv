// tb_zero_compressor -- self-checking test of the zero compressor (9 psums of 8 bits).
//
// First the worked nine-psum example (three nonzero values 15, 67, 17 in segments 1, 7, 8):
// it must come out as mask 110000010b and the three values, 33 bits in all. Then random
// groups with 0..100 % zeros under random back-pressure; the beats are decoded here and
// compared with each group, and each group must take exactly 1 + (nonzero count) beats.
`timescale 1ns/1ps
module tb_zero_compressor;

  localparam int S  = 9;
  localparam int W  = 8;
  localparam int BW = 9;

  logic clk = 1'b0;
  logic rst_n = 1'b1;
  initial #0.25 rst_n = 1'b0;   // an edge, so that the asynchronous resets act
  always #0.5 clk = ~clk;

  logic          in_valid = 1'b0, in_ready;
  logic [W-1:0]  in_psum [S];
  logic          out_valid, out_ready = 1'b1, out_is_mask;
  logic [BW-1:0] out_data;

  zero_compressor #(.S(S), .W(W)) dut (.*);

  int checks = 0, failures = 0;
  int sent [$];               // psums of every accepted group, flattened
  int ngroups = 0, nrecv = 0, bits_sent = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Receiver: rebuild the groups from the beats and compare
  initial begin
    automatic int mask, got [S], n, k;
    forever begin
      @(posedge clk);
      if (out_valid && out_ready) begin
        checks++;
        if (!out_is_mask) begin failures++; $display("group %0d: data beat where mask expected", nrecv); end
        mask = int'(out_data);
        bits_sent += S;
        n = $countones(out_data);
        for (int s = 0; s < S; s++) got[s] = 0;
        k = 0;
        while (k < n) begin
          @(posedge clk);
          if (out_valid && out_ready) begin
            checks++;
            if (out_is_mask) begin failures++; $display("group %0d: mask beat among data", nrecv); end
            // the k-th set bit of the mask
            begin
              automatic int seen = 0;
              for (int s = 0; s < S; s++) if (mask[s]) begin
                if (seen == k) got[s] = int'(out_data[W-1:0]);
                seen++;
              end
            end
            bits_sent += W;
            k++;
          end
        end
        for (int s = 0; s < S; s++) begin
          automatic int e = sent.pop_front();
          checks++;
          if (got[s] != e) begin
            failures++;
            $display("group %0d segment %0d: %0d expected %0d", nrecv, s, got[s], e);
          end
        end
        nrecv++;
      end
    end
  end

  always @(negedge clk) out_ready <= (ngroups < 2) ? 1'b1 : ($urandom_range(3) != 0);

  task automatic send(input int v [S]);
    @(negedge clk);
    for (int s = 0; s < S; s++) in_psum[s] = W'(v[s]);
    in_valid = 1'b1;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    for (int s = 0; s < S; s++) sent.push_back(v[s]);
    ngroups++;
    #0.1 in_valid = 1'b0;
  endtask

  initial begin
    automatic int v [S];
    automatic int cyc0, cyc1;
    for (int s = 0; s < S; s++) in_psum[s] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // worked example
    v = '{0, 15, 0, 0, 0, 0, 0, 67, 17};
    send(v);
    @(negedge clk);
    checks++;
    if (!(out_valid && out_is_mask && out_data == 9'b110000010)) begin
      failures++; $display("example: first beat %b (mask=%0d)", out_data, out_is_mask);
    end
    wait (nrecv == 1);
    checks++;
    if (bits_sent != 33) begin failures++; $display("example: %0d bits, expected 33", bits_sent); end
    // throughput: a lone group of n nonzero psums occupies the output for 1 + n cycles
    for (int n = 0; n <= S; n++) begin
      automatic int busy_cycles = 0;
      for (int s = 0; s < S; s++) v[s] = (s < n) ? s + 1 : 0;
      wait (nrecv == ngroups);
      @(negedge clk);
      for (int s = 0; s < S; s++) in_psum[s] = W'(v[s]);
      in_valid = 1'b1;
      force out_ready = 1'b1;
      @(posedge clk);
      for (int s = 0; s < S; s++) sent.push_back(v[s]);
      ngroups++;
      #0.1 in_valid = 1'b0;
      while (out_valid) begin busy_cycles++; @(posedge clk); #0.1; end
      release out_ready;
      checks++;
      if (busy_cycles != 1 + n) begin failures++; $display("%0d nonzero: %0d beats", n, busy_cycles); end
    end
    // random groups
    for (int t = 0; t < 400; t++) begin
      automatic int zp = $urandom_range(100);
      for (int s = 0; s < S; s++) v[s] = ($urandom_range(99) < zp) ? 0 : 1 + $urandom_range(254);
      send(v);
    end
    wait (nrecv == ngroups);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
