// tb_ima_ramp_gen -- self-checking test of the reference-row pulse generator (30 rows).
//
// For each resolution 1..5 bits and a random step table, the test counts the RWLN cycles
// of every reference row after calib_start and the RWLP cycles after each step_start.
// Expected: step k pulses only row (k-1) mod 30, for h[k-1] cycles, starting in the cycle
// after step_start; the calibration width of a row is the sum of its ramp pulses.
`timescale 1ns/1ps
module tb_ima_ramp_gen;
  import cadc_pkg::*;

  localparam int REF = 30;

  logic clk = 1'b0;
  logic rst_n = 1'b1;
  initial #0.25 rst_n = 1'b0;   // an edge, so that the asynchronous resets act
  always #0.5 clk = ~clk;

  logic [2:0]                        adc_bits = 3'd1;
  step_h_t                           step_h [MAX_STEPS];
  logic                              calib_start = 1'b0;
  logic                              step_start = 1'b0;
  logic [$clog2(MAX_STEPS+1)-1:0]    step_idx = '0;
  logic [REF-1:0]                    rwlp_ref, rwln_ref;
  logic                              calib_busy;

  ima_ramp_gen #(.REF(REF)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < MAX_STEPS; k++) step_h[k] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 15; t++) begin
      automatic int bits = 1 + (t % 5);
      automatic int r = (1 << bits) - 1;
      automatic int cal [REF], exp_cal [REF];
      @(negedge clk);
      adc_bits = 3'(bits);
      for (int k = 0; k < MAX_STEPS; k++) step_h[k] = step_h_t'($urandom_range(15));
      for (int j = 0; j < REF; j++) begin cal[j] = 0; exp_cal[j] = 0; end
      for (int k = 1; k <= r; k++) exp_cal[(k - 1) % REF] += int'(step_h[k-1]);
      calib_start = 1'b1;
      @(negedge clk);
      calib_start = 1'b0;
      for (int c = 0; c < 40; c++) begin
        for (int j = 0; j < REF; j++) cal[j] += rwln_ref[j];
        checks++;
        if (rwlp_ref != '0) begin failures++; $display("RWLP during calibration"); end
        @(negedge clk);
      end
      for (int j = 0; j < REF; j++) begin
        checks++;
        if (cal[j] != exp_cal[j]) begin
          failures++;
          $display("bits=%0d row %0d calibration %0d cycles, expected %0d", bits, j, cal[j], exp_cal[j]);
        end
      end
      for (int k = 1; k <= r; k++) begin
        automatic int pw [REF];
        automatic int first = -1;
        for (int j = 0; j < REF; j++) pw[j] = 0;
        step_start = 1'b1;
        step_idx = 5'(k);
        @(negedge clk);
        step_start = 1'b0;
        for (int c = 0; c < 16; c++) begin
          for (int j = 0; j < REF; j++) pw[j] += rwlp_ref[j];
          if (rwlp_ref != '0 && first < 0) first = c;
          @(negedge clk);
        end
        for (int j = 0; j < REF; j++) begin
          automatic int e = (j == (k - 1) % REF) ? int'(step_h[k-1]) : 0;
          checks++;
          if (pw[j] != e) begin
            failures++;
            $display("bits=%0d step %0d row %0d: %0d cycles, expected %0d", bits, k, j, pw[j], e);
          end
        end
        if (step_h[k-1] != 0) begin
          checks++;
          if (first != 0) begin failures++; $display("step %0d starts at %0d", k, first); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
