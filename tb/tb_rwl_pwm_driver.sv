// tb_rwl_pwm_driver -- self-checking test of the PWM word-line drivers (16 rows).
//
// For random signed 4-bit inputs, the test records every row's word lines after start and
// checks that a positive input gives one RWLP pulse of x cycles, a negative one an RWLN
// pulse of |x| cycles, zero no pulse, that all pulses begin in the cycle after start and
// that busy lasts 8 cycles.
`timescale 1ns/1ps
module tb_rwl_pwm_driver;
  import cadc_pkg::*;

  localparam int ROWS = 16;

  logic clk = 1'b0;
  logic rst_n = 1'b1;
  initial #0.25 rst_n = 1'b0;   // an edge, so that the asynchronous resets act
  always #0.5 clk = ~clk;

  logic                       start = 1'b0;
  logic signed [IN_BITS-1:0]  x [ROWS];
  logic [ROWS-1:0]            rwlp, rwln;
  logic                       busy;

  rwl_pwm_driver #(.ROWS(ROWS)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < ROWS; i++) x[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 50; t++) begin
      automatic int pw [ROWS], nw [ROWS], first [ROWS], last [ROWS];
      automatic int busy_cyc = 0;
      @(negedge clk);
      for (int i = 0; i < ROWS; i++) begin
        x[i] = IN_BITS'($urandom_range(15));
        if (t == 0) x[i] = -4'sd8;
        pw[i] = 0; nw[i] = 0; first[i] = -1; last[i] = -1;
      end
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      for (int cyc = 0; cyc < 12; cyc++) begin
        if (busy) busy_cyc++;
        for (int i = 0; i < ROWS; i++) begin
          if (rwlp[i] && rwln[i]) begin failures++; $display("row %0d both lines", i); end
          if (rwlp[i] || rwln[i]) begin
            if (first[i] < 0) first[i] = cyc;
            last[i] = cyc;
          end
          pw[i] += rwlp[i]; nw[i] += rwln[i];
        end
        @(negedge clk);
      end
      checks++;
      if (busy_cyc != 8) begin failures++; $display("busy %0d cycles", busy_cyc); end
      for (int i = 0; i < ROWS; i++) begin
        automatic int v = int'(x[i]);
        automatic int ep = (v > 0) ? v : 0;
        automatic int en = (v < 0) ? -v : 0;
        checks++;
        if (pw[i] != ep || nw[i] != en) begin
          failures++;
          $display("row %0d x=%0d: RWLP %0d cycles, RWLN %0d cycles", i, v, pw[i], nw[i]);
        end
        if (v != 0) begin
          checks++;
          if (first[i] != 0 || last[i] != ep + en - 1) begin
            failures++;
            $display("row %0d x=%0d: pulse from %0d to %0d", i, v, first[i], last[i]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
