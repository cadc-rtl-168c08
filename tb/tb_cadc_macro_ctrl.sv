// tb_cadc_macro_ctrl -- self-checking test of the macro sequencer.
//
// For each resolution 1..5 bits the test logs every control output cycle by cycle after
// start and checks: precharge for 16 cycles, then pwm_start once in the last precharge
// cycle; R step_starts with indices 1..R, each in the last cycle of a 16-cycle slot, the
// first at the end of the 32-cycle compute phase; R sense-amplifier samples at the end of
// each ramp slot with cnt_en one cycle behind; done (3 + R) * 16 + 2 cycles after start;
// and start ignored while busy.
`timescale 1ns/1ps
module tb_cadc_macro_ctrl;
  import cadc_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b1;
  initial #0.25 rst_n = 1'b0;   // an edge, so that the asynchronous resets act
  always #0.5 clk = ~clk;

  logic        start = 1'b0;
  logic [2:0]  adc_bits = 3'd4;
  logic        busy, pch, pwm_start, step_start, sa_sample, cnt_clear, cnt_en, done;
  logic [$clog2(MAX_STEPS+1)-1:0] step_idx;

  cadc_macro_ctrl dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 10; t++) begin
      automatic int bits = 1 + (t % 5);
      automatic int r = (1 << bits) - 1;
      automatic int n_pch = 0, pwm_at = -1, n_steps = 0, n_samp = 0, done_at = -1, n_clear = 0;
      automatic int bad_step = 0, bad_samp = 0, bad_cnt = 0;
      automatic logic prev_sample = 1'b0;
      @(negedge clk);
      adc_bits = 3'(bits);
      start = 1'b1;
      #0.1;
      // cycle 0 is the cycle that accepts start
      for (int cyc = 0; cyc < 700 && done_at < 0; cyc++) begin
        if (cnt_clear) n_clear++;
        if (pch) n_pch++;
        if (pwm_start) pwm_at = cyc;
        if (step_start) begin
          n_steps++;
          if (int'(step_idx) != n_steps || cyc != 48 + 16 * (n_steps - 1)) bad_step++;
        end
        if (sa_sample) begin
          n_samp++;
          if (cyc != 64 + 16 * (n_samp - 1)) bad_samp++;
        end
        if (cnt_en != prev_sample) bad_cnt++;
        prev_sample = sa_sample;
        if (done) done_at = cyc;
        @(negedge clk);
        start = (cyc == 5);                 // a start while busy must be ignored
        #0.1;
      end
      start = 1'b0;
      expect_eq("cnt_clear pulses", n_clear, 1);
      expect_eq("precharge cycles", n_pch, 16);
      expect_eq("pwm_start cycle", pwm_at, 16);
      expect_eq("step starts", n_steps, r);
      expect_eq("misplaced step starts", bad_step, 0);
      expect_eq("sense-amp samples", n_samp, r);
      expect_eq("misplaced samples", bad_samp, 0);
      expect_eq("cnt_en not one cycle after sample", bad_cnt, 0);
      expect_eq("done cycle", done_at, (3 + r) * 16 + 2);
      @(negedge clk);
      expect_eq("idle after done", int'(busy), 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
