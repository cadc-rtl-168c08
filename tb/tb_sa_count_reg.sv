// tb_sa_count_reg -- self-checking test of the output registers (8 columns, 5-bit codes).
//
// Random sense-amplifier patterns with random count enables and occasional clears; every
// code is compared each cycle with counters kept here.
`timescale 1ns/1ps
module tb_sa_count_reg;
  import cadc_pkg::*;

  localparam int NCOL = 8;

  logic clk = 1'b0;
  logic rst_n = 1'b1;
  initial #0.25 rst_n = 1'b0;   // an edge, so that the asynchronous resets act
  always #0.5 clk = ~clk;

  logic                    clear = 1'b0, cnt_en = 1'b0;
  logic [NCOL-1:0]         sa = '0;
  logic [ADC_MAX_BITS-1:0] code [NCOL];

  sa_count_reg #(.NCOL(NCOL)) dut (.*);

  int checks = 0, failures = 0;
  int model [NCOL];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < NCOL; c++) model[c] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 500; t++) begin
      // 31 counts at most between clears, as in a 5-bit conversion
      clear  = (t % 31 == 0);
      cnt_en = !clear && $urandom_range(1);
      sa     = NCOL'($urandom);
      for (int c = 0; c < NCOL; c++) begin
        if (clear) model[c] = 0;
        else if (cnt_en && sa[c]) model[c]++;
      end
      @(negedge clk);
      for (int c = 0; c < NCOL; c++) begin
        checks++;
        if (int'(code[c]) != model[c]) begin
          failures++;
          $display("cycle %0d col %0d: %0d expected %0d", t, c, code[c], model[c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
