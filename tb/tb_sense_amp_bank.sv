// tb_sense_amp_bank -- self-checking test of the sense-amplifier model (8 columns).
//
// Random dV values, many of them -1, 0 or +1, are presented; on `sample` each output must
// become (dV > 0), and without `sample` the outputs must hold their last decision.
`timescale 1ns/1ps
module tb_sense_amp_bank;
  import cadc_pkg::*;

  localparam int NCOL = 8;

  logic clk = 1'b0;
  logic rst_n = 1'b1;
  initial #0.25 rst_n = 1'b0;   // an edge, so that the asynchronous resets act
  always #0.5 clk = ~clk;

  logic            sample = 1'b0;
  dv_t             dv [NCOL];
  logic [NCOL-1:0] sa;

  sense_amp_bank #(.NCOL(NCOL)) dut (.*);

  int checks = 0, failures = 0;
  logic [NCOL-1:0] model;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < NCOL; c++) dv[c] = '0;
    model = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      for (int c = 0; c < NCOL; c++)
        dv[c] = $urandom_range(1) ? dv_t'(int'($urandom_range(2)) - 1) : dv_t'($urandom);
      sample = ($urandom_range(2) != 0);
      if (sample) for (int c = 0; c < NCOL; c++) model[c] = (int'(dv[c]) > 0);
      @(negedge clk);
      checks++;
      if (sa != model) begin
        failures++;
        $display("cycle %0d: sa=%b expected %b", t, sa, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
