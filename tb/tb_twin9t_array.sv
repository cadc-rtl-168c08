// tb_twin9t_array -- self-checking test of the bit-cell array model (16 rows x 8 columns).
//
// Random ternary weights are written; then random word-line patterns (RWLP or RWLN or
// neither per row, MAC and reference rows alike) are applied cycle by cycle and the
// column voltages dV are compared with a running sum kept here from the cell's product
// table: input (+1 on RWLP, -1 on RWLN) times weight, reference cells counting as +1.
// Precharge must return every column to 0.
`timescale 1ns/1ps
module tb_twin9t_array;
  import cadc_pkg::*;

  localparam int ROWS = 16;
  localparam int NCOL = 8;
  localparam int REF  = 30;

  logic clk = 1'b0;
  always #0.5 clk = ~clk;

  logic                    we = 1'b0;
  logic [$clog2(ROWS)-1:0] waddr = '0;
  logic [NCOL-1:0][1:0]    wdata = '0;
  logic                    pch = 1'b1;
  logic [ROWS+REF-1:0]     rwlp = '0, rwln = '0;
  dv_t                     dv [NCOL];

  twin9t_array #(.ROWS(ROWS), .NCOL(NCOL), .REF(REF)) dut (.*);

  int checks = 0, failures = 0;
  int wval [ROWS][NCOL];
  int model [NCOL];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all(input string what);
    for (int c = 0; c < NCOL; c++) begin
      checks++;
      if (int'(dv[c]) != model[c]) begin
        failures++;
        $display("%s: col %0d dV=%0d expected %0d", what, c, dv[c], model[c]);
      end
    end
  endtask

  initial begin
    for (int c = 0; c < NCOL; c++) model[c] = 0;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      for (int c = 0; c < NCOL; c++) begin
        automatic int v = int'($urandom_range(2)) - 1;
        wval[r][c] = v;
        wdata[c] = (v == 1) ? 2'b10 : (v == -1) ? 2'b01 : 2'b00;
      end
      we = 1'b1; waddr = r[$clog2(ROWS)-1:0];
    end
    @(negedge clk); we = 1'b0; pch = 1'b0;
    for (int t = 0; t < 400; t++) begin
      // apply a pattern for one cycle
      for (int r = 0; r < ROWS + REF; r++) begin
        automatic int p = $urandom_range(3);
        rwlp[r] = (p == 1);
        rwln[r] = (p == 2);
      end
      if (t % 50 == 49) begin
        pch = 1'b1;
        for (int c = 0; c < NCOL; c++) model[c] = 0;
      end else begin
        for (int c = 0; c < NCOL; c++) begin
          for (int r = 0; r < ROWS + REF; r++) begin
            automatic int w = (r < ROWS) ? wval[r][c] : 1;
            automatic int in = rwlp[r] ? 1 : rwln[r] ? -1 : 0;
            model[c] += in * w;
          end
        end
      end
      @(negedge clk);
      pch = 1'b0;
      check_all(pch ? "precharge" : "mac");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
