// sa_count_reg -- output registers of the macro: the IMA code of every column.
//
// A ramp ADC's result is the number of ramp steps after which the sense amplifier saw
// dV > 0. This block holds one CW-bit counter per column; `clear` zeroes all of them at the
// start of an operation, and in each cycle with `cnt_en` every column whose sense-amplifier
// output is 1 counts up by one. After the last step the counters hold the codes, which stay
// until the next `clear`. With at most 2^CW - 1 steps a counter cannot overflow.
module sa_count_reg
  import cadc_pkg::*;
#(
  parameter int unsigned NCOL = COLS,
  parameter int unsigned CW   = ADC_MAX_BITS
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clear,
  input  logic            cnt_en,
  input  logic [NCOL-1:0] sa,
  output logic [CW-1:0]   code [NCOL]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NCOL; k++) code[k] <= '0;
    end else if (clear) begin
      for (int k = 0; k < NCOL; k++) code[k] <= '0;
    end else if (cnt_en) begin
      for (int k = 0; k < NCOL; k++) code[k] <= code[k] + CW'(sa[k]);
    end
  end

endmodule
