// cadc_pkg -- types and constants shared by the CADC macro and its digital back end.
//
// The macro is a 256x256 crossbar of twin-9T SRAM cells holding ternary weights, with
// 30 extra rows of reference cells that turn every column into an in-memory ramp ADC
// (IMA). The numbers below are the macro's: array size, reference rows, 4-bit inputs,
// a 1-5 bit IMA and a 16:1 ratio between the 1 GHz PWM clock and the 62.5 MHz IMA clock.
// The weight encoding {V_L, V_R} is the one of the twin-9T bit cell table.
// Widths of the internal charge counter and of a ramp-step height are choices of this
// design, not of the original circuit, which is analog.
package cadc_pkg;

  // Array geometry
  localparam int unsigned MAC_ROWS     = 256;  // rows holding weights (RWLP/N0..255)
  localparam int unsigned COLS         = 256;  // columns, one RBL pair and one IMA each
  localparam int unsigned REF_ROWS     = 30;   // IMA reference rows (RWLP/N256..285)

  // Precision
  localparam int unsigned IN_BITS      = 4;    // signed PWM input
  localparam int unsigned ADC_MAX_BITS = 5;    // IMA resolution is 1..5 bits
  localparam int unsigned MAX_STEPS    = (1 << ADC_MAX_BITS) - 1;  // 31 ramp steps at 5 bits

  // Timing: one IMA step lasts STEP_CYCLES cycles of the 1 GHz PWM clock (62.5 MHz)
  localparam int unsigned STEP_CYCLES  = 16;
  localparam int unsigned STEP_H_BITS  = 4;    // height of one ramp step, in unit pulses (< STEP_CYCLES)

  // Differential bit-line voltage, counted in unit discharges (one cell, one PWM cycle)
  localparam int unsigned DV_BITS      = 16;
  typedef logic signed [DV_BITS-1:0] dv_t;

  // Ternary weight as stored in the 6T core: {V_L, V_R}
  typedef enum logic [1:0] {
    W_ZERO = 2'b00,   // V_L=L, V_R=L
    W_NEG  = 2'b01,   // V_L=L, V_R=H : -1
    W_POS  = 2'b10    // V_L=H, V_R=L : +1
  } tern_w_e;

  // Height of one ramp step in unit pulses
  typedef logic [STEP_H_BITS-1:0] step_h_t;

  // Value of a stored ternary weight: -1, 0 or +1 ({H,H} is never written; it reads as 0)
  function automatic int signed tern_value(logic [1:0] w);
    case (w)
      2'b10:   return 1;
      2'b01:   return -1;
      default: return 0;
    endcase
  endfunction

  // Number of ramp steps of an n-bit IMA
  function automatic int unsigned ramp_steps(logic [2:0] adc_bits);
    return (1 << adc_bits) - 1;
  endfunction

endpackage
