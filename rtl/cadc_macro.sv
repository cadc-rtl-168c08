// cadc_macro -- one CADC crossbar macro: ternary MAC plus in-memory ADC applying f().
//
// The macro multiplies a vector of ROWS signed 4-bit inputs by a ROWS x NCOL matrix of
// ternary weights and converts each column sum with its own ramp ADC built from the same
// array (the IMA). Because the ramp starts below zero by exactly its own full swing, a
// column whose MAC is zero or negative always reads 0: the conversion itself is the
// dendritic function f(), ReLU for equal ramp steps, a nonlinear curve otherwise. The
// psum that leaves the macro is therefore already sparse.
//
// Blocks: rwl_pwm_driver (MAC-row word lines), ima_ramp_gen (reference-row word lines),
// twin9t_array (cells and bit lines), sense_amp_bank (one comparator per column),
// sa_count_reg (output registers), cadc_macro_ctrl (sequencing).
//
// Interface: weights are written one row at a time (we/waddr/wdata, {V_L,V_R} per cell).
// `start` (accepted only when not busy) captures the input vector x, the resolution
// adc_bits (1..5) and the step-height table step_h; `done` pulses
// (3 + 2^adc_bits - 1) * 16 + 2 cycles later and psum then holds each column's code until
// the next start. The ReLU transfer with step height h is
// psum = min(ceil(MAC / h), 2^adc_bits - 1) for MAC > 0 and 0 otherwise.
module cadc_macro
  import cadc_pkg::*;
#(
  parameter int unsigned ROWS = MAC_ROWS,
  parameter int unsigned NCOL = COLS,
  parameter int unsigned REF  = REF_ROWS
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // weight write
  input  logic                        we,
  input  logic [$clog2(ROWS)-1:0]     waddr,
  input  logic [NCOL-1:0][1:0]        wdata,
  // configuration, captured at start
  input  logic [2:0]                  adc_bits,
  input  step_h_t                     step_h [MAX_STEPS],
  // operation
  input  logic                        start,
  input  logic signed [IN_BITS-1:0]   x [ROWS],
  output logic                        busy,
  output logic                        done,
  output logic [ADC_MAX_BITS-1:0]     psum [NCOL]
);

  localparam int unsigned STEP_BITS = $clog2(MAX_STEPS + 1);

  logic [2:0]             bits_q;
  step_h_t                step_h_q [MAX_STEPS];
  logic                   go;
  logic                   pch, pwm_start, step_start, sa_sample, cnt_clear, cnt_en;
  logic [STEP_BITS-1:0]   step_idx;
  logic [ROWS-1:0]        rwlp_mac, rwln_mac;
  logic [REF-1:0]         rwlp_ref, rwln_ref;
  dv_t                    dv [NCOL];
  logic [NCOL-1:0]        sa;
  logic                   pwm_busy, calib_busy;

  assign go = start && !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bits_q <= 3'd4;
      for (int k = 0; k < MAX_STEPS; k++) step_h_q[k] <= step_h_t'(1);
    end else if (go) begin
      bits_q <= adc_bits;
      for (int k = 0; k < MAX_STEPS; k++) step_h_q[k] <= step_h[k];
    end
  end

  // The sequencer sees the new resolution from the cycle after start on; it needs it only
  // from the ramp phase on.
  cadc_macro_ctrl u_ctrl (
    .clk, .rst_n, .start(go), .adc_bits(bits_q), .busy, .pch, .pwm_start, .step_start,
    .step_idx, .sa_sample, .cnt_clear, .cnt_en, .done
  );

  // Inputs are captured at start and replayed as pulses after precharge
  logic signed [IN_BITS-1:0] x_q [ROWS];
  always_ff @(posedge clk) begin
    if (go) x_q <= x;
  end

  rwl_pwm_driver #(.ROWS(ROWS)) u_pwm (
    .clk, .rst_n, .start(pwm_start), .x(x_q), .rwlp(rwlp_mac), .rwln(rwln_mac), .busy(pwm_busy)
  );

  ima_ramp_gen #(.REF(REF)) u_ramp (
    .clk, .rst_n, .adc_bits(bits_q), .step_h(step_h_q), .calib_start(pwm_start),
    .step_start, .step_idx, .rwlp_ref, .rwln_ref, .calib_busy
  );

  twin9t_array #(.ROWS(ROWS), .NCOL(NCOL), .REF(REF)) u_array (
    .clk, .we, .waddr, .wdata, .pch,
    .rwlp({rwlp_ref, rwlp_mac}), .rwln({rwln_ref, rwln_mac}), .dv
  );

  sense_amp_bank #(.NCOL(NCOL)) u_sa (
    .clk, .rst_n, .sample(sa_sample), .dv, .sa
  );

  sa_count_reg #(.NCOL(NCOL), .CW(ADC_MAX_BITS)) u_regs (
    .clk, .rst_n, .clear(cnt_clear), .cnt_en, .sa, .code(psum)
  );

  // Word lines must be quiet before the ramp: all PWM and calibration pulses end within
  // the compute phase.
  always_ff @(posedge clk) begin
    if (sa_sample) assert (!pwm_busy && !calib_busy)
      else $error("cadc_macro: compute pulses still active during the ramp");
  end

endmodule
