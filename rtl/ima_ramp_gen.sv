// ima_ramp_gen -- word-line pulses of the 30 IMA reference rows (calibration and ramp).
//
// Every column's in-memory ADC (IMA) is a ramp converter built from reference cells that
// store +1 on the column's own bit lines. During the compute phase, pulses on RWLN of the
// reference rows pull dV = V_RBLR - V_RBLL down to V_init, together with the MAC. Then, once
// per IMA clock period, a pulse on RWLP of one reference row lifts dV by one ramp step, and
// the sense amplifier decides the sign of dV after each step.
//
// Step k (1..R, R = 2^adc_bits - 1) uses reference row (k-1) mod REF and a pulse of
// step_h[k-1] cycles. The calibration pulse of each reference row is exactly as long as the
// ramp pulses that row will later give, so the calibration and the full ramp cancel: after
// the last step dV equals the MAC. The sense amplifier then reports dV > 0 after step k
// exactly when MAC > h[k+1] + ... + h[R], so MAC <= 0 always yields code 0 (the dendritic
// zero clamp), and the step heights set the thresholds of the transfer curve: equal heights
// give ReLU with a step of h, unequal ones a nonlinear f() (sqrt, kx^2, tanh).
//
// Timing: calib_start starts all calibration pulses in the next cycle and calib_busy lasts
// CAL_LEN = 2 x 15 cycles, the longest pulse (a row serving two steps at 5 bits);
// step_start with step_idx starts that step's pulse in the next cycle. step_h and adc_bits
// must stay stable during an operation.
// Reusing row 0 for the 31st step of a 5-bit conversion, the per-step height table and the
// calibration-equals-ramp rule are this design's reading of a circuit whose ramp is
// described by its waveform only.
module ima_ramp_gen
  import cadc_pkg::*;
#(
  parameter int unsigned REF   = REF_ROWS,
  parameter int unsigned NSTEP = MAX_STEPS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [2:0]                    adc_bits,
  input  step_h_t                       step_h [NSTEP],
  input  logic                          calib_start,
  input  logic                          step_start,
  input  logic [$clog2(NSTEP+1)-1:0]    step_idx,
  output logic [REF-1:0]                rwlp_ref,
  output logic [REF-1:0]                rwln_ref,
  output logic                          calib_busy
);

  localparam int unsigned CW_BITS = STEP_H_BITS + $clog2((NSTEP + REF - 1) / REF) + 1;
  localparam int unsigned ROW_BITS = $clog2(REF);
  // Longest calibration pulse: a row serving ceil(NSTEP/REF) steps of maximum height
  localparam int unsigned CAL_LEN  = ((NSTEP + REF - 1) / REF) * ((1 << STEP_H_BITS) - 1);

  logic [CW_BITS-1:0]  cw [REF];      // calibration width of each reference row
  logic [CW_BITS-1:0]  ct;
  logic                crun;
  logic [STEP_H_BITS-1:0] st;
  logic                srun;
  logic [ROW_BITS-1:0] srow;
  step_h_t             sh;
  int unsigned         nsteps;

  always_comb begin
    nsteps = ramp_steps(adc_bits);
    for (int j = 0; j < REF; j++) cw[j] = '0;
    for (int k = 0; k < NSTEP; k++) begin
      if (k < nsteps) cw[k % REF] = cw[k % REF] + CW_BITS'(step_h[k]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      crun <= 1'b0;
      ct   <= '0;
      srun <= 1'b0;
      st   <= '0;
      srow <= '0;
      sh   <= '0;
    end else begin
      if (calib_start) begin
        crun <= 1'b1;
        ct   <= '0;
      end else if (crun) begin
        ct <= ct + 1'b1;
        if (ct == CW_BITS'(CAL_LEN - 1)) crun <= 1'b0;
      end
      if (step_start) begin
        srun <= 1'b1;
        st   <= '0;
        srow <= ROW_BITS'((int'(step_idx) - 1) % REF);
        sh   <= step_h[int'(step_idx) - 1];
      end else if (srun) begin
        st <= st + 1'b1;
        if (st == '1) srun <= 1'b0;
      end
    end
  end

  always_comb begin
    for (int j = 0; j < REF; j++) begin
      rwln_ref[j] = crun && (ct < cw[j]);
      rwlp_ref[j] = srun && (srow == ROW_BITS'(j)) && (st < sh);
    end
  end

  assign calib_busy = crun;

endmodule
