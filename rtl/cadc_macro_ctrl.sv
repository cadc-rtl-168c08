// cadc_macro_ctrl -- sequencer of one macro operation: precharge, compute, ramp, read-out.
//
// Time is divided into slots of one IMA clock period (STEP_CYCLES = 16 cycles of the
// 1 GHz PWM clock, i.e. 62.5 MHz). One operation is
//   PCH   PCH_SLOTS slots   bit lines precharged (dV = 0)
//   COMP  COMP_SLOTS slots  PWM inputs on the MAC rows and calibration pulses on the
//                           reference rows, applied concurrently
//   RAMP  R slots           one ramp step per slot; the sense amplifiers fire in the last
//                           cycle of the slot and the output counters count one cycle later
//   FIN   1 cycle           last count
// pwm_start (which also starts calibration) is given in the last PCH cycle and each
// step_start in the last cycle of the slot before its step, so every pulse begins on the
// first cycle of its slot. `done` is a one-cycle pulse in the cycle after FIN, when the
// codes are stable: it comes (PCH_SLOTS + COMP_SLOTS + R) * STEP_CYCLES + 2 cycles after
// the cycle that accepted `start`. `start` is accepted only while idle.
// The phase order follows the macro's timing diagram; slot counts and single-clock
// operation with a 1-in-16 IMA slot are this design's choices.
module cadc_macro_ctrl
  import cadc_pkg::*;
#(
  parameter int unsigned SLOT_CYCLES = STEP_CYCLES,
  parameter int unsigned PCH_SLOTS   = 1,
  parameter int unsigned COMP_SLOTS  = 2,
  parameter int unsigned NSTEP       = MAX_STEPS
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [2:0]                  adc_bits,
  output logic                        busy,
  output logic                        pch,
  output logic                        pwm_start,
  output logic                        step_start,
  output logic [$clog2(NSTEP+1)-1:0]  step_idx,
  output logic                        sa_sample,
  output logic                        cnt_clear,
  output logic                        cnt_en,
  output logic                        done
);

  typedef enum logic [2:0] {S_IDLE, S_PCH, S_COMP, S_RAMP, S_FIN} state_e;

  localparam int unsigned CYC_BITS  = $clog2(SLOT_CYCLES);
  localparam int unsigned STEP_BITS = $clog2(NSTEP + 1);

  state_e                state;
  logic [CYC_BITS-1:0]   cyc;
  logic [7:0]            slot;
  logic [STEP_BITS-1:0]  step;      // step in progress during RAMP (1..R)
  logic [STEP_BITS-1:0]  nsteps;
  logic                  slot_end;

  assign nsteps   = STEP_BITS'(ramp_steps(adc_bits));
  assign slot_end = (cyc == CYC_BITS'(SLOT_CYCLES - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      cyc    <= '0;
      slot   <= '0;
      step   <= '0;
      cnt_en <= 1'b0;
      done   <= 1'b0;
    end else begin
      cnt_en <= sa_sample;
      done   <= (state == S_FIN);
      case (state)
        S_IDLE: if (start) begin
          state <= S_PCH;
          cyc   <= '0;
          slot  <= '0;
        end
        S_PCH, S_COMP: begin
          cyc <= cyc + 1'b1;
          if (slot_end) begin
            if (state == S_PCH && slot == 8'(PCH_SLOTS - 1)) begin
              state <= S_COMP;
              slot  <= '0;
            end else if (state == S_COMP && slot == 8'(COMP_SLOTS - 1)) begin
              state <= S_RAMP;
              step  <= STEP_BITS'(1);
            end else begin
              slot <= slot + 1'b1;
            end
          end
        end
        S_RAMP: begin
          cyc <= cyc + 1'b1;
          if (slot_end) begin
            if (step == nsteps) state <= S_FIN;
            else                step  <= step + 1'b1;
          end
        end
        S_FIN:   state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy       = (state != S_IDLE);
    pch        = (state == S_PCH);
    pwm_start  = (state == S_PCH) && slot_end && (slot == 8'(PCH_SLOTS - 1));
    cnt_clear  = (state == S_IDLE) && start;
    sa_sample  = (state == S_RAMP) && slot_end;
    step_start = 1'b0;
    step_idx   = '0;
    if (state == S_COMP && slot_end && slot == 8'(COMP_SLOTS - 1)) begin
      step_start = 1'b1;
      step_idx   = STEP_BITS'(1);
    end else if (state == S_RAMP && slot_end && step != nsteps) begin
      step_start = 1'b1;
      step_idx   = step + 1'b1;
    end
  end

endmodule
