// rwl_pwm_driver -- read-word-line drivers of the MAC rows: signed input to PWM pulse.
//
// The twin-9T cell takes the sign of its input from which word line is pulsed (RWLP for a
// positive input, RWLN for a negative one) and the magnitude from how long the pulse lasts
// (pulse-width modulation on the 1 GHz clock). On `start` the driver captures one signed
// IN_BITS-bit input per row; from the next cycle on, row i holds RWLP (x>0) or RWLN (x<0)
// high for exactly |x[i]| cycles, then low. A zero input pulses neither line.
// All pulses start together and the driver is busy for 2^(IN_BITS-1) cycles, the width of
// the largest magnitude (8 for 4-bit two's-complement inputs, whose range is -8..7).
// Two's-complement coding of the input and the common start of all pulses are choices of
// this design; the circuit description only fixes polarity by word line and value by width.
module rwl_pwm_driver
  import cadc_pkg::*;
#(
  parameter int unsigned ROWS = MAC_ROWS,
  parameter int unsigned IB   = IN_BITS
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic signed [IB-1:0]  x [ROWS],
  output logic [ROWS-1:0]       rwlp,
  output logic [ROWS-1:0]       rwln,
  output logic                  busy
);

  localparam int unsigned TMAX = 1 << (IB - 1);   // longest pulse, |-2^(IB-1)|

  logic [IB-1:0]         mag [ROWS];
  logic [ROWS-1:0]       neg;
  logic [IB-1:0]         t;
  logic                  run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0;
      t   <= '0;
    end else if (start) begin
      run <= 1'b1;
      t   <= '0;
    end else if (run) begin
      t   <= t + 1'b1;
      if (t == IB'(TMAX - 1)) run <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (start) begin
      for (int i = 0; i < ROWS; i++) begin
        neg[i] <= x[i][IB-1];
        mag[i] <= x[i][IB-1] ? IB'(-x[i]) : IB'(x[i]);
      end
    end
  end

  always_comb begin
    for (int i = 0; i < ROWS; i++) begin
      rwlp[i] = run && !neg[i] && (t < mag[i]);
      rwln[i] = run &&  neg[i] && (t < mag[i]);
    end
  end

  assign busy = run;

endmodule
