// sense_amp_bank -- behavioural model of the column sense amplifiers (one per column).
// (Behavioural model: the real part is a clocked analog comparator on each RBL pair.)
//
// Each amplifier has RBLR on its + input and RBLL on its - input, so it decides whether
// dV = V_RBLR - V_RBLL is above zero. It fires once per IMA step, on `sample`, and holds
// its decision in `sa` until the next firing: sa[k] = 1 when dV of column k is > 0.
// A dV of exactly zero reads as 0, so a column whose MAC is zero produces code 0.
module sense_amp_bank
  import cadc_pkg::*;
#(
  parameter int unsigned NCOL = COLS
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            sample,
  input  dv_t             dv [NCOL],
  output logic [NCOL-1:0] sa
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sa <= '0;
    else if (sample) begin
      for (int k = 0; k < NCOL; k++) sa[k] <= (dv[k] > 0);
    end
  end

endmodule
