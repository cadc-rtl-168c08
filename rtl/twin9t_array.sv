// twin9t_array -- behavioural model of the twin-9T SRAM crossbar with its IMA reference rows.
// (Behavioural model: the real part is an analog full-custom array. This model reproduces
// its function cycle by cycle in integer units; it is written so that the tools accept it.)
//
// Each bit cell stores a ternary weight {V_L,V_R} (-1 = {L,H}, 0 = {L,L}, +1 = {H,L}) and has
// a decoupled read path that discharges RBLL or RBLR while its row's RWLP (positive input) or
// RWLN (negative input) is high. The product table of the cell is input x weight:
// +1 means dV = V_RBLR - V_RBLL rises by one step, -1 that it falls, 0 no change.
// The model counts dV per column in "unit discharges": one cell conducting for one cycle of
// the 1 GHz PWM clock. A PWM pulse of |x| cycles on a row therefore adds x*w to every column,
// and the dV of a column after the compute phase is the MAC sum_i x[i]*w[i][k].
//
// Rows 0..ROWS-1 hold the weights. Rows ROWS..ROWS+REF-1 are the IMA reference rows; every
// reference cell stores +1, so a pulse on RWLN of a reference row lowers dV (this sets the
// ramp start V_init) and a pulse on RWLP raises it (one ramp step).
//
// Interface and timing:
//   we/waddr/wdata  write one weight row (all COLS cells) at the clock edge.
//   pch             precharge: both RBLs are restored, dV of every column returns to 0.
//   rwlp/rwln       word-line levels of all ROWS+REF rows; a row must not have both high.
//   dv              dV of every column, updated at each clock edge by the rows high then.
// The reference cells are fixed at +1 here (the weight port addresses only the MAC rows);
// the original writes them like any SRAM cell, which this model does not need.
module twin9t_array
  import cadc_pkg::*;
#(
  parameter int unsigned ROWS = MAC_ROWS,
  parameter int unsigned NCOL = COLS,
  parameter int unsigned REF  = REF_ROWS
) (
  input  logic                        clk,
  input  logic                        we,
  input  logic [$clog2(ROWS)-1:0]     waddr,
  input  logic [NCOL-1:0][1:0]        wdata,
  input  logic                        pch,
  input  logic [ROWS+REF-1:0]         rwlp,
  input  logic [ROWS+REF-1:0]         rwln,
  output dv_t                         dv [NCOL]
);

  // Weights kept as two bit planes per column: the +1 cells and the -1 cells
  logic [ROWS-1:0] wpos [NCOL];
  logic [ROWS-1:0] wneg [NCOL];
  dv_t             delta [NCOL];
  dv_t             ref_delta;

  // Reference rows: all cells +1, so every column sees the same change
  always_comb begin
    ref_delta = dv_t'($countones(rwlp[ROWS+REF-1:ROWS])) - dv_t'($countones(rwln[ROWS+REF-1:ROWS]));
  end

  // MAC rows: a cell moves dV up when input and weight have the same sign, down otherwise
  always_comb begin
    for (int c = 0; c < NCOL; c++) begin
      delta[c] = ref_delta
               + dv_t'($countones(rwlp[ROWS-1:0] & wpos[c])) + dv_t'($countones(rwln[ROWS-1:0] & wneg[c]))
               - dv_t'($countones(rwlp[ROWS-1:0] & wneg[c])) - dv_t'($countones(rwln[ROWS-1:0] & wpos[c]));
    end
  end

  always_ff @(posedge clk) begin
    if (we) begin
      for (int c = 0; c < NCOL; c++) begin
        wpos[c][waddr] <= (wdata[c] == W_POS);
        wneg[c][waddr] <= (wdata[c] == W_NEG);
      end
    end
    for (int c = 0; c < NCOL; c++) begin
      if (pch) dv[c] <= '0;
      else     dv[c] <= dv[c] + delta[c];
    end
    // A row never drives both word lines: that input state is not in the cell's table
    assert ((rwlp & rwln) == '0)
      else $error("twin9t_array: RWLP and RWLN both high on a row");
  end

endmodule
