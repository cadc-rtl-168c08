// tb_cadc_fig2 -- the worked example of a dendritic convolution: a 64 x 3 x 3 x 64 kernel
// split over nine 64 x 64 crossbars, so every output channel has nine psums.
//
// Random ternary weights (one third zero) and random signed 4-bit inputs are run through
// the engine four times with a 4-bit ADC: once with ReLU steps and once each with step
// tables that approximate the sublinear (sqrt), supralinear (k x^2) and tanh shapes of
// f(). Every output channel is compared with a reference computed here (per-crossbar MAC,
// ramp-ADC transfer, sum over crossbars), as are the number of psum beats (one mask plus
// one per nonzero psum) and of accumulator additions (nonzero psums - 1 per channel).
`timescale 1ns/1ps
module tb_cadc_fig2;
  import cadc_pkg::*;

  localparam int NSEG = 9;
  localparam int ROWS = 64;
  localparam int NCOL = 64;
  localparam int PW   = ADC_MAX_BITS;
  localparam int YW   = PW + $clog2(NSEG);

  logic clk = 1'b0;
  logic rst_n = 1'b1;
  initial #0.25 rst_n = 1'b0;   // an edge, so that the asynchronous resets act
  always #0.5 clk = ~clk;

  logic                       w_we = 1'b0;
  logic [$clog2(NSEG)-1:0]    w_seg = '0;
  logic [$clog2(ROWS)-1:0]    w_row = '0;
  logic [NCOL-1:0][1:0]       w_data = '0;
  logic [2:0]                 adc_bits = 3'd4;
  step_h_t                    step_h [MAX_STEPS];
  logic                       start = 1'b0;
  logic signed [IN_BITS-1:0]  x [NSEG][ROWS];
  logic                       busy, done;
  logic                       y_valid, y_ready = 1'b1;
  logic [$clog2(NCOL)-1:0]    y_col;
  logic [YW-1:0]              y;

  cadc_top #(.NSEG(NSEG), .ROWS(ROWS), .NCOL(NCOL)) dut (.*);

  int checks = 0, failures = 0;
  byte wval [NSEG][ROWS][NCOL];
  int  exp_y [NCOL];
  int  nrecv = 0;
  bit  backpressure = 1'b0;

  // mechanism counters
  int n_clamped = 0, n_saturated = 0, n_zero_group = 0, n_full_group = 0, n_partial_group = 0;
  int n_buf_full = 0, n_y_stall = 0, n_adds = 0, n_beats = 0, n_nonlinear = 0;
  int exp_adds = 0, exp_beats = 0;
  int bits_seen [6];

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (dut.add_fire) n_adds++;
    if (dut.b_valid && dut.b_ready) n_beats++;
    if (dut.b_valid && !dut.b_ready) n_buf_full++;
    if (y_valid && !y_ready) n_y_stall++;
    if (y_valid && y_ready) begin
      checks++;
      if (int'(y) != exp_y[y_col]) begin
        failures++;
        $display("channel %0d: y=%0d expected %0d", y_col, y, exp_y[y_col]);
      end
      checks++;
      if (int'(y_col) != nrecv) begin failures++; $display("channel order: %0d after %0d results", y_col, nrecv); end
      nrecv++;
    end
  end

  always @(negedge clk) y_ready <= backpressure ? ($urandom_range(3) == 0) : 1'b1;

  function automatic int ramp_code(int mac, int bits);
    int r = (1 << bits) - 1;
    int code = 0;
    for (int k = 1; k <= r; k++) begin
      int thr = 0;
      for (int j = k + 1; j <= r; j++) thr += int'(step_h[j-1]);
      if (mac > thr) code++;
    end
    return code;
  endfunction

  task automatic write_weights(input int zero_pct);
    for (int s = 0; s < NSEG; s++) begin
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        for (int c = 0; c < NCOL; c++) begin
          int v = ($urandom_range(99) < zero_pct) ? 0 : ($urandom_range(1) ? 1 : -1);
          wval[s][r][c] = byte'(v);
          w_data[c] = (v == 1) ? 2'b10 : (v == -1) ? 2'b01 : 2'b00;
        end
        w_we = 1'b1; w_seg = ($clog2(NSEG))'(s); w_row = ($clog2(ROWS))'(r);
      end
    end
    @(negedge clk); w_we = 1'b0;
  endtask

  // one operation: bias > 0 shifts the inputs positive (fewer clamped psums)
  task automatic run_op(input int bits, input bit uniform, input int h, input int bias);
    int r = (1 << bits) - 1;
    int cyc = 0;
    @(negedge clk);
    // uniform: every step h; otherwise h = 0 draws a random table and h > 0 keeps the
    // table the caller has set
    for (int k = 0; k < MAX_STEPS; k++)
      step_h[k] = uniform ? step_h_t'(h) : (h == 0) ? step_h_t'(1 + $urandom_range(14)) : step_h[k];
    if (!uniform) n_nonlinear++;
    bits_seen[bits]++;
    for (int s = 0; s < NSEG; s++)
      for (int i = 0; i < ROWS; i++) begin
        int v = int'($urandom_range(15)) - 8 + bias;
        if (v > 7) v = 7;
        x[s][i] = IN_BITS'(v);
      end
    for (int c = 0; c < NCOL; c++) begin
      int nnz = 0;
      exp_y[c] = 0;
      for (int s = 0; s < NSEG; s++) begin
        int mac = 0;
        int code;
        for (int i = 0; i < ROWS; i++) mac += int'(x[s][i]) * int'(wval[s][i][c]);
        code = ramp_code(mac, bits);
        if (mac <= 0) n_clamped++;
        if (code == r) n_saturated++;
        if (code != 0) nnz++;
        exp_y[c] += code;
      end
      if (nnz == 0) n_zero_group++;
      else if (nnz == NSEG) n_full_group++;
      else n_partial_group++;
      exp_adds += (nnz > 0) ? nnz - 1 : 0;
      exp_beats += 1 + nnz;
    end
    nrecv = 0;
    adc_bits = 3'(bits);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (nrecv != NCOL) begin failures++; $display("%0d results, expected %0d", nrecv, NCOL); end
    // the macro phase alone is (3 + R) * 16 + 2 cycles; the scan adds one beat per
    // mask and per nonzero psum
    checks++;
    if (cyc < (3 + r) * 16 + 2) begin failures++; $display("operation took only %0d cycles", cyc); end
  endtask

  task automatic expect_seen(input string what, input int n);
    checks++;
    if (n == 0) begin failures++; $display("mechanism never exercised: %s", what); end
    else $display("  %-34s %0d", what, n);
  endtask

  initial begin
    for (int k = 0; k < MAX_STEPS; k++) step_h[k] = step_h_t'(1);
    for (int s = 0; s < NSEG; s++) for (int i = 0; i < ROWS; i++) x[s][i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    write_weights(33);
    run_op(4, 1'b1, 1, 0);       // ReLU, one LSB per code
    // sqrt-like: the bin of code c is 2c-1 wide (clipped), so larger psums are compressed
    for (int k = 1; k <= 15; k++) step_h[k-1] = step_h_t'((2 * (16 - k) - 1 > 15) ? 15 : 2 * (16 - k) - 1);
    run_op(4, 1'b0, 1, 0);
    // k*x^2-like: bins shrink as the code grows
    for (int k = 1; k <= 15; k++) step_h[k-1] = step_h_t'((16 - 2 * (16 - k) < 1) ? 1 : 16 - 2 * (16 - k));
    run_op(4, 1'b0, 1, 0);
    // tanh-like: bins widen quickly, so the top codes need large psums
    for (int k = 1; k <= 15; k++) step_h[k-1] = step_h_t'(((16 - k) / 3 > 3) ? 15 : (1 << ((16 - k) / 3)));
    run_op(4, 1'b0, 1, 0);
    checks++;
    if (n_adds != exp_adds) begin failures++; $display("additions %0d, expected %0d", n_adds, exp_adds); end
    checks++;
    if (n_beats != exp_beats) begin failures++; $display("beats %0d, expected %0d", n_beats, exp_beats); end
    $display("mechanisms:");
    expect_seen("psum clamped to zero by f()", n_clamped);
    expect_seen("partly zero group", n_partial_group);
    expect_seen("zero-skipped accumulation adds", n_adds);
    expect_seen("nonlinear step table", n_nonlinear);
    $display("  %-34s %0d", "all-zero group (mask only)", n_zero_group);
    $display("  %-34s %0d of %0d", "psum beats against uncompressed", n_beats, 4 * NCOL * NSEG);
    $display("  psum beats in all operations %0d", n_beats);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
