// tb_cadc_macro -- self-checking test of one CADC macro (reduced to 32 rows x 8 columns).
//
// Random ternary weights and signed 4-bit inputs; every operation's codes are compared with
// a reference computed here: MAC = sum x*w per column, then the ramp-ADC transfer
// code = #{k in 1..R : MAC > h[k+1] + ... + h[R]}, and for equal steps also with the ReLU
// form min(ceil(MAC/h), R). Resolutions 1..5 bits, equal (ReLU) and unequal (nonlinear)
// step tables, saturation, all-negative and all-zero columns are covered, and the latency
// (3 + R) * 16 + 2 cycles from start to done is checked.
`timescale 1ns/1ps
module tb_cadc_macro;
  import cadc_pkg::*;

  localparam int ROWS = 32;
  localparam int NCOL = 8;

  logic clk = 1'b0;
  logic rst_n = 1'b1;
  initial #0.25 rst_n = 1'b0;   // an edge, so that the asynchronous resets act
  always #0.5 clk = ~clk;

  logic                       we = 1'b0;
  logic [$clog2(ROWS)-1:0]    waddr = '0;
  logic [NCOL-1:0][1:0]       wdata = '0;
  logic [2:0]                 adc_bits = 3'd4;
  step_h_t                    step_h [MAX_STEPS];
  logic                       start = 1'b0;
  logic signed [IN_BITS-1:0]  x [ROWS];
  logic                       busy, done;
  logic [ADC_MAX_BITS-1:0]    psum [NCOL];

  cadc_macro #(.ROWS(ROWS), .NCOL(NCOL)) dut (.*);

  int checks = 0, failures = 0;
  int wval [ROWS][NCOL];
  int n_neg = 0, n_sat = 0, n_mid = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ramp_code(int mac, int bits);
    automatic int r = (1 << bits) - 1;
    automatic int code = 0;
    for (int k = 1; k <= r; k++) begin
      automatic int thr = 0;
      for (int j = k + 1; j <= r; j++) thr += int'(step_h[j-1]);
      if (mac > thr) code++;
    end
    return code;
  endfunction

  task automatic write_weights(input int zero_pct);
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      for (int c = 0; c < NCOL; c++) begin
        automatic int v = ($urandom_range(99) < zero_pct) ? 0 : ($urandom_range(1) ? 1 : -1);
        wval[r][c] = v;
        wdata[c] = (v == 1) ? 2'b10 : (v == -1) ? 2'b01 : 2'b00;
      end
      we = 1'b1; waddr = r[$clog2(ROWS)-1:0];
    end
    @(negedge clk); we = 1'b0;
  endtask

  task automatic run_op(input int bits, input bit uniform, input int h, input int xmode);
    automatic int mac [NCOL];
    automatic int r_steps = (1 << bits) - 1;
    automatic int cyc = 0;
    @(negedge clk);
    for (int k = 0; k < MAX_STEPS; k++)
      step_h[k] = step_h_t'(uniform ? h : $urandom_range(15));
    for (int i = 0; i < ROWS; i++) begin
      case (xmode)
        0: x[i] = IN_BITS'($urandom_range(15));           // any value -8..7
        1: x[i] = IN_BITS'($urandom_range(7));            // non-negative
        2: x[i] = 4'sd0;
        default: x[i] = -4'sd8;
      endcase
    end
    adc_bits = 3'(bits);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    for (int c = 0; c < NCOL; c++) begin
      mac[c] = 0;
      for (int i = 0; i < ROWS; i++) mac[c] += int'(x[i]) * wval[i][c];
    end
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != (3 + r_steps) * 16 + 2 - 1) begin
      failures++;
      $display("latency: got %0d cycles after start, expected %0d", cyc + 1, (3 + r_steps) * 16 + 2);
    end
    for (int c = 0; c < NCOL; c++) begin
      automatic int e = ramp_code(mac[c], bits);
      checks++;
      if (int'(psum[c]) != e) begin
        failures++;
        $display("bits=%0d col %0d MAC=%0d: code %0d, expected %0d", bits, c, mac[c], psum[c], e);
      end
      if (uniform) begin
        automatic int relu = (mac[c] <= 0) ? 0 : ((mac[c] + h - 1) / h);
        if (relu > r_steps) relu = r_steps;
        checks++;
        if (int'(psum[c]) != relu) begin
          failures++;
          $display("ReLU form: col %0d MAC=%0d h=%0d: code %0d, expected %0d", c, mac[c], h, psum[c], relu);
        end
        if (mac[c] <= 0) n_neg++;
        else if ((mac[c] + h - 1) / h >= r_steps) n_sat++;
        else n_mid++;
      end
    end
  endtask

  initial begin
    for (int k = 0; k < MAX_STEPS; k++) step_h[k] = step_h_t'(1);
    for (int i = 0; i < ROWS; i++) x[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    write_weights(30);
    for (int t = 0; t < 30; t++) run_op(1 + (t % 5), 1'b1, 1 + $urandom_range(6), t % 2);
    for (int t = 0; t < 10; t++) run_op(2 + (t % 4), 1'b0, 0, 0);
    run_op(4, 1'b1, 1, 2);                                // all-zero inputs
    run_op(4, 1'b1, 1, 3);                                // all inputs at -8
    write_weights(90);                                    // sparse weights: small MACs
    for (int t = 0; t < 10; t++) run_op(3 + (t % 3), 1'b1, 1, 0);
    // every region of the transfer curve was exercised
    checks++;
    if (n_neg == 0 || n_sat == 0 || n_mid == 0) begin
      failures++;
      $display("coverage: clamped %0d, saturated %0d, in range %0d", n_neg, n_sat, n_mid);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
