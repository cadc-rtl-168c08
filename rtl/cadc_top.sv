// cadc_top -- a CADC convolution engine: S crossbar macros, zero compression, psum buffer
// and zero-skipping accumulation.
//
// A convolution kernel unrolled to C_in*K1*K2 inputs by C_out outputs is split along its
// inputs into NSEG segments of ROWS inputs, one per crossbar macro. Each macro computes
// the psums of its segment for NCOL output channels and passes each of them through the
// dendritic function f() in its own ADC, so negative psums leave the macro as zeros. The
// output channels are then scanned one per cycle: the NSEG psums of channel k are
// zero-compressed (bitmask + nonzero values), pass through the psum buffer, and the
// accumulator adds only the nonzero ones: y[k] = sum_s f(psum_s[k]).
// With the defaults (9 macros of 256 x 256) one operation covers a 3x3 convolution with
// 256 input and 256 output channels at one output position.
//
// Interface:
//   w_we/w_seg/w_row/w_data  write one weight row of one macro ({V_L,V_R} per cell)
//   adc_bits, step_h         IMA resolution (1..5) and ramp-step table, shared by all macros
//   start, x                 start one operation (when not busy) on NSEG x ROWS signed inputs
//   y_valid/y_ready/y_col/y  one result per output channel, in channel order
//   done                     one-cycle pulse after the last result has been taken
// Timing: the macros run in lockstep; the channel scan starts the cycle after they finish
// and emits one group per cycle when the compressor is free. The whole design runs on one
// clock (the 1 GHz PWM clock); the IMA clock is a 1-in-16 slot inside the macros.
// The number of macros, the buffer depth and the single clock are this design's choices.
// m_busy, buf_level and add_fire drive no logic here: they are kept as named observation
// points (macro activity, buffer occupancy, accumulator additions) for verification.
module cadc_top
  import cadc_pkg::*;
#(
  parameter int unsigned NSEG      = 9,
  parameter int unsigned ROWS      = MAC_ROWS,
  parameter int unsigned NCOL      = COLS,
  parameter int unsigned REF       = REF_ROWS,
  parameter int unsigned BUF_DEPTH = 64,
  localparam int unsigned PW       = ADC_MAX_BITS,            // psum width
  localparam int unsigned BW       = (NSEG > PW) ? NSEG : PW, // beat width
  localparam int unsigned YW       = PW + $clog2(NSEG)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // weight write
  input  logic                          w_we,
  input  logic [$clog2(NSEG)-1:0]       w_seg,
  input  logic [$clog2(ROWS)-1:0]       w_row,
  input  logic [NCOL-1:0][1:0]          w_data,
  // IMA configuration
  input  logic [2:0]                    adc_bits,
  input  step_h_t                       step_h [MAX_STEPS],
  // operation
  input  logic                          start,
  input  logic signed [IN_BITS-1:0]     x [NSEG][ROWS],
  output logic                          busy,
  output logic                          done,
  // results
  output logic                          y_valid,
  input  logic                          y_ready,
  output logic [$clog2(NCOL)-1:0]       y_col,
  output logic [YW-1:0]                 y
);

  typedef enum logic [1:0] {T_IDLE, T_MAC, T_SCAN, T_DRAIN} tstate_e;

  localparam int unsigned CB = $clog2(NCOL);

  tstate_e              state;
  logic                 go;
  logic [NSEG-1:0]      m_busy, m_done;
  logic [PW-1:0]        psum [NSEG][NCOL];
  logic [CB:0]          scan_col, out_cnt;
  logic                 c_valid, c_ready;
  logic [PW-1:0]        group [NSEG];
  logic                 b_valid, b_ready, b_mask;
  logic [BW-1:0]        b_data;
  logic                 r_valid, r_ready;
  logic [BW:0]          r_beat;
  logic [$clog2(BUF_DEPTH):0] buf_level;
  logic                 add_fire;
  logic                 y_fire;

  assign go = start && (state == T_IDLE);

  for (genvar s = 0; s < NSEG; s++) begin : g_macro
    cadc_macro #(.ROWS(ROWS), .NCOL(NCOL), .REF(REF)) u_macro (
      .clk, .rst_n,
      .we(w_we && (w_seg == ($clog2(NSEG))'(s))), .waddr(w_row), .wdata(w_data),
      .adc_bits, .step_h,
      .start(go), .x(x[s]), .busy(m_busy[s]), .done(m_done[s]), .psum(psum[s])
    );
  end

  // Channel scan: the group of channel scan_col goes to the compressor
  always_comb begin
    c_valid = (state == T_SCAN) && (scan_col < (CB+1)'(NCOL));
    for (int s = 0; s < NSEG; s++) group[s] = psum[s][scan_col[CB-1:0]];
  end

  zero_compressor #(.S(NSEG), .W(PW)) u_comp (
    .clk, .rst_n, .in_valid(c_valid), .in_ready(c_ready), .in_psum(group),
    .out_valid(b_valid), .out_ready(b_ready), .out_is_mask(b_mask), .out_data(b_data)
  );

  psum_buffer #(.DW(BW + 1), .DEPTH(BUF_DEPTH)) u_buf (
    .clk, .rst_n, .wr_valid(b_valid), .wr_ready(b_ready), .wr_data({b_mask, b_data}),
    .rd_valid(r_valid), .rd_ready(r_ready), .rd_data(r_beat), .level(buf_level)
  );

  zero_skip_accumulator #(.S(NSEG), .W(PW)) u_acc (
    .clk, .rst_n, .in_valid(r_valid), .in_ready(r_ready), .in_is_mask(r_beat[BW]),
    .in_data(r_beat[BW-1:0]), .out_valid(y_valid), .out_ready(y_ready), .out_y(y),
    .add_fire
  );

  assign y_fire = y_valid && y_ready;
  assign y_col  = out_cnt[CB-1:0];
  assign busy   = (state != T_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= T_IDLE;
      scan_col <= '0;
      out_cnt  <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      if (y_fire) out_cnt <= out_cnt + 1'b1;
      case (state)
        T_IDLE: if (go) begin
          state    <= T_MAC;
          scan_col <= '0;
          out_cnt  <= '0;
        end
        T_MAC: if (m_done[0]) state <= T_SCAN;
        T_SCAN: begin
          if (c_valid && c_ready) begin
            scan_col <= scan_col + 1'b1;
            if (scan_col == (CB+1)'(NCOL - 1)) state <= T_DRAIN;
          end
        end
        T_DRAIN: if (y_fire && out_cnt == (CB+1)'(NCOL - 1)) begin
          state <= T_IDLE;
          done  <= 1'b1;
        end
        default: state <= T_IDLE;
      endcase
    end
  end

  // The macros share start and configuration, so they finish together
  always_ff @(posedge clk) begin
    if (state == T_MAC) assert (m_done == '0 || m_done == '1)
      else $error("cadc_top: macros out of step");
  end

endmodule
