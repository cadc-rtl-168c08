// zero_compressor -- zero compression of the S psums that belong to one output neuron.
//
// In a partitioned convolution every output neuron receives one psum from each of the S
// crossbars (segments) that hold a part of its kernel. After the dendritic clamp most of
// these psums are zero. The compressor replaces the group by an S-bit bitmask (bit s set
// when psum s is nonzero) followed by the nonzero psums only, lowest segment first.
// For the nine 8-bit psums of the worked example with three nonzero values this is
// 9 + 3 x 8 = 33 bits instead of 72.
//
// Interface: a group is accepted on in_valid & in_ready. It leaves as a stream of beats on
// out_valid/out_ready, each BW = max(S, W) bits wide with a tag: first the mask beat
// (out_is_mask = 1, mask in the low S bits), then one data beat per nonzero psum
// (value in the low W bits). A group of n nonzero psums takes 1 + n beats; the next
// group is accepted in the cycle of the last beat, so the output can stream without gaps.
// The beat-serial format is this design's choice for a compression the paper states only
// as "bitmask plus nonzero psums".
module zero_compressor #(
  parameter int unsigned S  = 9,
  parameter int unsigned W  = 8,
  parameter int unsigned BW = (S > W) ? S : W
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  output logic           in_ready,
  input  logic [W-1:0]   in_psum [S],
  output logic           out_valid,
  input  logic           out_ready,
  output logic           out_is_mask,
  output logic [BW-1:0]  out_data
);

  logic          busy;
  logic          send_mask;
  logic [S-1:0]  mask_q;
  logic [S-1:0]  pend;        // nonzero psums not yet sent
  logic [W-1:0]  vals [S];
  logic [S-1:0]  in_mask;
  logic [$clog2(S)-1:0] idx;  // lowest pending segment
  logic [S-1:0]  pend_next;
  logic          fire, last_beat, accept;

  always_comb begin
    for (int s = 0; s < S; s++) in_mask[s] = (in_psum[s] != '0);
  end

  always_comb begin
    idx = '0;
    for (int s = S - 1; s >= 0; s--) begin
      if (pend[s]) idx = ($clog2(S))'(s);
    end
  end

  always_comb begin
    out_valid   = busy;
    out_is_mask = send_mask;
    out_data    = '0;
    if (send_mask) out_data[S-1:0] = mask_q;
    else           out_data[W-1:0] = vals[idx];
    pend_next = pend;
    if (!send_mask) pend_next[idx] = 1'b0;
    fire      = out_valid && out_ready;
    last_beat = send_mask ? (mask_q == '0) : (pend_next == '0);
    in_ready  = !busy || (fire && last_beat);
    accept    = in_valid && in_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      send_mask <= 1'b0;
      mask_q    <= '0;
      pend      <= '0;
    end else begin
      if (fire) begin
        send_mask <= 1'b0;
        pend      <= pend_next;
        if (last_beat) busy <= 1'b0;
      end
      if (accept) begin
        busy      <= 1'b1;
        send_mask <= 1'b1;
        mask_q    <= in_mask;
        pend      <= in_mask;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (accept) vals <= in_psum;
  end

endmodule
