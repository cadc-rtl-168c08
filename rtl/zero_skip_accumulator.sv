// zero_skip_accumulator -- soma accumulation of one output neuron with zero skipping.
//
// CADC adds the clamped psums of all S segments of an output neuron (every dendrite weight
// w^k[s] is 1): y[k] = sum_s f(psum_s[k]). The accumulator reads the zero-compressed beat
// stream: a mask beat announces how many nonzero psums follow, and only those are added,
// one per cycle. Zeros cost no cycle and no addition; an all-zero group gives y = 0 at once.
// With n nonzero psums the sum needs n - 1 additions (the first value is loaded), against
// S - 1 for uncompressed psums: 2 instead of 8 in the nine-psum example.
//
// Interface: beats on in_valid/in_ready (tag in_is_mask, value in the low bits of in_data);
// results on out_valid/out_ready, one per group, in group order. The result register must be
// emptied before the next beat is taken, which stalls the stream when the consumer is slow.
// add_fire marks a cycle in which an addition of two nonzero psums takes place.
// Y = W + clog2(S) bits cannot overflow.
module zero_skip_accumulator #(
  parameter int unsigned S  = 9,
  parameter int unsigned W  = 8,
  parameter int unsigned BW = (S > W) ? S : W,
  parameter int unsigned YW = W + $clog2(S)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  output logic           in_ready,
  input  logic           in_is_mask,
  input  logic [BW-1:0]  in_data,
  output logic           out_valid,
  input  logic           out_ready,
  output logic [YW-1:0]  out_y,
  output logic           add_fire
);

  localparam int unsigned CNT_BITS = $clog2(S + 1);

  logic [CNT_BITS-1:0] remaining;
  logic                loaded;
  logic [YW-1:0]       acc;
  logic [CNT_BITS-1:0] nnz;
  logic                fire;
  logic [YW-1:0]       sum;

  assign in_ready = !out_valid || out_ready;
  assign fire     = in_valid && in_ready;
  assign nnz      = CNT_BITS'($countones(in_data[S-1:0]));
  assign sum      = loaded ? acc + YW'(in_data[W-1:0]) : YW'(in_data[W-1:0]);
  assign add_fire = fire && !in_is_mask && loaded;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      remaining <= '0;
      loaded    <= 1'b0;
      acc       <= '0;
      out_valid <= 1'b0;
      out_y     <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (fire) begin
        if (in_is_mask) begin
          remaining <= nnz;
          loaded    <= 1'b0;
          acc       <= '0;
          if (nnz == '0) begin           // nothing to add: the neuron's sum is zero
            out_valid <= 1'b1;
            out_y     <= '0;
          end
        end else begin
          acc       <= sum;
          loaded    <= 1'b1;
          remaining <= remaining - 1'b1;
          if (remaining == CNT_BITS'(1)) begin
            out_valid <= 1'b1;
            out_y     <= sum;
          end
        end
      end
    end
  end

  // Stream rules: a mask beat opens a group only after the previous one is complete, and
  // a data beat belongs to an open group.
  always_ff @(posedge clk) begin
    if (fire) begin
      if (in_is_mask) assert (remaining == '0)
        else $error("zero_skip_accumulator: mask beat inside an open group");
      else assert (remaining != '0)
        else $error("zero_skip_accumulator: data beat without a mask");
    end
  end

endmodule
