// psum_buffer -- buffer for compressed psum beats between the crossbars and the accumulator.
//
// A first-in first-out memory of DEPTH entries, each one tagged beat (tag + BW data bits)
// of the zero-compressed psum stream. Since only the bitmask and the nonzero psums are
// written, the buffer is written, read and crossed by fewer bits than with uncompressed
// psums. Both sides use valid/ready: wr_ready falls when the buffer is full, which stalls
// the compressor; rd_valid is high whenever it holds a beat, and rd_data shows the oldest
// beat without a read delay. A beat written into an empty buffer can be read in the next
// cycle. Size and organisation are this design's choice.
module psum_buffer #(
  parameter int unsigned DW    = 10,
  parameter int unsigned DEPTH = 64
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           wr_valid,
  output logic           wr_ready,
  input  logic [DW-1:0]  wr_data,
  output logic           rd_valid,
  input  logic           rd_ready,
  output logic [DW-1:0]  rd_data,
  output logic [$clog2(DEPTH):0] level
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [DW-1:0] mem [DEPTH];
  logic [AW:0]   wptr, rptr;
  logic          wr_fire, rd_fire;

  assign level    = wptr - rptr;
  assign wr_ready = (level != (AW+1)'(DEPTH));
  assign rd_valid = (level != '0);
  assign rd_data  = mem[rptr[AW-1:0]];
  assign wr_fire  = wr_valid && wr_ready;
  assign rd_fire  = rd_valid && rd_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (wr_fire) wptr <= wptr + 1'b1;
      if (rd_fire) rptr <= rptr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_fire) mem[wptr[AW-1:0]] <= wr_data;
  end

endmodule
