// cf_fifo -- small synchronous FIFO between the Decoder and the Merger.
//
// The Decoder turns the fixed-rate stream of 10-bit words into wide
// sequence records at a rate that depends on the sequence lengths, and the
// Merger takes a varying number of cycles per sequence; this FIFO absorbs
// the difference. It is first-word-fall-through: rd_data shows the oldest
// entry whenever empty is low, and rd_en removes it at the clock edge.
// The input side cannot be stalled (the detector data arrive in real
// time), so a push into a full FIFO is dropped and sets the sticky flag
// overflow, which only a reset clears.
//
// That a small FIFO sits here follows the paper; its depth (16), the
// fall-through read and the drop-and-flag overflow policy are this
// design's choices. Timing: a word pushed at edge t is visible at rd_data
// after edge t; push and pop may happen in the same cycle.
module cf_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 16   // must be a power of two
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic             full,
  output logic             overflow
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wptr, rptr;   // one extra bit tells full from empty
  logic             do_wr, do_rd;

  assign empty   = (wptr == rptr);
  assign full    = (wptr[AW-1:0] == rptr[AW-1:0]) && (wptr[AW] != rptr[AW]);
  assign do_rd   = rd_en && !empty;
  assign do_wr   = wr_en && (!full || do_rd);
  assign rd_data = mem[rptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr     <= '0;
      rptr     <= '0;
      overflow <= 1'b0;
    end else begin
      if (do_wr) wptr <= wptr + 1'b1;
      if (do_rd) rptr <= rptr + 1'b1;
      if (wr_en && !do_wr) overflow <= 1'b1;
    end
  end

  // Reading an empty FIFO is a protocol error of the consumer.
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> !empty)
    else $error("cf_fifo: read while empty");

endmodule
