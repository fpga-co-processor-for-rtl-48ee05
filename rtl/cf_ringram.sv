// cf_ringram -- dual-port RAM that holds the Merger's ring buffer.
//
// One write port and one read port, both synchronous. The read address is
// registered with the data: rd_data at cycle t+1 is the word at rd_addr
// of cycle t. When the same address is written in that cycle, rd_data
// shows the new word (write-first), so the Merger can read a cluster it
// stored one cycle earlier. The Merger drives rd_addr with the next value
// of its begin pointer, so rd_data always holds the first cluster of the
// search range.
//
// The dual-port RAM follows the paper; its depth (2**AW = 256 clusters),
// the registered read and the write-first behaviour are this design's
// choices. The array maps onto FPGA block RAM with a bypass multiplexer.
module cf_ringram #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned AW    = 8
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data
);
  logic [WIDTH-1:0] mem [2**AW];
  logic [WIDTH-1:0] ram_q;
  logic             bypass;
  logic [WIDTH-1:0] wr_data_q;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    ram_q     <= mem[rd_addr];
    bypass    <= wr_en && (wr_addr == rd_addr);
    wr_data_q <= wr_data;
  end

  assign rd_data = bypass ? wr_data_q : ram_q;

endmodule
