// cf_top -- FPGA cluster finder for TPC raw data: Decoder, FIFO, Merger, RAM.
//
// The 10-bit ALTRO-like word stream of one readout partition enters the
// Decoder, which groups the charges of each pad into sequences and computes
// their charge, time moment and middle on the fly. Sequence records wait in
// a small FIFO until the Merger takes them; the Merger joins sequences of
// adjacent pads into clusters, keeping the started clusters of the previous
// and the current pad in a ring buffer in dual-port RAM, and emits for each
// finished cluster the five integers a, b, Q, P, T (plus its row). The host
// computes the centroids as G_P = b + P/Q and G_T = a - T/Q.
//
// Interface: in_valid/in_word, one word per cycle, no back-pressure; in_eoe
// is a one-cycle pulse between channels that ends an event and flushes the
// Merger. cfg_* set match distance, deconvolution, and the noise cuts and
// must be held stable during an event. out_valid/out_cl deliver finished
// clusters. fifo_overflow and ring_overflow are sticky error flags (data
// were lost); merger_state exposes the Merger's state for statistics.
//
// The four parts and their order follow the paper's block diagram. The
// port list, the end-of-event pulse and the error flags are this design's
// own.
module cf_top
  import cf_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 16,
  parameter int unsigned RING_AW    = 8,
  parameter int unsigned MB         = cf_pkg::MULT_BITS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [WORD_W-1:0] in_word,
  input  logic              in_eoe,
  input  logic [3:0]        cfg_match_dist,
  input  logic              cfg_deconv,
  input  logic [CLQ_W-1:0]  cfg_min_charge,
  input  logic [NPAD_W-1:0] cfg_min_pads,
  output logic              out_valid,
  output cl_out_t           out_cl,
  output logic              fifo_overflow,
  output logic              ring_overflow,
  output mstate_t           merger_state
);
  seq_t            dec_seq, fifo_seq;
  logic            dec_valid;
  logic            fifo_empty, fifo_full, fifo_pop;
  logic [RING_AW-1:0] ram_wr_addr, ram_rd_addr;
  logic            ram_wr_en;
  cluster_t        ram_wr_data, ram_rd_data;

  cf_decoder #(.MB(MB)) u_decoder (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (in_valid),
    .in_word   (in_word),
    .in_eoe    (in_eoe),
    .seq_valid (dec_valid),
    .seq       (dec_seq)
  );

  cf_fifo #(.WIDTH($bits(seq_t)), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk      (clk),
    .rst_n    (rst_n),
    .wr_en    (dec_valid),
    .wr_data  (dec_seq),
    .rd_en    (fifo_pop),
    .rd_data  (fifo_seq),
    .empty    (fifo_empty),
    .full     (fifo_full),
    .overflow (fifo_overflow)
  );

  cf_merger #(.AW(RING_AW), .MB(MB)) u_merger (
    .clk            (clk),
    .rst_n          (rst_n),
    .cfg_match_dist (cfg_match_dist),
    .cfg_deconv     (cfg_deconv),
    .cfg_min_charge (cfg_min_charge),
    .cfg_min_pads   (cfg_min_pads),
    .seq_valid      (!fifo_empty),
    .seq_in         (fifo_seq),
    .seq_pop        (fifo_pop),
    .ram_wr_en      (ram_wr_en),
    .ram_wr_addr    (ram_wr_addr),
    .ram_wr_data    (ram_wr_data),
    .ram_rd_addr    (ram_rd_addr),
    .ram_rd_data    (ram_rd_data),
    .out_valid      (out_valid),
    .out_cl         (out_cl),
    .ring_overflow  (ring_overflow),
    .state          (merger_state)
  );

  cf_ringram #(.WIDTH($bits(cluster_t)), .AW(RING_AW)) u_ram (
    .clk     (clk),
    .wr_en   (ram_wr_en),
    .wr_addr (ram_wr_addr),
    .wr_data (ram_wr_data),
    .rd_addr (ram_rd_addr),
    .rd_data (ram_rd_data)
  );

endmodule
