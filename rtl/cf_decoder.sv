// cf_decoder -- turns the ALTRO-like word stream into sequence records.
//
// Input format (one 10-bit word per cycle when in_valid is high), per
// channel, i.e. per pad, in readout order:
//   ROW, PAD, NW            channel header; NW = number of words that follow
//   then bunches, each:     LEN  (= number of charges + 2, as in ALTRO)
//                           TIME (time bin of the first, highest charge)
//                           LEN-2 charges in descending time order
// A bunch is a run of consecutive non-zero time bins on one pad, i.e. a
// sequence. in_eoe (a one-cycle pulse between channels) marks the end of an
// event; it is passed on as a record with eoe set so that the Merger
// finishes the clusters of the last row.
//
// As the charges arrive the decoder accumulates, without storing them,
// Q_j = sum q and S_j = sum k*q with k = 0,1,.. counted downwards from the
// top charge (one SmartMult and two adders). It also forms the geometric
// middle of the sequence, in half time bins: mid2 = 2*TIME - (LEN-2-1).
// A sequence of more than 2**MULT_BITS charges sets ovf; the Merger then
// discards its cluster.
//
// Timing: the record is pushed (seq_valid high for one cycle) in the cycle
// after the last charge of its bunch; the decoder accepts a word in every
// cycle and never stalls. Records leave in arrival order, i.e. ascending
// row, ascending pad and descending time.
//
// From the paper: the grouping into sequences, the on-the-fly Q_j and
// sum k*q, the geometric middle instead of the exact centroid, and the
// multiplicand limit. This design's own choices: the exact header layout
// (the paper says only "ALTRO like"), the end-of-event pulse and the
// half-bin middle.
module cf_decoder
  import cf_pkg::*;
#(
  parameter int unsigned MB = cf_pkg::MULT_BITS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [WORD_W-1:0] in_word,
  input  logic              in_eoe,
  output logic              seq_valid,
  output seq_t              seq
);
  typedef enum logic [2:0] {D_ROW, D_PAD, D_NW, D_LEN, D_TIME, D_SMP} dstate_t;

  dstate_t           st;
  logic [ROW_W-1:0]  row;
  logic [PAD_W-1:0]  pad;
  logic [WORD_W-1:0] words_left;  // words still to come in this channel
  logic [WORD_W-1:0] nsmp;        // charges in the current bunch
  logic [WORD_W-1:0] smp_left;    // charges still to come in this bunch
  logic [TIME_W-1:0] top;
  logic [MB:0]       k;           // index of the next charge, saturating
  logic [SEQQ_W-1:0] accq;
  logic [SEQS_W-1:0] accs;
  logic              ovf;

  logic [SEQS_W-1:0] kq;
  logic [SEQQ_W-1:0] q_new;
  logic [SEQS_W-1:0] s_new;
  logic              k_ovf;

  cf_smartmult #(.MB(MB), .XW(CHG_W), .PW(SEQS_W)) u_kq (
    .m (k[MB-1:0]),
    .x (in_word[CHG_W-1:0]),
    .p (kq)
  );

  assign k_ovf = k[MB];
  assign q_new = accq + SEQQ_W'(in_word);
  assign s_new = accs + kq;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= D_ROW;
      row        <= '0;
      pad        <= '0;
      words_left <= '0;
      nsmp       <= '0;
      smp_left   <= '0;
      top        <= '0;
      k          <= '0;
      accq       <= '0;
      accs       <= '0;
      ovf        <= 1'b0;
      seq_valid  <= 1'b0;
      seq        <= '0;
    end else begin
      seq_valid <= 1'b0;
      if (in_eoe) begin
        seq_valid <= 1'b1;
        seq       <= '0;
        seq.eoe   <= 1'b1;
        st        <= D_ROW;
      end else if (in_valid) begin
        unique case (st)
          D_ROW: begin
            row <= ROW_W'(in_word);
            st  <= D_PAD;
          end
          D_PAD: begin
            pad <= PAD_W'(in_word);
            st  <= D_NW;
          end
          D_NW: begin
            words_left <= in_word;
            st         <= (in_word == '0) ? D_ROW : D_LEN;
          end
          D_LEN: begin
            words_left <= words_left - 1'b1;
            if (in_word > WORD_W'(2)) begin
              nsmp     <= in_word - WORD_W'(2);
              smp_left <= in_word - WORD_W'(2);
              st       <= D_TIME;
            end else begin
              // A bunch without charges carries nothing: skip its TIME word.
              nsmp     <= '0;
              smp_left <= '0;
              st       <= D_TIME;
            end
          end
          D_TIME: begin
            words_left <= words_left - 1'b1;
            top        <= TIME_W'(in_word);
            k          <= '0;
            accq       <= '0;
            accs       <= '0;
            ovf        <= 1'b0;
            if (smp_left == '0) st <= (words_left == WORD_W'(1)) ? D_ROW : D_LEN;
            else                st <= D_SMP;
          end
          D_SMP: begin
            words_left <= words_left - 1'b1;
            smp_left   <= smp_left - 1'b1;
            accq       <= q_new;
            accs       <= s_new;
            if (k_ovf) ovf <= 1'b1;
            if (!k_ovf) k <= k + 1'b1;
            if (smp_left == WORD_W'(1)) begin
              seq_valid <= 1'b1;
              seq.eoe   <= 1'b0;
              seq.row   <= row;
              seq.pad   <= pad;
              seq.a     <= top;
              seq.q     <= q_new;
              seq.s     <= s_new;
              seq.mid2  <= MID_W'({top, 1'b0}) - MID_W'(nsmp - 1'b1);
              seq.ovf   <= ovf || k_ovf;
              st        <= (words_left == WORD_W'(1)) ? D_ROW : D_LEN;
            end
          end
          default: st <= D_ROW;
        endcase
      end
    end
  end

endmodule
