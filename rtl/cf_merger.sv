// cf_merger -- merges sequences of adjacent pads into clusters.
//
// Sequences arrive ordered by ascending row, ascending pad and descending
// time. Only the immediately preceding pad can hold a partner, so two lists
// of started clusters suffice, kept as one ring buffer in a dual-port RAM
// and delimited by three pointers:
//   [begin, end)   search range: clusters of the previous pad
//   [end, insert)  input range : clusters already placed on the current pad
// Each list is ordered by descending time, so only the first cluster of the
// search range (the one at begin) is ever compared with the incoming
// sequence; the RAM's read port always shows that cluster.
//
// State machine (state names as in the paper's diagram):
//   idle          wait for a sequence in the FIFO. Every state that ends the
//                 handling of a sequence (merge_store, insert_seq,
//                 split_cluster) dispatches the next one directly:
//                   next pad            -> send_many
//                   new row, skipped pad,
//                   end of event        -> send_all
//                   same pad            -> calc_dist (insert_seq if the
//                                          search range is empty)
//   send_many     send the clusters left in the search range, one per cycle,
//                 then the input range becomes the search range
//                 (begin=end, end=insert) -> calc_dist, or insert_seq if empty
//   send_all      send every cluster of both lists, one per cycle
//                 -> insert_seq (idle after an end-of-event record)
//   calc_dist     two subtractions: the distance of the middles, and the
//                 start-time difference |a - a_j|.
//                   within match distance, deconvolution on and the cluster
//                   at a local minimum of charge along the pads -> split_cluster
//                   within match distance                   -> merge_mult
//                   cluster above the sequence              -> send_one
//                   cluster below the sequence              -> insert_seq
//   merge_mult    two SmartMults: (a-a_j)*Q of the lower of cluster and
//                 sequence, and k*Q_j for the pad moment; the two adders
//                 form T + S_j and Q + Q_j
//   merge_add     the same two adders complete the time moment
//                 T + S_j + (a-a_j)*Q and the pad moment P + k*Q_j
//   merge_store   write the merged cluster at insert; begin and insert step
//   insert_seq    write a new cluster made of the sequence at insert
//   send_one      send the cluster at begin; begin steps -> calc_dist
//                 (insert_seq if the search range is now empty)
//   split_cluster send the cluster at begin and write the sequence as a new
//                 cluster at insert
// "Sending" a cluster puts it on the output for one cycle unless it is
// noise (Q below cfg_min_charge or fewer than cfg_min_pads pads) or it
// overflowed the SmartMult limit; such clusters are dropped silently.
//
// Interface: seq_valid/seq_in/seq_pop read a first-word-fall-through FIFO.
// The ram_* ports drive a cf_ringram (write-first, registered read).
// out_valid/out_cl carry one finished cluster per cycle at most; there is
// no back-pressure. ring_overflow is sticky: a new cluster was dropped
// because the ring buffer was full. state shows the current state.
//
// From the paper: the two lists in a ring buffer with begin/end/insert
// pointers, the states and their transitions, the arithmetic per state
// (two SmartMults and two adders shared by merge_mult and merge_add),
// keeping a at the top by taking the higher start time, the middle of the
// last appended sequence as the match reference, the five integers per
// cluster, overflow and noise rejection. This design's own choices: the
// distance test |mid_in - mid_cl| < match distance in half time bins, the
// local-minimum rule (charge fell from one pad to the next and rises
// again), the noise criteria, a row field in the output, the end-of-event
// record, the ring size and the drop-on-full policy.
module cf_merger
  import cf_pkg::*;
#(
  parameter int unsigned AW = 8,                 // ring buffer of 2**AW entries
  parameter int unsigned MB = cf_pkg::MULT_BITS
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  logic [3:0]        cfg_match_dist,  // in time bins; typically 2
  input  logic              cfg_deconv,
  input  logic [CLQ_W-1:0]  cfg_min_charge,
  input  logic [NPAD_W-1:0] cfg_min_pads,
  // sequences from the FIFO
  input  logic              seq_valid,
  input  seq_t              seq_in,
  output logic              seq_pop,
  // ring buffer RAM
  output logic              ram_wr_en,
  output logic [AW-1:0]     ram_wr_addr,
  output cluster_t          ram_wr_data,
  output logic [AW-1:0]     ram_rd_addr,
  input  cluster_t          ram_rd_data,
  // finished clusters
  output logic              out_valid,
  output cl_out_t           out_cl,
  output logic              ring_overflow,
  output mstate_t           state
);
  mstate_t          st, st_n;
  logic [AW-1:0]    beg, endp, ins;
  logic [AW-1:0]    beg_n, end_n, ins_n;
  seq_t             s;
  logic [ROW_W-1:0] cur_row;
  logic [PAD_W-1:0] cur_pad;
  logic             have_row;

  cluster_t         cl;
  assign cl = ram_rd_data;

  // ---------------------------------------------------------------------
  // calc_dist: the two subtractions
  // ---------------------------------------------------------------------
  logic signed [MID_W+1:0] mdist;
  logic        [MID_W+1:0] absd;
  logic                    in_range, local_min;
  logic                    s_higher;
  logic [TIME_W-1:0]       da;

  assign mdist     = $signed({2'b00, s.mid2}) - $signed({2'b00, cl.mid2});
  assign absd      = mdist[MID_W+1] ? $unsigned(-mdist) : $unsigned(mdist);
  assign in_range  = absd < (MID_W+2)'({cfg_match_dist, 1'b0});
  assign local_min = cl.falling && (s.q > cl.lastq);
  assign s_higher  = s.a > cl.a;
  assign da        = s_higher ? s.a - cl.a : cl.a - s.a;

  // Registered results of calc_dist, merge_mult and merge_add.
  logic [TIME_W-1:0] da_r;
  logic              s_higher_r;
  logic              ovf_r;
  logic [SUM_W-1:0]  m1_r, m2_r, tacc_r, pnew_r;
  logic [CLQ_W-1:0]  qnew_r;

  // ---------------------------------------------------------------------
  // merge_mult: the two SmartMults
  // ---------------------------------------------------------------------
  logic [SUM_W-1:0] m1, m2;

  cf_smartmult #(.MB(MB), .XW(CLQ_W), .PW(SUM_W)) u_mult_time (
    .m (da_r[MB-1:0]),
    .x (s_higher_r ? cl.q : CLQ_W'(s.q)),
    .p (m1)
  );

  cf_smartmult #(.MB(MB), .XW(CLQ_W), .PW(SUM_W)) u_mult_pad (
    .m (cl.npads[MB-1:0]),
    .x (CLQ_W'(s.q)),
    .p (m2)
  );

  // ---------------------------------------------------------------------
  // The two adders, shared by merge_mult and merge_add
  //   merge_mult: T + S_j          and  Q + Q_j
  //   merge_add : (T + S_j) + m1   and  P + m2
  // ---------------------------------------------------------------------
  logic [SUM_W-1:0] add_a_x, add_a_y, add_b_x, add_b_y, add_a, add_b;

  always_comb begin
    if (st == S_MERGE_ADD) begin
      add_a_x = tacc_r;   add_a_y = m1_r;
      add_b_x = cl.psum;  add_b_y = m2_r;
    end else begin
      add_a_x = cl.tsum;  add_a_y = SUM_W'(s.s);
      add_b_x = SUM_W'(cl.q); add_b_y = SUM_W'(s.q);
    end
  end

  assign add_a = add_a_x + add_a_y;
  assign add_b = add_b_x + add_b_y;

  // ---------------------------------------------------------------------
  // New cluster records
  // ---------------------------------------------------------------------
  cluster_t seq_cl, merged_cl;

  always_comb begin
    seq_cl         = '0;
    seq_cl.row     = s.row;
    seq_cl.a       = s.a;
    seq_cl.b       = s.pad;
    seq_cl.q       = CLQ_W'(s.q);
    seq_cl.psum    = '0;
    seq_cl.tsum    = SUM_W'(s.s);
    seq_cl.mid2    = s.mid2;
    seq_cl.npads   = NPAD_W'(1);
    seq_cl.lastq   = s.q;
    seq_cl.falling = 1'b0;
    seq_cl.ovf     = s.ovf;
  end

  always_comb begin
    merged_cl         = cl;
    merged_cl.a       = s_higher_r ? s.a : cl.a;
    merged_cl.q       = qnew_r;
    merged_cl.psum    = pnew_r;
    merged_cl.tsum    = tacc_r;
    merged_cl.mid2    = s.mid2;
    merged_cl.npads   = (&cl.npads) ? cl.npads : cl.npads + 1'b1;
    merged_cl.lastq   = s.q;
    merged_cl.falling = s.q < cl.lastq;
    merged_cl.ovf     = ovf_r;
  end

  // A finished cluster is sent unless it is noise or overflowed.
  logic keep;
  assign keep = !cl.ovf && (cl.q >= cfg_min_charge) && (cl.npads >= cfg_min_pads);

  // ---------------------------------------------------------------------
  // Next-state logic
  // ---------------------------------------------------------------------
  logic     send, dispatch, full, do_write;
  cluster_t wr_cl;
  logic [PAD_W:0] pad_inc;

  assign pad_inc = {1'b0, cur_pad} + 1'b1;
  assign full    = (ins + 1'b1) == beg;

  always_comb begin
    st_n     = st;
    beg_n    = beg;
    end_n    = endp;
    ins_n    = ins;
    send     = 1'b0;
    dispatch = 1'b0;
    do_write = 1'b0;
    wr_cl    = seq_cl;
    seq_pop  = 1'b0;

    unique case (st)
      S_IDLE: dispatch = 1'b1;

      S_CALC_DIST: begin
        if (in_range) st_n = (cfg_deconv && local_min) ? S_SPLIT_CLUSTER : S_MERGE_MULT;
        else if (mdist < 0) st_n = S_SEND_ONE;   // old is above
        else               st_n = S_INSERT_SEQ; // old is below
      end

      S_MERGE_MULT: st_n = S_MERGE_ADD;
      S_MERGE_ADD:  st_n = S_MERGE_STORE;

      S_MERGE_STORE: begin
        // The cluster leaves the search range and, merged, enters the
        // input range: the number of entries does not change.
        do_write = 1'b1;
        wr_cl    = merged_cl;
        beg_n    = beg + 1'b1;
        ins_n    = ins + 1'b1;
        dispatch = 1'b1;
      end

      S_INSERT_SEQ: begin
        if (!full) begin
          do_write = 1'b1;
          ins_n    = ins + 1'b1;
        end
        dispatch = 1'b1;
      end

      S_SPLIT_CLUSTER: begin
        send     = 1'b1;
        beg_n    = beg + 1'b1;
        do_write = 1'b1;
        ins_n    = ins + 1'b1;
        dispatch = 1'b1;
      end

      S_SEND_ONE: begin
        send  = 1'b1;
        beg_n = beg + 1'b1;
        st_n  = (beg + 1'b1 == endp) ? S_INSERT_SEQ : S_CALC_DIST;
      end

      S_SEND_MANY: begin
        if (beg != endp) begin
          send  = 1'b1;
          beg_n = beg + 1'b1;
        end
        if (beg == endp || beg + 1'b1 == endp) begin
          // new search range: the current list becomes the old one
          end_n = ins;
          st_n  = (endp == ins) ? S_INSERT_SEQ : S_CALC_DIST;
        end
      end

      S_SEND_ALL: begin
        if (beg != ins) begin
          send  = 1'b1;
          beg_n = beg + 1'b1;
        end
        if (beg == ins || beg + 1'b1 == ins) begin
          beg_n = ins;
          end_n = ins;
          st_n  = s.eoe ? S_IDLE : S_INSERT_SEQ;
        end
      end

      default: st_n = S_IDLE;
    endcase

    if (dispatch) begin
      st_n = S_IDLE;
      if (seq_valid) begin
        seq_pop = 1'b1;
        if (!have_row || seq_in.eoe || seq_in.row != cur_row ||
            seq_in.pad < cur_pad || {1'b0, seq_in.pad} > pad_inc)
          st_n = S_SEND_ALL;
        else if ({1'b0, seq_in.pad} == pad_inc)
          st_n = S_SEND_MANY;
        else
          st_n = (beg_n == end_n) ? S_INSERT_SEQ : S_CALC_DIST;
      end
    end
  end

  assign ram_wr_en   = do_write;
  assign ram_wr_addr = ins;
  assign ram_wr_data = wr_cl;
  assign ram_rd_addr = beg_n;
  assign state       = st;

  // ---------------------------------------------------------------------
  // Registers
  // ---------------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st            <= S_IDLE;
      beg           <= '0;
      endp          <= '0;
      ins           <= '0;
      s             <= '0;
      cur_row       <= '0;
      cur_pad       <= '0;
      have_row      <= 1'b0;
      da_r          <= '0;
      s_higher_r    <= 1'b0;
      ovf_r         <= 1'b0;
      m1_r          <= '0;
      m2_r          <= '0;
      tacc_r        <= '0;
      qnew_r        <= '0;
      pnew_r        <= '0;
      out_valid     <= 1'b0;
      out_cl        <= '0;
      ring_overflow <= 1'b0;
    end else begin
      st   <= st_n;
      beg  <= beg_n;
      endp <= end_n;
      ins  <= ins_n;

      if (seq_pop) begin
        s        <= seq_in;
        cur_row  <= seq_in.row;
        cur_pad  <= seq_in.pad;
        have_row <= !seq_in.eoe;
      end

      if (st == S_CALC_DIST) begin
        da_r       <= da;
        s_higher_r <= s_higher;
      end

      if (st == S_MERGE_MULT) begin
        m1_r    <= m1;
        m2_r    <= m2;
        tacc_r  <= add_a;
        qnew_r  <= CLQ_W'(add_b);
        ovf_r   <= cl.ovf || s.ovf || (|da_r[TIME_W-1:MB]) || cl.npads[MB];
      end

      if (st == S_MERGE_ADD) begin
        tacc_r <= add_a;
        pnew_r <= add_b;
      end

      out_valid <= send && keep;
      if (send) begin
        out_cl.row  <= cl.row;
        out_cl.a    <= cl.a;
        out_cl.b    <= cl.b;
        out_cl.q    <= cl.q;
        out_cl.psum <= cl.psum;
        out_cl.tsum <= cl.tsum;
      end

      if (st == S_INSERT_SEQ && full) ring_overflow <= 1'b1;
    end
  end

  // Handshake and ring-buffer rules.
  a_pop_valid: assert property (@(posedge clk) disable iff (!rst_n) seq_pop |-> seq_valid)
    else $error("cf_merger: pop from empty FIFO");
  a_ring_room: assert property (@(posedge clk) disable iff (!rst_n)
      (do_write && full) |-> (st == S_MERGE_STORE || st == S_SPLIT_CLUSTER))
    else $error("cf_merger: write into full ring buffer");

endmodule
