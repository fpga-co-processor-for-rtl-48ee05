// tb_cf_top -- end-to-end testbench of the cluster finder at its default size.
//
// Pad rows of synthetic TPC data (charge clouds on a pad x time grid, cut at
// a zero-suppression threshold) are serialised into the
// ALTRO-like word stream and sent at one word per cycle. Clusters leaving
// the chip are compared in order with the list-based reference model, which
// builds sequences straight from the charge map (not from the Decoder), and
// each cluster's five integers are checked against the raw charge moments
// sum(q*t) and sum(q*pad).
//
// Workloads (64 pads x 512 time bins per row unless noted): a sparse event,
// a low- and a high-occupancy event, each without and with deconvolution,
// one with noise cuts, and one whole read-out partition of 25 rows of
// 100 pads x 1000 time bins. For each the share of cycles the
// Merger spends in every state is printed. Two stress events then overflow
// the FIFO (a long run of merging one-charge sequences) and the ring buffer
// (more than 255 sequences on one pad); only the sticky flags are checked
// there, and a reset precedes each of them. Every mechanism (merge, split,
// send_one, send_many, send_all on new row, skipped pad and end of event,
// noise and overflow drops, FIFO and ring overflow) must occur at least once.
module tb_cf_top;
  import cf_pkg::*;
  import cf_ref_pkg::*;


  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              in_valid, in_eoe;
  logic [WORD_W-1:0] in_word;
  logic [3:0]        cfg_match_dist;
  logic              cfg_deconv;
  logic [CLQ_W-1:0]  cfg_min_charge;
  logic [NPAD_W-1:0] cfg_min_pads;
  logic              out_valid, fifo_overflow, ring_overflow;
  cl_out_t           out_cl;
  mstate_t           merger_state;

  cf_top dut (.*);

  int checks = 0, failures = 0;
  bit compare_on = 1;
  merger_model model;
  longint state_cycles[NSTATES];
  int tot[string];

  always @(negedge clk) begin
    state_cycles[merger_state]++;
    if (rst_n && out_valid && compare_on) begin
      rcl_t e;
      checks++;
      if (model.out.size() == 0) begin
        failures++;
        $display("FAIL: unexpected cluster row=%0d a=%0d b=%0d", out_cl.row, out_cl.a, out_cl.b);
      end else begin
        e = model.out.pop_front();
        if (out_cl.row != ROW_W'(e.row) || out_cl.a != TIME_W'(e.a) || out_cl.b != PAD_W'(e.b) ||
            out_cl.q != CLQ_W'(e.q) || out_cl.psum != SUM_W'(e.psum) || out_cl.tsum != SUM_W'(e.tsum)) begin
          failures++;
          if (failures < 10)
            $display("FAIL: got row=%0d a=%0d b=%0d q=%0d P=%0d T=%0d exp row=%0d a=%0d b=%0d q=%0d P=%0d T=%0d",
                     out_cl.row, out_cl.a, out_cl.b, out_cl.q, out_cl.psum, out_cl.tsum,
                     e.row, e.a, e.b, e.q, e.psum, e.tsum);
        end
        checks++;
        if (longint'(out_cl.a) * out_cl.q - out_cl.tsum != e.sqt ||
            longint'(out_cl.b) * out_cl.q + out_cl.psum != e.sqp) begin
          failures++;
          $display("FAIL: centroid moments of cluster row=%0d b=%0d", out_cl.row, out_cl.b);
        end
      end
    end
  end

  task automatic send_word(int w);
    @(negedge clk);
    in_valid = 1;
    in_word  = WORD_W'(w);
  endtask

  task automatic send_eoe();
    @(negedge clk);
    in_valid = 0;
    in_eoe   = 1;
    @(negedge clk);
    in_eoe   = 0;
  endtask

  // Serialise one row map into channels and feed its sequences to the model.
  task automatic send_row(row_map m, int row);
    for (int p = 0; p < m.npads; p++) begin
      rseq_t seqs[$];
      int tops[$], lens[$];
      int nw = 0;
      m.pad_seqs(row, p, MULT_BITS, seqs, tops, lens);
      foreach (seqs[i]) model.push(seqs[i]);
      foreach (lens[i]) nw += lens[i] + 2;
      // pads without data are usually not read out; sometimes an empty
      // channel header is sent instead
      if (seqs.size() == 0 && $urandom_range(3) != 0) continue;
      send_word(row);
      send_word(p);
      send_word(nw);
      foreach (seqs[i]) begin
        send_word(lens[i] + 2);
        send_word(tops[i]);
        for (int k = 0; k < lens[i]; k++) send_word(m.q[p][tops[i] - k]);
      end
    end
  endtask

  task automatic wait_drain();
    @(negedge clk);
    in_valid = 0;
    repeat (3) @(negedge clk);
    while (merger_state != S_IDLE || !dut.fifo_empty) @(negedge clk);
    repeat (3) @(negedge clk);
  endtask

  task automatic add_counts();
    tot["merge"] += model.n_merge;          tot["split_cluster"] += model.n_split;
    tot["send_one"] += model.n_send_one;    tot["send_many (next pad)"] += model.n_next_pad;
    tot["send_all (new row)"] += model.n_new_row;
    tot["send_all (skipped pad)"] += model.n_skip_pad;
    tot["send_all (end of event)"] += model.n_eoe;
    tot["insert_seq"] += model.n_insert;    tot["noise cluster dropped"] += model.n_noise;
    tot["overflowed cluster dropped"] += model.n_ovf_drop;
  endtask

  task automatic run_event(string name, int md, bit deconv, int minq, int minpads, int nrows, int nblobs,
                           int npads = 64, int nt = 512);
    longint cells = 0, filled = 0, cyc0;
    longint sc0[NSTATES];
    cfg_match_dist = 4'(md); cfg_deconv = deconv;
    cfg_min_charge = CLQ_W'(minq); cfg_min_pads = NPAD_W'(minpads);
    model = new(md, deconv, minq, minpads, MULT_BITS);
    compare_on = 1;
    foreach (sc0[i]) sc0[i] = state_cycles[i];
    for (int r = 0; r < nrows; r++) begin
      row_map m = new(npads, nt);
      m.add_random(nblobs, 3, 10);
      foreach (m.q[p, t]) begin cells++; if (m.q[p][t] != 0) filled++; end
      send_row(m, r);
    end
    model.push('{eoe: 1, default: 0});
    send_eoe();
    wait_drain();
    checks++;
    if (model.out.size() != 0) begin failures++; $display("FAIL: %s: %0d clusters missing", name, model.out.size()); end
    checks++;
    if (fifo_overflow || ring_overflow) begin failures++; $display("FAIL: %s: data lost (fifo %0d ring %0d)", name, fifo_overflow, ring_overflow); end
    add_counts();
    cyc0 = 0;
    foreach (sc0[i]) cyc0 += state_cycles[i] - sc0[i];
    $display("%s: occupancy %0.1f%%, %0d sequences merged %0d times, %0d clusters sent, %0d cycles",
             name, 100.0 * filled / cells, model.n_insert + model.n_merge + model.n_split,
             model.n_merge, model.n_sent, cyc0);
    for (int i = 0; i < NSTATES; i++) begin
      mstate_t s;
      s = mstate_t'(i);
      $display("    %-16s %5.1f%%", s.name(), 100.0 * (state_cycles[i] - sc0[i]) / cyc0);
    end
  endtask

  task automatic do_reset();
    @(negedge clk);
    rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
  endtask

  task automatic need(string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL: mechanism never exercised: %s", what); end
    else $display("  %-28s %0d", what, n);
  endtask

  initial begin
    in_valid = 0; in_eoe = 0; in_word = '0;
    cfg_match_dist = 4'd2; cfg_deconv = 0; cfg_min_charge = '0; cfg_min_pads = NPAD_W'(1);
    do_reset();
    run_event("sparse event",                      2, 0, 0,   1, 3, 8);
    run_event("low occupancy, no deconvolution",   2, 0, 0,   1, 4, 40);
    run_event("low occupancy, deconvolution",      2, 1, 0,   1, 4, 40);
    run_event("high occupancy, no deconvolution",  2, 0, 0,   1, 4, 100);
    run_event("high occupancy, deconvolution",     2, 1, 0,   1, 4, 100);
    run_event("noise cuts Q>=200, >=2 pads",       2, 1, 200, 2, 2, 120);
    // one read-out partition: 25 pad rows of 100 pads x 1000 time bins
    run_event("full partition, deconvolution",     2, 1, 0,   1, 25, 250, 100, 1000);

    // FIFO overflow: two pads of 240 one-charge sequences that all merge
    // (4 Merger cycles per sequence against 3 input words).
    do_reset();
    compare_on = 0;
    for (int p = 0; p < 2; p++) begin
      send_word(0); send_word(p); send_word(240 * 3);
      for (int i = 0; i < 240; i++) begin send_word(3); send_word(1000 - 4 * i); send_word(50); end
    end
    send_eoe();
    wait_drain();
    tot["FIFO overflow"] += fifo_overflow;
    checks++;
    if (!fifo_overflow) begin failures++; $display("FAIL: FIFO did not overflow"); end

    // Ring-buffer overflow: 300 one-charge sequences on one pad.
    do_reset();
    send_word(0); send_word(0); send_word(300 * 3);
    for (int i = 0; i < 300; i++) begin send_word(3); send_word(1000 - 3 * i); send_word(50); end
    send_eoe();
    wait_drain();
    tot["ring buffer overflow"] += ring_overflow;
    checks++;
    if (!ring_overflow) begin failures++; $display("FAIL: ring buffer did not overflow"); end

    // back to normal operation after a reset
    do_reset();
    run_event("after reset", 2, 0, 0, 1, 1, 30);

    $display("mechanisms:");
    foreach (tot[k]) need(k, tot[k]);
    for (int i = 0; i < NSTATES; i++) begin
      mstate_t s;
      s = mstate_t'(i);
      need(s.name(), int'(state_cycles[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
