// tb_cf_merger -- self-checking testbench of the Merger with its ring RAM.
//
// Random pad rows of charge clouds are cut into sequences by the reference
// package; the sequences are fed to the Merger through a FIFO-like source
// with random gaps, and every emitted cluster is compared, in order, with
// the list-based reference model (a, b, Q, P, T and row). Each cluster is
// also checked against the raw charge moments. Three configurations cover
// merging, send_one/send_many/send_all, skipped pads, deconvolution splits,
// noise cuts and overflow drops; each of these must occur at least once.
module tb_cf_merger;
  import cf_pkg::*;
  import cf_ref_pkg::*;

  localparam int unsigned AW = 8;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [3:0]        cfg_match_dist;
  logic              cfg_deconv;
  logic [CLQ_W-1:0]  cfg_min_charge;
  logic [NPAD_W-1:0] cfg_min_pads;
  logic              seq_valid, seq_pop;
  seq_t              seq_in;
  logic              ram_wr_en;
  logic [AW-1:0]     ram_wr_addr, ram_rd_addr;
  cluster_t          ram_wr_data, ram_rd_data;
  logic              out_valid, ring_overflow;
  cl_out_t           out_cl;
  mstate_t           state;

  cf_merger dut (.*);

  cf_ringram #(.WIDTH($bits(cluster_t)), .AW(AW)) u_ram (
    .clk(clk), .wr_en(ram_wr_en), .wr_addr(ram_wr_addr), .wr_data(ram_wr_data),
    .rd_addr(ram_rd_addr), .rd_data(ram_rd_data));

  int checks = 0, failures = 0;
  seq_t src[$];
  bit   gate;
  bit   popped;
  merger_model model;
  int   state_cycles[NSTATES];
  int   tot_merge, tot_split, tot_send_one, tot_next_pad, tot_new_row, tot_skip,
        tot_noise, tot_ovf, tot_insert;

  function automatic seq_t to_hw(rseq_t r);
    seq_t h;
    h.eoe = r.eoe; h.row = ROW_W'(r.row); h.pad = PAD_W'(r.pad); h.a = TIME_W'(r.a);
    h.q = SEQQ_W'(r.q); h.s = SEQS_W'(r.s); h.mid2 = MID_W'(r.mid2); h.ovf = r.ovf;
    return h;
  endfunction

  assign seq_valid = gate && (src.size() > 0);
  assign seq_in    = (src.size() > 0) ? src[0] : '0;

  always @(posedge clk) popped <= seq_pop;

  always @(negedge clk) begin
    if (popped) void'(src.pop_front());
    gate <= ($urandom_range(99) < 80);
    state_cycles[state]++;
    if (rst_n && out_valid) begin
      rcl_t e;
      checks++;
      if (model.out.size() == 0) begin
        failures++;
        $display("FAIL: unexpected cluster row=%0d a=%0d b=%0d q=%0d", out_cl.row, out_cl.a, out_cl.b, out_cl.q);
      end else begin
        e = model.out.pop_front();
        if (out_cl.row != ROW_W'(e.row) || out_cl.a != TIME_W'(e.a) || out_cl.b != PAD_W'(e.b) ||
            out_cl.q != CLQ_W'(e.q) || out_cl.psum != SUM_W'(e.psum) || out_cl.tsum != SUM_W'(e.tsum)) begin
          failures++;
          $display("FAIL: got row=%0d a=%0d b=%0d q=%0d P=%0d T=%0d exp row=%0d a=%0d b=%0d q=%0d P=%0d T=%0d",
                   out_cl.row, out_cl.a, out_cl.b, out_cl.q, out_cl.psum, out_cl.tsum,
                   e.row, e.a, e.b, e.q, e.psum, e.tsum);
        end
        // centroid moments from the five integers against the raw charges
        checks++;
        if (longint'(out_cl.a) * out_cl.q - out_cl.tsum != e.sqt ||
            longint'(out_cl.b) * out_cl.q + out_cl.psum != e.sqp) begin
          failures++;
          $display("FAIL: moments of cluster row=%0d b=%0d", out_cl.row, out_cl.b);
        end
      end
    end
  end

  task automatic run_config(int md, bit deconv, int minq, int minpads, int nrows, int nblobs, int npads);
    rseq_t all[$];
    rseq_t eoe;
    cfg_match_dist = 4'(md);
    cfg_deconv     = deconv;
    cfg_min_charge = CLQ_W'(minq);
    cfg_min_pads   = NPAD_W'(minpads);
    model = new(md, deconv, minq, minpads, MULT_BITS);
    for (int r = 0; r < nrows; r++) begin
      row_map m = new(npads, 96);
      m.add_random(nblobs, 10, 8);
      for (int p = 0; p < m.npads; p++) begin
        int tops[$], lens[$];
        m.pad_seqs(r, p, MULT_BITS, all, tops, lens);
      end
    end
    eoe = '{default: 0};
    eoe.eoe = 1;
    all.push_back(eoe);
    foreach (all[i]) model.push(all[i]);
    foreach (all[i]) src.push_back(to_hw(all[i]));
    // wait until everything is consumed and the merger is idle again
    while (src.size() > 0 || state != S_IDLE) @(negedge clk);
    repeat (4) @(negedge clk);
    checks++;
    if (model.out.size() != 0) begin
      failures++;
      $display("FAIL: %0d expected clusters never came", model.out.size());
    end
    checks++;
    if (ring_overflow) begin failures++; $display("FAIL: ring overflow"); end
    tot_merge += model.n_merge; tot_split += model.n_split; tot_send_one += model.n_send_one;
    tot_next_pad += model.n_next_pad; tot_new_row += model.n_new_row; tot_skip += model.n_skip_pad;
    tot_noise += model.n_noise; tot_ovf += model.n_ovf_drop; tot_insert += model.n_insert;
    $display("config md=%0d deconv=%0d minq=%0d minpads=%0d: %0d seqs, %0d merges, %0d splits, %0d sent",
             md, deconv, minq, minpads, all.size(), model.n_merge, model.n_split, model.n_sent);
  endtask

  task automatic need(string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL: mechanism never exercised: %s", what); end
  endtask

  initial begin
    gate = 1'b0;
    popped = 1'b0;
    cfg_match_dist = 4'd2; cfg_deconv = 1'b0; cfg_min_charge = '0; cfg_min_pads = NPAD_W'(1);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_config(2, 0, 0, 1, 6, 10, 24);
    run_config(2, 1, 150, 2, 6, 14, 24);
    run_config(1, 1, 0, 1, 4, 18, 24);
    run_config(3, 0, 60, 1, 4, 18, 24);
    run_config(2, 0, 0, 1, 6, 4, 64);
    need("merge", tot_merge);
    need("split_cluster", tot_split);
    need("send_one", tot_send_one);
    need("send_many (next pad)", tot_next_pad);
    need("send_all (new row)", tot_new_row);
    need("send_all (skipped pad)", tot_skip);
    need("noise cluster dropped", tot_noise);
    need("overflowed cluster dropped", tot_ovf);
    need("insert_seq", tot_insert);
    for (int i = 0; i < NSTATES; i++) begin
      mstate_t sti;
      sti = mstate_t'(i);
      $display("  state %-16s %8d cycles", sti.name(), state_cycles[i]);
      if (i != int'(S_IDLE)) need(sti.name(), state_cycles[i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
