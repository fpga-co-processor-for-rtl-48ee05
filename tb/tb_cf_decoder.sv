// tb_cf_decoder -- self-checking testbench of the Decoder.
//
// Random channels (row, pad, bunches of random charges, some longer than
// the multiplicand limit, some channels empty) are serialised into the
// ALTRO-like word stream and sent at full rate with occasional idle cycles.
// Each sequence record is compared with values computed here from the
// charges (Q_j, sum k*q, top time, doubled middle, overflow), and must
// appear exactly one cycle after its last charge. An end-of-event pulse
// must produce a record with eoe set.
module tb_cf_decoder;
  import cf_pkg::*;
  import cf_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic              in_valid, in_eoe, seq_valid;
  logic [WORD_W-1:0] in_word;
  seq_t              seq;

  cf_decoder dut (.*);

  int checks = 0, failures = 0, cyc = 0, n_ovf = 0, n_eoe = 0;
  rseq_t exp_q[$];
  int    exp_cyc[$];
  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) begin
    if (rst_n && seq_valid) begin
      rseq_t e;
      int    c;
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL: unexpected sequence");
      end else begin
        e = exp_q.pop_front();
        c = exp_cyc.pop_front();
        if (seq.eoe != e.eoe ||
            (!e.eoe && (seq.row != ROW_W'(e.row) || seq.pad != PAD_W'(e.pad) || seq.a != TIME_W'(e.a) ||
                        seq.ovf != e.ovf ||
                        (!e.ovf && (seq.q != SEQQ_W'(e.q) || seq.s != SEQS_W'(e.s) || seq.mid2 != MID_W'(e.mid2)))))) begin
          failures++;
          $display("FAIL: got r%0d p%0d a=%0d q=%0d s=%0d m=%0d o=%0d, exp r%0d p%0d a=%0d q=%0d s=%0d m=%0d o=%0d",
                   seq.row, seq.pad, seq.a, seq.q, seq.s, seq.mid2, seq.ovf,
                   e.row, e.pad, e.a, e.q, e.s, e.mid2, e.ovf);
        end
        checks++;
        if (cyc != c) begin failures++; $display("FAIL: latency, cycle %0d expected %0d", cyc, c); end
        if (e.ovf) n_ovf++;
        if (e.eoe) n_eoe++;
      end
    end
  end

  task automatic send(logic [WORD_W-1:0] w, bit last_of_seq, rseq_t r);
    @(negedge clk);
    while ($urandom_range(99) < 10) begin
      in_valid = 0;
      @(negedge clk);
    end
    in_valid = 1;
    in_word  = w;
    if (last_of_seq) begin
      exp_q.push_back(r);
      exp_cyc.push_back(cyc + 1);
    end
  endtask

  initial begin
    in_valid = 0; in_eoe = 0; in_word = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int ch = 0; ch < 300; ch++) begin
      automatic int row = ch / 20, pad = ch % 20;
      automatic rseq_t seqs[$];
      automatic int    charges[$][$];
      automatic int    nw = 0;
      automatic int    t = 1023;
      automatic int    nb = ($urandom_range(9) == 0) ? 0 : $urandom_range(4, 1);
      for (int b = 0; b < nb; b++) begin
        automatic int len = ($urandom_range(9) == 0) ? $urandom_range(24, 17) : $urandom_range(16, 1);
        automatic int c[$];
        t -= $urandom_range(40, 1);
        if (t - len < 0) break;
        for (int k = 0; k < len; k++) c.push_back($urandom_range(1023, 1));
        seqs.push_back(make_seq(row, pad, t, c, MULT_BITS));
        charges.push_back(c);
        nw += len + 2;
        t -= len;
      end
      send(WORD_W'(row), 0, seqs.size() ? seqs[0] : '{default: 0});
      send(WORD_W'(pad), 0, '{default: 0});
      send(WORD_W'(nw), 0, '{default: 0});
      foreach (seqs[i]) begin
        send(WORD_W'(charges[i].size() + 2), 0, seqs[i]);
        send(WORD_W'(seqs[i].a), 0, seqs[i]);
        foreach (charges[i][k]) send(WORD_W'(charges[i][k]), k == charges[i].size() - 1, seqs[i]);
      end
    end
    begin
      automatic rseq_t e = '{default: 0};
      e.eoe = 1;
      @(negedge clk);
      in_valid = 0;
      in_eoe = 1;
      exp_q.push_back(e);
      exp_cyc.push_back(cyc + 1);
      @(negedge clk);
      in_eoe = 0;
    end
    repeat (5) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d sequences missing", exp_q.size()); end
    checks++;
    if (n_ovf == 0 || n_eoe == 0) begin failures++; $display("FAIL: overflow or end-of-event not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
