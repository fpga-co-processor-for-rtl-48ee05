// cf_ref_pkg -- reference model of the cluster finder for the testbenches.
//
// A plain list-based model, written without the ring buffer, the pipeline or
// the SmartMult: sequences are formed from a charge map by scanning each pad
// downwards in time, and clusters are formed with two queues (previous pad,
// current pad) and ordinary multiplication. It reproduces the order in which
// the hardware emits clusters, so results are compared one by one. Every
// cluster also carries the raw moments sum(q*t) and sum(q*pad), which the
// testbenches use to check the relative-coordinate formulas
// a*Q - T = sum(q*t) and b*Q + P = sum(q*pad).
package cf_ref_pkg;

  typedef struct {
    bit  eoe;
    int  row, pad, a, q, s, mid2, len;
    bit  ovf;
    longint sqt, sqp;
  } rseq_t;

  typedef struct {
    int  row, a, b, q, psum, tsum, mid2, npads, lastq;
    bit  falling, ovf;
    longint sqt, sqp;
  } rcl_t;

  // Build a sequence record from its charges, listed from the top down.
  function automatic rseq_t make_seq(int row, int pad, int top, int charges[$], int mb);
    rseq_t r;
    r.eoe = 0; r.row = row; r.pad = pad; r.a = top; r.len = charges.size();
    r.q = 0; r.s = 0; r.sqt = 0; r.sqp = 0;
    foreach (charges[k]) begin
      r.q   += charges[k];
      r.s   += k * charges[k];
      r.sqt += longint'(charges[k]) * (top - k);
      r.sqp += longint'(charges[k]) * pad;
    end
    r.mid2 = 2 * top - (r.len - 1);
    r.ovf  = r.len > (1 << mb);
    return r;
  endfunction


  // Synthetic TPC-like data of one pad row: a few charge clouds ("blobs")
  // of random position, width and amplitude on a pad x time grid, cut at a
  // zero-suppression threshold. Long clouds in time produce sequences beyond
  // the multiplicand limit, close pairs produce local minima.
  class row_map;
    int npads, nt;
    int q[][];
    function new(int npads, int nt);
      this.npads = npads; this.nt = nt;
      q = new[npads];
      foreach (q[p]) begin q[p] = new[nt]; foreach (q[p][t]) q[p][t] = 0; end
    endfunction
    function void add_blob(int p0, int t0, int sp, int st, int amp, int thr);
      for (int p = p0 - 3 * sp; p <= p0 + 3 * sp; p++)
        for (int t = t0 - 3 * st; t <= t0 + 3 * st; t++) begin
          int v, dp, dt;
          if (p < 0 || p >= npads || t < 0 || t >= nt) continue;
          dp = p - p0; dt = t - t0;
          v = (amp * sp * sp * st * st) / (sp * sp * st * st + 4 * dp * dp * st * st + 4 * dt * dt * sp * sp);
          if (v < thr) continue;
          q[p][t] += v;
          if (q[p][t] > 1023) q[p][t] = 1023;
        end
    endfunction
    function void add_random(int nblobs, int long_pct, int thr);
      repeat (nblobs) begin
        int st;
        st = ($urandom_range(99) < long_pct) ? 10 : $urandom_range(3, 1);
        add_blob($urandom_range(npads - 1), $urandom_range(nt - 1), $urandom_range(2, 1), st,
                 $urandom_range(900, 40), thr);
      end
    endfunction
    // Sequences of one pad, top down: maximal runs of non-zero charges.
    function void pad_seqs(int row, int p, int mb, ref rseq_t seqs[$], ref int tops[$], ref int lens[$]);
      int t = nt - 1;
      while (t >= 0) begin
        if (q[p][t] != 0) begin
          int c[$];
          int top = t;
          while (t >= 0 && q[p][t] != 0) begin c.push_back(q[p][t]); t--; end
          seqs.push_back(make_seq(row, p, top, c, mb));
          tops.push_back(top); lens.push_back(c.size());
        end else t--;
      end
    endfunction
  endclass

  class merger_model;
    int md, min_q, min_pads, mb;
    bit deconv;
    rcl_t prev[$], cur[$], out[$];
    int  cur_row, cur_pad;
    bit  have_row;
    // how often each mechanism occurred
    int  n_merge, n_split, n_send_one, n_next_pad, n_new_row, n_skip_pad,
         n_insert, n_noise, n_ovf_drop, n_eoe, n_sent;

    function new(int md, bit deconv, int min_q, int min_pads, int mb);
      this.md = md; this.deconv = deconv; this.min_q = min_q;
      this.min_pads = min_pads; this.mb = mb;
      have_row = 0;
    endfunction

    function void emit(rcl_t c);
      if (c.ovf) n_ovf_drop++;
      else if (c.q < min_q || c.npads < min_pads) n_noise++;
      else begin out.push_back(c); n_sent++; end
    endfunction

    function rcl_t from_seq(rseq_t s);
      rcl_t c;
      c.row = s.row; c.a = s.a; c.b = s.pad; c.q = s.q; c.psum = 0; c.tsum = s.s;
      c.mid2 = s.mid2; c.npads = 1; c.lastq = s.q; c.falling = 0; c.ovf = s.ovf;
      c.sqt = s.sqt; c.sqp = s.sqp;
      return c;
    endfunction

    function rcl_t merge(rcl_t c, rseq_t s);
      rcl_t m = c;
      int da;
      if (s.a > c.a) begin
        da = s.a - c.a;
        m.tsum = c.tsum + da * c.q + s.s;
        m.a = s.a;
      end else begin
        da = c.a - s.a;
        m.tsum = c.tsum + s.s + da * s.q;
      end
      m.psum = c.psum + c.npads * s.q;
      m.q = c.q + s.q;
      m.ovf = c.ovf || s.ovf || da >= (1 << mb) || c.npads >= (1 << mb);
      m.npads = (c.npads == (1 << (mb + 1)) - 1) ? c.npads : c.npads + 1;
      m.mid2 = s.mid2; m.lastq = s.q; m.falling = s.q < c.lastq;
      m.sqt = c.sqt + s.sqt; m.sqp = c.sqp + s.sqp;
      return m;
    endfunction

    function void flush_all();
      while (prev.size() > 0) emit(prev.pop_front());
      while (cur.size() > 0) emit(cur.pop_front());
    endfunction

    function void push(rseq_t s);
      if (!have_row || s.eoe || s.row != cur_row || s.pad < cur_pad || s.pad > cur_pad + 1) begin
        if (s.eoe) n_eoe++;
        else if (have_row && s.row == cur_row && s.pad > cur_pad + 1) n_skip_pad++;
        else n_new_row++;
        flush_all();
      end else if (s.pad == cur_pad + 1) begin
        n_next_pad++;
        while (prev.size() > 0) emit(prev.pop_front());
        prev = cur;
        cur = {};
      end
      have_row = !s.eoe;
      cur_row = s.row; cur_pad = s.pad;
      if (s.eoe) return;
      forever begin
        rcl_t c;
        int d;
        if (prev.size() == 0) begin cur.push_back(from_seq(s)); n_insert++; return; end
        c = prev[0];
        d = s.mid2 - c.mid2;
        if ((d < 0 ? -d : d) < 2 * md) begin
          void'(prev.pop_front());
          if (deconv && c.falling && s.q > c.lastq) begin
            emit(c); cur.push_back(from_seq(s)); n_split++;
          end else begin
            cur.push_back(merge(c, s)); n_merge++;
          end
          return;
        end else if (d < 0) begin
          void'(prev.pop_front()); emit(c); n_send_one++;
        end else begin
          cur.push_back(from_seq(s)); n_insert++; return;
        end
      end
    endfunction
  endclass

endpackage
