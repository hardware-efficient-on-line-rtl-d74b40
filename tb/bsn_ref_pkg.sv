// bsn_ref_pkg: independent behavioural model of pipelined truncated-error backpropagation
// in a binary-state network, used by the end-to-end testbenches as the expected result.
//
// The model keeps weights, accumulators, errors and histories per layer and applies the
// algorithm layer by layer, neuron by neuron, in the order the hardware visits them.  It
// also counts the DRAM traffic the hardware should generate and how often each mechanism
// (dropout, skipped fetch, pipeline-fill gating, weight step, clipping, repeated addition
// of a large output error, long weight lists needing several bursts) occurred.
package bsn_ref_pkg;

  typedef struct packed { bit v; bit g; bit d; } st_t;

  class bsn_ref;
    int nl;                 // number of layers including input and output
    int sz[];               // neurons per layer
    int base[];             // global address of neuron 0 of each layer
    bit bip[];              // bipolar interpretation per layer
    int kd[];               // delay K per layer
    bit w16, learn;
    int lr_shift, hinge;
    int w[][];              // w[l][i*sz[l+1]+t]
    int acc[][];
    int err[][];
    st_t hist[][][5];
    int passes;
    int cls;
    bit drop[int];          // dropout decision per global address for the current pass
    // expected traffic and mechanism counts
    longint rd_words, wr_words, bursts, std_words;
    int n_drop, n_skip, n_gate, n_step, n_clip, n_rep, n_multi, n_zero_upd;

    function new(int sizes[], int bases[], bit bips[], int ks[]);
      nl = sizes.size();
      sz = sizes; base = bases; bip = bips; kd = ks;
      w = new[nl-1];
      acc = new[nl]; err = new[nl]; hist = new[nl];
      for (int l = 0; l < nl; l++) begin
        acc[l] = new[sz[l]]; err[l] = new[sz[l]]; hist[l] = new[sz[l]];
        foreach (acc[l][i]) begin
          acc[l][i] = 0; err[l][i] = 0;
          for (int s = 0; s < 5; s++) hist[l][i][s] = '0;
        end
        if (l < nl-1) w[l] = new[sz[l]*sz[l+1]];
      end
      passes = 0;
    endfunction

    function int words_of(int n);
      return w16 ? (n+1)/2 : (n+3)/4;
    endfunction

    function int sat(int x);
      int hi = w16 ? 32767 : 127;
      if (x > hi) begin n_clip++; return hi; end
      if (x < -hi-1) begin n_clip++; return -hi-1; end
      return x;
    endfunction

    // one example; x: input bits
    function void pass(bit x[], int label, int n_in_words);
      int pc = (passes > 7) ? 7 : passes;
      rd_words += n_in_words; bursts += 1;
      foreach (x[i]) acc[0][i] = x[i] ? 1 : -1;
      for (int l = 0; l < nl-1; l++) begin
        int nt = sz[l+1];
        int lim = w16 ? 65536 : 256;
        for (int i = 0; i < sz[l]; i++) begin
          int a = acc[l][i];
          st_t s, dly;
          bit fwd, bwd, upd, bp, isin, commit;
          s.v = (a >= 0); s.g = (a >= -lim && a <= lim);
          s.d = drop.exists(base[l]+i) ? drop[base[l]+i] : 1'b0;
          if (s.d) n_drop++;
          for (int k = 4; k > 0; k--) hist[l][i][k] = hist[l][i][k-1];
          hist[l][i][0] = s;
          acc[l][i] = 0;
          dly = hist[l][i][kd[l]];
          isin = (l == 0);
          commit = learn && (pc >= kd[l]);
          if (learn && !commit) n_gate++;
          fwd = !s.d && (bip[l] || s.v);
          bwd = commit && !dly.d && (bip[l] || dly.v || (dly.g && !isin));
          upd = bwd && (bip[l] || dly.v);
          bp  = bwd && dly.g && !isin;
          if (!(fwd || bwd)) n_skip++;
          if (fwd || bwd) begin
            int nw = words_of(nt);
            int wpw = w16 ? 2 : 4;
            bit word_dirty;
            rd_words += 2 + nw; bursts += 1 + (nw + 63)/64;
            if (nw > 64) n_multi++;
            std_words += (fwd ? 2 + nw : 0) + (bwd ? 2 + nw : 0);
            word_dirty = 0;
            for (int t = 0; t < nt; t++) begin
              int wv = w[l][i*nt+t];
              int e  = err[l+1][t];
              int wn = wv;
              if (fwd) acc[l+1][t] += (bip[l] && !s.v) ? -wv : wv;
              if (bwd && e != 0) begin
                int mag = (e < 0) ? -e : e;
                int hd  = (bip[l] && !dly.v) ? -1 : 1;
                int sg  = (e < 0) ? -1 : 1;
                if (mag > 1) n_rep++;
                if (bp) acc[l][i] += e * wv;
                if (upd) for (int r = 0; r < mag; r++) begin
                  wn = sat(wn - sg*hd*(1 << lr_shift));
                  n_step++;
                end
              end
              if (wn != wv) word_dirty = 1;
              w[l][i*nt+t] = wn;
              if ((t % wpw) == wpw-1 || t == nt-1) begin
                if (word_dirty) wr_words++;
                word_dirty = 0;
              end
            end
          end
          dly = hist[l][i][kd[l]];
          err[l][i] = (dly.g && !dly.d) ? ((acc[l][i] > 0) ? 1 : (acc[l][i] < 0) ? -1 : 0) : 0;
          acc[l][i] = 0;
        end
      end
      // output layer
      begin
        int L = nl-1, cnt = 0, best = 0;
        for (int i = 0; i < sz[L]; i++) begin
          if (acc[L][i] > acc[L][best]) best = i;
          if (i != label) begin
            err[L][i] = (longint'(acc[L][i]) + hinge - acc[L][label] > 0) ? 1 : 0;
            cnt += err[L][i];
          end
        end
        err[L][label] = -cnt;
        cls = best;
        foreach (acc[L][i]) acc[L][i] = 0;
      end
      passes++;
    endfunction
  endclass

endpackage
