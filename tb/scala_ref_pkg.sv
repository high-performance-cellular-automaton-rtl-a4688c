// scala_ref_pkg -- behavioural reference models of the SCALA automata, for
// the testbenches only.
//
// Each class holds its own copy of the data qubits and of the cell signals and
// advances one automaton step at a time, written directly from the rules
// (loops over a whole lattice, no cells, no ports), so that a testbench can
// compare a design's qubits and signals with it after every step. step()
// measures the syndrome of the model's own qubits; step_syn() takes a given
// syndrome instead, for runs with measurement errors. The models
// use the same conventions as the RTL: 1D cell i between qubits i and i+1;
// 2D plaquette (r,c) with north edge h[r][c] and west edge v[r][c]; signals
// named by direction of travel; reset at the end of a step.
package scala_ref_pkg;

  class ref1d;
    int d;
    bit q[];          // data qubits (1 = error)
    bit l[], r[];     // stored signals
    int n_nn, n_sf;   // corrections applied so far, by rule

    function new(int dd);
      d = dd;
      q = new[d]; l = new[d]; r = new[d];
      n_nn = 0; n_sf = 0;
    endfunction

    function bit syn(int i);
      return q[i] ^ q[(i + 1) % d];
    endfunction

    function int weight();
      int w = 0;
      foreach (q[i]) w += int'(q[i]);
      return w;
    endfunction

    function int nsig();
      int n = 0;
      for (int i = 0; i < d; i++) n += int'(l[i]) + int'(r[i]);
      return n;
    endfunction

    // one step on the syndrome of the current qubits
    function void step(bit reset);
      bit s[];
      s = new[d];
      for (int i = 0; i < d; i++) s[i] = syn(i);
      step_syn(s, reset);
    endfunction

    // one step on a given (possibly faulty) measured syndrome
    function void step_syn(bit s[], bit reset);
      bit ol[], orr[], nl[], nr[], fq[];
      ol = new[d]; orr = new[d]; nl = new[d]; nr = new[d]; fq = new[d];
      for (int i = 0; i < d; i++) begin
        bit b = s[i] & ~l[i] & ~r[i];
        ol[i]  = l[i] | b;
        orr[i] = r[i] | b;
      end
      for (int i = 0; i < d; i++) begin
        nl[i] = ol[(i + 1) % d];
        nr[i] = orr[(i + d - 1) % d];
      end
      for (int i = 0; i < d; i++) begin
        bit dl = s[(i + d - 1) % d], dc = s[i], dr = s[(i + 1) % d];
        if (dl && dc) begin
          fq[i] ^= 1; n_nn++;
        end else if (!dl && dc && !dr && !l[i] && r[i]) begin
          fq[i] ^= 1; n_sf++;
        end else if (!dl && dc && !dr && l[i] && !r[i]) begin
          fq[(i + 1) % d] ^= 1; n_sf++;
        end
      end
      for (int i = 0; i < d; i++) begin
        q[i] ^= fq[i];
        l[i] = reset ? 1'b0 : nl[i];
        r[i] = reset ? 1'b0 : nr[i];
      end
    endfunction
  endclass

  class ref2d;
    int d;
    bit h[][], v[][];          // edge qubits
    bit sn[][], se[][], ss[][], sw[][];
    int n_nn, n_sf, n_refl;

    function new(int dd);
      d = dd;
      h = new[d]; v = new[d]; sn = new[d]; se = new[d]; ss = new[d]; sw = new[d];
      for (int i = 0; i < d; i++) begin
        h[i] = new[d]; v[i] = new[d];
        sn[i] = new[d]; se[i] = new[d]; ss[i] = new[d]; sw[i] = new[d];
      end
      n_nn = 0; n_sf = 0; n_refl = 0;
    endfunction

    function bit syn(int r, int c);
      return h[r][c] ^ h[(r + 1) % d][c] ^ v[r][c] ^ v[r][(c + 1) % d];
    endfunction

    function int nsyn();
      int n = 0;
      for (int r = 0; r < d; r++) for (int c = 0; c < d; c++) n += syn(r, c);
      return n;
    endfunction

    function int weight();
      int n = 0;
      for (int r = 0; r < d; r++) for (int c = 0; c < d; c++) n += int'(h[r][c]) + int'(v[r][c]);
      return n;
    endfunction

    // Parity of errors crossing the two non-contractible cuts; with zero
    // syndrome, a 1 in either means a logical operator.
    function bit logical_h();
      bit p = 0;
      for (int c = 0; c < d; c++) p ^= h[0][c];
      return p;
    endfunction
    function bit logical_v();
      bit p = 0;
      for (int r = 0; r < d; r++) p ^= v[r][0];
      return p;
    endfunction

    // one step on the syndrome of the current qubits
    function void step(bit reset);
      bit s[][];
      s = new[d];
      for (int r = 0; r < d; r++) begin
        s[r] = new[d];
        for (int c = 0; c < d; c++) s[r][c] = syn(r, c);
      end
      step_syn(s, reset);
    endfunction

    // one step on a given (possibly faulty) measured syndrome
    function void step_syn(bit s[][], bit reset);
      bit on[][], oe[][], os[][], ow[][];
      bit fh[][], fv[][];
      bit nsn[][], nse[][], nss[][], nsw[][];
      nsn = new[d]; nse = new[d]; nss = new[d]; nsw = new[d];
      on = new[d]; oe = new[d]; os = new[d]; ow = new[d]; fh = new[d]; fv = new[d];
      for (int r = 0; r < d; r++) begin
        on[r] = new[d]; oe[r] = new[d]; os[r] = new[d]; ow[r] = new[d];
        fh[r] = new[d]; fv[r] = new[d];
        nsn[r] = new[d]; nse[r] = new[d]; nss[r] = new[d]; nsw[r] = new[d];
      end
      // broadcast, per axis
      for (int r = 0; r < d; r++) for (int c = 0; c < d; c++) begin
        bit bh = s[r][c] & ~se[r][c] & ~sw[r][c];
        bit bv = s[r][c] & ~sn[r][c] & ~ss[r][c];
        on[r][c] = sn[r][c] | bv; os[r][c] = ss[r][c] | bv;
        oe[r][c] = se[r][c] | bh; ow[r][c] = sw[r][c] | bh;
      end
      for (int r = 0; r < d; r++) for (int c = 0; c < d; c++) begin
        int rn = (r + d - 1) % d, rs = (r + 1) % d, cw = (c + d - 1) % d, ce = (c + 1) % d;
        bit xn, xe, xs, xw, t;
        int k;
        bit dC, dN, dE, dS, dW;
        // propagation
        xn = on[rs][c]; xs = os[rn][c]; xe = oe[r][cw]; xw = ow[r][ce];
        // reflection
        k = int'(xn) + int'(xe) + int'(xs) + int'(xw);
        if (!s[r][c] && k > 1) begin
          t = xn; xn = xs; xs = t;
          t = xe; xe = xw; xw = t;
          if ((xn | xs) && (xe | xw)) n_refl++;
        end
        // corrections, on the signals held at the start of the step.
        // A signal travelling east came from the west, etc.
        dC = s[r][c]; dN = s[rn][c]; dE = s[r][ce]; dS = s[rs][c]; dW = s[r][cw];
        if (dC && dW) begin
          fv[r][c] ^= 1; n_nn++;
        end else if (dC && dN) begin
          fh[r][c] ^= 1; n_nn++;
        end else if (dC && !dN && !dE && !dS && !dW) begin
          bit fw = se[r][c], fe = sw[r][c], fn = ss[r][c], fs = sn[r][c];
          int k0 = int'(sn[r][c]) + int'(se[r][c]) + int'(ss[r][c]) + int'(sw[r][c]);
          if (k0 == 1 || k0 == 3) begin
            if      (fw && !fe) begin fv[r][c]  ^= 1; n_sf++; end
            else if (fe && !fw) begin fv[r][ce] ^= 1; n_sf++; end
            else if (fn && !fs) begin fh[r][c]  ^= 1; n_sf++; end
            else if (fs && !fn) begin fh[rs][c] ^= 1; n_sf++; end
          end else if (k0 == 2) begin
            if      (fw && !fe) begin fv[r][c] ^= 1; n_sf++; end
            else if (fn && fe)  begin fh[r][c] ^= 1; n_sf++; end
          end
        end
        nsn[r][c] = xn; nse[r][c] = xe; nss[r][c] = xs; nsw[r][c] = xw;
      end
      for (int r = 0; r < d; r++) for (int c = 0; c < d; c++) begin
        h[r][c] ^= fh[r][c]; v[r][c] ^= fv[r][c];
        sn[r][c] = reset ? 1'b0 : nsn[r][c];
        se[r][c] = reset ? 1'b0 : nse[r][c];
        ss[r][c] = reset ? 1'b0 : nss[r][c];
        sw[r][c] = reset ? 1'b0 : nsw[r][c];
      end
    endfunction
  endclass

endpackage
