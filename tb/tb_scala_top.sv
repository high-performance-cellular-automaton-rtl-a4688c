// tb_scala_top -- end-to-end test of the two decoders behind scala_top, at
// reduced size (repetition distance D1 = 9, toric distance D2 = 5).
//
// The testbench plays the host: it keeps the data qubits, measures the
// stabilizers, steps the decoders through the top-level ports and applies the
// returned corrections, and follows each run with the behavioural models in
// scala_ref_pkg (bit-exact comparison of qubits after every step). The reset
// schedule the models get is computed here, independently of the design.
//
// Runs:
//   1. repetition code, no reset, every error pattern of the 2^D1: the result
//      must be the majority vote after D1-2 steps;
//   2. repetition code, periodic reset (t_r = 3), with random data errors
//      injected between steps (phenomenological data noise), 4*D1 steps;
//   3. toric code, ramp schedule, errors on both the primal (plaquette
//      syndrome, X corrections) and dual (star syndrome, Z corrections)
//      lattices: weight <= 2 must be corrected with no logical error, heavier
//      ones must match the models; tor_done after D2*D2 steps;
//   4. toric code, periodic reset with random data errors between steps.
// Mechanisms counted and required to occur: 1D broadcast, Nearest-Neighbour,
// Signal-Follow, periodic reset; 2D Nearest-Neighbour, Signal-Follow and
// reflection on each of the two arrays, ramp resets, ramp completion.
module tb_scala_top;
  import scala_pkg::*;
  import scala_ref_pkg::*;

  localparam int unsigned D1 = 9;
  localparam int unsigned D2 = 5;
  localparam int unsigned TR1_W  = $clog2(D1 + 1);
  localparam int unsigned TR2_W  = $clog2(D2 + 1);
  localparam int unsigned CNT1_W = $clog2(D1 * D1 + 2);
  localparam int unsigned CNT2_W = $clog2(D2 * D2 + 2);

  logic clk = 0, rst_n = 0;
  logic                  rep_start = 0, rep_step = 0;
  sched_mode_e           rep_mode = SCHED_NONE;
  logic [TR1_W-1:0]      rep_t_r = '0;
  logic [D1-1:0]         rep_syndrome = '0, rep_flip;
  logic                  rep_flip_valid, rep_done;
  logic [CNT1_W-1:0]     rep_step_count;
  logic                  tor_start = 0, tor_step = 0;
  sched_mode_e           tor_mode = SCHED_NONE;
  logic [TR2_W-1:0]      tor_t_r = '0;
  logic [D2-1:0][D2-1:0] tor_synd_plaq = '0, tor_synd_star = '0;
  logic [D2-1:0][D2-1:0] tor_xflip_h, tor_xflip_v, tor_zflip_h, tor_zflip_v;
  logic                  tor_flip_valid, tor_done;
  logic [CNT2_W-1:0]     tor_step_count;

  int checks = 0, failures = 0;
  int c_bcast = 0, c_nn1 = 0, c_sf1 = 0, c_prst1 = 0;
  int c_nnx = 0, c_sfx = 0, c_rfx = 0, c_nnz = 0, c_sfz = 0, c_rfz = 0;
  int c_ramp_rst = 0, c_ramp_done = 0, c_prst2 = 0;

  scala_top #(.D1(D1), .D2(D2)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  // ---------------- repetition code ----------------
  bit q[D1];

  function automatic logic [D1-1:0] rep_synd();
    logic [D1-1:0] s;
    for (int i = 0; i < D1; i++) s[i] = q[i] ^ q[(i + 1) % D1];
    return s;
  endfunction

  task automatic rep_begin(sched_mode_e m, int tr, ref1d mdl);
    @(negedge clk);
    rep_mode = m; rep_t_r = TR1_W'(tr); rep_start = 1;
    @(negedge clk);
    rep_start = 0;
    for (int i = 0; i < D1; i++) mdl.q[i] = q[i];
  endtask

  task automatic rep_do_step(ref1d mdl, bit rst);
    @(negedge clk);
    rep_syndrome = rep_synd();
    rep_step = 1;
    @(negedge clk);
    rep_step = 0;
    check(rep_flip_valid, "rep_flip_valid");
    for (int i = 0; i < D1; i++) q[i] ^= rep_flip[i];
    mdl.step(rst);
    if (rst) c_prst1++;
    for (int i = 0; i < D1; i++)
      if (q[i] != mdl.q[i]) begin
        check(0, $sformatf("repetition qubit %0d differs from model", i));
        return;
      end
    checks++;
  endtask

  // ---------------- toric code ----------------
  bit xh[D2][D2], xv[D2][D2];   // X errors on primal edges
  bit zh[D2][D2], zv[D2][D2];   // Z errors, labelled on the dual lattice

  function automatic logic [D2-1:0][D2-1:0] tor_synd(bit zlat);
    logic [D2-1:0][D2-1:0] s;
    for (int r = 0; r < D2; r++)
      for (int c = 0; c < D2; c++)
        if (!zlat) s[r][c] = xh[r][c] ^ xh[(r + 1) % D2][c] ^ xv[r][c] ^ xv[r][(c + 1) % D2];
        else       s[r][c] = zh[r][c] ^ zh[(r + 1) % D2][c] ^ zv[r][c] ^ zv[r][(c + 1) % D2];
    return s;
  endfunction

  function automatic bit tor_logical();
    bit a = 0, b = 0, e = 0, f = 0;
    for (int i = 0; i < D2; i++) begin
      a ^= xh[0][i]; b ^= xv[i][0]; e ^= zh[0][i]; f ^= zv[i][0];
    end
    return a | b | e | f;
  endfunction

  task automatic tor_begin(sched_mode_e m, int tr, ref2d mx, ref2d mz);
    @(negedge clk);
    tor_mode = m; tor_t_r = TR2_W'(tr); tor_start = 1;
    @(negedge clk);
    tor_start = 0;
    for (int r = 0; r < D2; r++)
      for (int c = 0; c < D2; c++) begin
        mx.h[r][c] = xh[r][c]; mx.v[r][c] = xv[r][c];
        mz.h[r][c] = zh[r][c]; mz.v[r][c] = zv[r][c];
      end
  endtask

  task automatic tor_do_step(ref2d mx, ref2d mz, bit rst);
    @(negedge clk);
    tor_synd_plaq = tor_synd(0);
    tor_synd_star = tor_synd(1);
    tor_step = 1;
    @(negedge clk);
    tor_step = 0;
    check(tor_flip_valid, "tor_flip_valid");
    for (int r = 0; r < D2; r++)
      for (int c = 0; c < D2; c++) begin
        xh[r][c] ^= tor_xflip_h[r][c]; xv[r][c] ^= tor_xflip_v[r][c];
        zh[r][c] ^= tor_zflip_h[r][c]; zv[r][c] ^= tor_zflip_v[r][c];
      end
    mx.step(rst);
    mz.step(rst);
    for (int r = 0; r < D2; r++)
      for (int c = 0; c < D2; c++)
        if (xh[r][c] != mx.h[r][c] || xv[r][c] != mx.v[r][c] ||
            zh[r][c] != mz.h[r][c] || zv[r][c] != mz.v[r][c]) begin
          check(0, $sformatf("toric qubit at (%0d,%0d) differs from model", r, c));
          return;
        end
    checks++;
  endtask

  task automatic tor_clear();
    for (int r = 0; r < D2; r++)
      for (int c = 0; c < D2; c++) begin
        xh[r][c] = 0; xv[r][c] = 0; zh[r][c] = 0; zv[r][c] = 0;
      end
  endtask

  task automatic tor_error(bit zlat);
    int unsigned r, c;
    bit hv;
    r  = $urandom_range(D2 - 1);
    c  = $urandom_range(D2 - 1);
    hv = $urandom_range(1);
    if (!zlat) begin if (hv) xh[r][c] ^= 1; else xv[r][c] ^= 1; end
    else       begin if (hv) zh[r][c] ^= 1; else zv[r][c] ^= 1; end
  endtask

  task automatic tor_collect(ref2d mx, ref2d mz);
    c_nnx += mx.n_nn; c_sfx += mx.n_sf; c_rfx += mx.n_refl;
    c_nnz += mz.n_nn; c_sfz += mz.n_sf; c_rfz += mz.n_refl;
  endtask

  // ramp reset steps from the interval list 1..D2, D2-1..1
  bit ramp_rst[int];
  initial begin
    int t = 0;
    for (int k = 1; k <= D2; k++) begin t += k; ramp_rst[t] = 1; end
    for (int k = D2 - 1; k >= 1; k--) begin t += k; ramp_rst[t] = 1; end
  end

  initial begin
    ref1d m1;
    ref2d mx, mz;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1. repetition code, code capacity, exhaustive
    for (int pat = 0; pat < (1 << D1); pat++) begin
      int w0, w;
      w0 = 0;
      for (int i = 0; i < D1; i++) begin q[i] = pat[i]; w0 += pat[i]; end
      m1 = new(D1);
      rep_begin(SCHED_NONE, 0, m1);
      for (int t = 1; t <= D1 - 2; t++) begin
        rep_do_step(m1, 0);
        if (t == 1) c_bcast += m1.nsig();
      end
      w = 0;
      foreach (q[i]) w += q[i];
      check(w == ((w0 < (D1 + 1) / 2) ? 0 : D1), $sformatf("majority vote, pattern %0h", pat));
      check(rep_step_count == CNT1_W'(D1 - 2), "rep_step_count");
      c_nn1 += m1.n_nn; c_sf1 += m1.n_sf;
    end

    // 2. repetition code, periodic reset, data errors between steps
    for (int run = 0; run < 20; run++) begin
      foreach (q[i]) q[i] = 0;
      m1 = new(D1);
      rep_begin(SCHED_PERIODIC, 3, m1);
      for (int t = 1; t <= 4 * D1; t++) begin
        if (t < 2 * D1 && $urandom_range(3) == 0) begin
          int unsigned i;
          i = $urandom_range(D1 - 1);
          q[i] ^= 1; m1.q[i] ^= 1;
        end
        rep_do_step(m1, t % 3 == 0);
      end
      c_nn1 += m1.n_nn; c_sf1 += m1.n_sf;
    end

    // 3. toric code, ramp
    for (int run = 0; run < 80; run++) begin
      int wx, wz;
      tor_clear();
      wx = (run < 40) ? $urandom_range(2) : $urandom_range(5, 3);
      wz = (run < 40) ? $urandom_range(2) : $urandom_range(5, 3);
      repeat (wx) tor_error(0);
      repeat (wz) tor_error(1);
      mx = new(D2); mz = new(D2);
      tor_begin(SCHED_RAMP, 0, mx, mz);
      for (int t = 1; t <= D2 * D2; t++) begin
        check(!tor_done, "tor_done before the last ramp step");
        tor_do_step(mx, mz, ramp_rst.exists(t));
        if (ramp_rst.exists(t)) c_ramp_rst++;
      end
      check(tor_done, "tor_done after D2*D2 steps");
      if (tor_done) c_ramp_done++;
      if (run < 40)
        check(tor_synd(0) == '0 && tor_synd(1) == '0 && !tor_logical(),
              $sformatf("weight <= 2 toric error not corrected (run %0d)", run));
      tor_collect(mx, mz);
    end

    // 4. toric code, periodic reset with data errors between steps
    for (int run = 0; run < 10; run++) begin
      tor_clear();
      mx = new(D2); mz = new(D2);
      tor_begin(SCHED_PERIODIC, 2, mx, mz);
      for (int t = 1; t <= 6 * D2; t++) begin
        if (t < 3 * D2 && $urandom_range(2) == 0) begin
          tor_error(0); tor_error(1);
          for (int r = 0; r < D2; r++)
            for (int c = 0; c < D2; c++) begin
              mx.h[r][c] = xh[r][c]; mx.v[r][c] = xv[r][c];
              mz.h[r][c] = zh[r][c]; mz.v[r][c] = zv[r][c];
            end
        end
        tor_do_step(mx, mz, t % 2 == 0);
        if (t % 2 == 0) c_prst2++;
      end
      tor_collect(mx, mz);
    end

    check(c_bcast > 0,  "1D broadcast happened");
    check(c_nn1 > 0,    "1D Nearest-Neighbour happened");
    check(c_sf1 > 0,    "1D Signal-Follow happened");
    check(c_prst1 > 0,  "1D periodic reset happened");
    check(c_nnx > 0 && c_nnz > 0, "2D Nearest-Neighbour happened on both arrays");
    check(c_sfx > 0 && c_sfz > 0, "2D Signal-Follow happened on both arrays");
    check(c_rfx > 0 && c_rfz > 0, "2D reflection happened on both arrays");
    check(c_ramp_rst > 0,  "ramp resets happened");
    check(c_ramp_done > 0, "ramp completed");
    check(c_prst2 > 0,     "2D periodic reset happened");
    $display("1D: bcast=%0d nn=%0d sf=%0d prst=%0d", c_bcast, c_nn1, c_sf1, c_prst1);
    $display("2D X: nn=%0d sf=%0d refl=%0d  Z: nn=%0d sf=%0d refl=%0d  ramp_rst=%0d done=%0d prst=%0d",
             c_nnx, c_sfx, c_rfx, c_nnz, c_sfz, c_rfz, c_ramp_rst, c_ramp_done, c_prst2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
