// tb_scala_top_full -- full-size run of scala_top at its default parameters
// (repetition distance 81, toric distance 81: 81 + 2 x 6561 cells).
//
// The testbench plays the host as in tb_scala_top but without overriding any
// parameter. It checks:
//   * repetition code, no reset, 79 = d-2 steps: for random error patterns
//     (below and above half weight) the result is the majority vote, with the
//     qubits compared against ref1d after every step;
//   * repetition code, periodic reset t_r = 9, with random data errors in the
//     first half of the run, compared against ref1d after every step;
//   * toric code, ramp schedule for the full d*d = 6561 steps, with a
//     weight-3 string, separated single errors and an L-shaped pair on the
//     primal lattice and a different set on the dual lattice: the qubits are
//     compared against ref2d during the first 120 steps, and at the end both
//     syndromes are zero, no logical operator was applied, tor_done is high
//     and tor_step_count is 6561. Nearest-Neighbour, Signal-Follow and
//     reflection must have occurred on both arrays.
module tb_scala_top_full;
  import scala_pkg::*;
  import scala_ref_pkg::*;

  localparam int unsigned D1 = 81;
  localparam int unsigned D2 = 81;
  localparam int unsigned TR1_W  = $clog2(D1 + 1);
  localparam int unsigned TR2_W  = $clog2(D2 + 1);
  localparam int unsigned CNT1_W = $clog2(D1 * D1 + 2);
  localparam int unsigned CNT2_W = $clog2(D2 * D2 + 2);
  localparam int unsigned CMP_STEPS = 120;

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

  scala_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2_000_000_000;
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

  task automatic rep_run(sched_mode_e m, int tr, int steps, bit noise, output ref1d mdl);
    mdl = new(D1);
    @(negedge clk);
    rep_mode = m; rep_t_r = TR1_W'(tr); rep_start = 1;
    @(negedge clk);
    rep_start = 0;
    for (int i = 0; i < D1; i++) mdl.q[i] = q[i];
    for (int t = 1; t <= steps; t++) begin
      bit mism;
      if (noise && t < steps / 2 && $urandom_range(3) == 0) begin
        int unsigned i;
        i = $urandom_range(D1 - 1);
        q[i] ^= 1; mdl.q[i] ^= 1;
      end
      @(negedge clk);
      rep_syndrome = rep_synd();
      rep_step = 1;
      @(negedge clk);
      rep_step = 0;
      check(rep_flip_valid, "rep_flip_valid");
      for (int i = 0; i < D1; i++) q[i] ^= rep_flip[i];
      mdl.step(m == SCHED_PERIODIC && t % tr == 0);
      mism = 0;
      for (int i = 0; i < D1; i++) if (q[i] != mdl.q[i]) mism = 1;
      check(!mism, $sformatf("repetition qubits differ from model at step %0d", t));
    end
  endtask

  // ---------------- toric code ----------------
  bit xh[D2][D2], xv[D2][D2], zh[D2][D2], zv[D2][D2];

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

  bit ramp_rst[int];

  initial begin
    ref1d m1;
    ref2d mx, mz;
    int t;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1. repetition code, code capacity
    for (int run = 0; run < 6; run++) begin
      int w0, w;
      w0 = 0;
      for (int i = 0; i < D1; i++) begin
        q[i] = ($urandom_range(99) < 20 + 12 * run);
        w0 += q[i];
      end
      rep_run(SCHED_NONE, 0, D1 - 2, 0, m1);
      w = 0;
      foreach (q[i]) w += q[i];
      check(w == ((w0 < (D1 + 1) / 2) ? 0 : D1),
            $sformatf("majority vote, run %0d, weight %0d -> %0d", run, w0, w));
      check(rep_step_count == CNT1_W'(D1 - 2), "rep_step_count");
      check(m1.n_nn > 0 && m1.n_sf > 0, "1D rules applied");
    end

    // 2. repetition code, periodic reset and data noise
    foreach (q[i]) q[i] = 0;
    rep_run(SCHED_PERIODIC, 9, 4 * D1, 1, m1);

    // 3. toric code, ramp over d*d steps
    t = 0;
    for (int k = 1; k <= D2; k++) begin t += k; ramp_rst[t] = 1; end
    for (int k = D2 - 1; k >= 1; k--) begin t += k; ramp_rst[t] = 1; end
    check(t == D2 * D2, "ramp length is d*d");

    xv[40][40] = 1; xv[40][41] = 1; xv[40][42] = 1;   // weight-3 string
    xh[10][70] = 1;                                   // single errors
    xh[10][5]  = 1; xv[11][5] = 1;
    zh[60][20] = 1; zh[61][20] = 1;                   // vertical pair
    zv[20][20] = 1; zh[20][21] = 1;                   // L-shaped pair
    zv[5][77]  = 1;
    mx = new(D2); mz = new(D2);
    for (int r = 0; r < D2; r++)
      for (int c = 0; c < D2; c++) begin
        mx.h[r][c] = xh[r][c]; mx.v[r][c] = xv[r][c];
        mz.h[r][c] = zh[r][c]; mz.v[r][c] = zv[r][c];
      end
    @(negedge clk);
    tor_mode = SCHED_RAMP; tor_start = 1;
    @(negedge clk);
    tor_start = 0;
    for (int s = 1; s <= D2 * D2; s++) begin
      check(!tor_done, "tor_done early");
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
      if (s <= CMP_STEPS) begin
        bit mism;
        mx.step(ramp_rst.exists(s));
        mz.step(ramp_rst.exists(s));
        mism = 0;
        for (int r = 0; r < D2; r++)
          for (int c = 0; c < D2; c++)
            if (xh[r][c] != mx.h[r][c] || xv[r][c] != mx.v[r][c] ||
                zh[r][c] != mz.h[r][c] || zv[r][c] != mz.v[r][c]) mism = 1;
        check(!mism, $sformatf("toric qubits differ from model at step %0d", s));
      end
    end
    check(tor_done, "tor_done after d*d steps");
    check(tor_step_count == CNT2_W'(D2 * D2), "tor_step_count");
    check(tor_synd(0) == '0, "plaquette syndrome cleared");
    check(tor_synd(1) == '0, "star syndrome cleared");
    check(!tor_logical(), "no logical operator applied");
    check(mx.n_nn > 0 && mz.n_nn > 0, "2D Nearest-Neighbour on both arrays");
    check(mx.n_sf > 0 && mz.n_sf > 0, "2D Signal-Follow on both arrays");
    check(mx.n_refl > 0 && mz.n_refl > 0, "2D reflection on both arrays");
    $display("2D X: nn=%0d sf=%0d refl=%0d  Z: nn=%0d sf=%0d refl=%0d (first %0d steps)",
             mx.n_nn, mx.n_sf, mx.n_refl, mz.n_nn, mz.n_sf, mz.n_refl, CMP_STEPS);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
