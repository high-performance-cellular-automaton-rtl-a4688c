// tb_scala_pheno -- workload test: both decoders under phenomenological
// noise, i.e. repeated rounds with data-qubit errors and measurement errors,
// at the largest distance used for that setting (d = 15 for both codes).
//
// Each step the testbench (1) flips every data qubit with probability p,
// (2) measures the syndrome and flips every measured bit with probability q,
// (3) steps the decoder on that faulty syndrome with a periodic signal reset
// every t_R steps, and (4) applies the returned corrections. The reference
// models in scala_ref_pkg are given the same faulty syndrome (step_syn), and
// the qubits of design and model must agree after every step.
//
// Repetition code: a run lasts until a logical failure, taken as the moment
// at least (d+1)/2 qubits are flipped, or a step limit. The mean number of
// steps to failure is printed for each error rate and must be larger at the
// lower rate. A quiet tail (no new errors, t_R = d) must then bring the
// syndrome to zero. Toric code: both arrays run for a fixed number of steps
// under noise and must agree with the models; no failure time is measured,
// since deciding a logical failure on the torus needs a matching decoder.
// Every mechanism (data and measurement errors, periodic resets, logical
// failures, corrections on both toric arrays) is counted and must occur.
module tb_scala_pheno;
  import scala_pkg::*;
  import scala_ref_pkg::*;

  localparam int unsigned D1 = 15;
  localparam int unsigned D2 = 15;
  localparam int unsigned TR1_W  = $clog2(D1 + 1);
  localparam int unsigned TR2_W  = $clog2(D2 + 1);
  localparam int unsigned CNT1_W = $clog2(D1 * D1 + 2);
  localparam int unsigned CNT2_W = $clog2(D2 * D2 + 2);
  localparam int unsigned MAX_STEPS = 4000;

  logic clk = 0, rst_n = 0;
  logic                  rep_start = 0, rep_step = 0;
  sched_mode_e           rep_mode = SCHED_PERIODIC;
  logic [TR1_W-1:0]      rep_t_r = '0;
  logic [D1-1:0]         rep_syndrome = '0, rep_flip;
  logic                  rep_flip_valid, rep_done;
  logic [CNT1_W-1:0]     rep_step_count;
  logic                  tor_start = 0, tor_step = 0;
  sched_mode_e           tor_mode = SCHED_PERIODIC;
  logic [TR2_W-1:0]      tor_t_r = '0;
  logic [D2-1:0][D2-1:0] tor_synd_plaq = '0, tor_synd_star = '0;
  logic [D2-1:0][D2-1:0] tor_xflip_h, tor_xflip_v, tor_zflip_h, tor_zflip_v;
  logic                  tor_flip_valid, tor_done;
  logic [CNT2_W-1:0]     tor_step_count;

  int checks = 0, failures = 0;
  int n_data = 0, n_meas = 0, n_rst = 0, n_fail = 0, n_corr_x = 0, n_corr_z = 0;

  scala_top #(.D1(D1), .D2(D2)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #500_000_000;
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

  // Bernoulli draw with probability ppm / 1e6
  function automatic bit coin(int unsigned ppm);
    return $urandom_range(999_999) < ppm;
  endfunction

  // ---------------- repetition code ----------------
  bit q[D1];

  // one noisy step; returns the weight after the correction
  task automatic rep_noisy_step(ref1d m, int unsigned p, int unsigned qm, int tr, int t,
                                output int w);
    bit s[];
    s = new[D1];
    for (int i = 0; i < D1; i++)
      if (coin(p)) begin q[i] ^= 1; m.q[i] ^= 1; n_data++; end
    for (int i = 0; i < D1; i++) begin
      s[i] = q[i] ^ q[(i + 1) % D1];
      if (coin(qm)) begin s[i] ^= 1; n_meas++; end
    end
    @(negedge clk);
    for (int i = 0; i < D1; i++) rep_syndrome[i] = s[i];
    rep_step = 1;
    @(negedge clk);
    rep_step = 0;
    for (int i = 0; i < D1; i++) q[i] ^= rep_flip[i];
    m.step_syn(s, t % tr == 0);
    if (t % tr == 0) n_rst++;
    w = 0;
    for (int i = 0; i < D1; i++) begin
      if (q[i] != m.q[i]) begin
        check(0, $sformatf("repetition qubit %0d differs from model at step %0d", i, t));
        break;
      end
      w += int'(q[i]);
    end
    checks++;
  endtask

  // run until a logical failure; returns the failure step (MAX_STEPS if none)
  task automatic rep_lifetime(int unsigned p, int unsigned qm, int tr, output int tf);
    ref1d m;
    int w;
    m = new(D1);
    foreach (q[i]) q[i] = 0;
    @(negedge clk);
    rep_t_r = TR1_W'(tr); rep_start = 1;
    @(negedge clk);
    rep_start = 0;
    tf = MAX_STEPS;
    for (int t = 1; t <= MAX_STEPS; t++) begin
      rep_noisy_step(m, p, qm, tr, t, w);
      if (w >= (D1 + 1) / 2) begin
        tf = t;
        n_fail++;
        break;
      end
    end
  endtask

  // ---------------- toric code ----------------
  bit xh[D2][D2], xv[D2][D2], zh[D2][D2], zv[D2][D2];

  task automatic tor_run(int unsigned p, int unsigned qm, int tr, int steps);
    ref2d mx, mz;
    bit sx[][], sz[][];
    mx = new(D2); mz = new(D2);
    sx = new[D2]; sz = new[D2];
    foreach (sx[r]) begin sx[r] = new[D2]; sz[r] = new[D2]; end
    for (int r = 0; r < D2; r++)
      for (int c = 0; c < D2; c++) begin
        xh[r][c] = 0; xv[r][c] = 0; zh[r][c] = 0; zv[r][c] = 0;
      end
    @(negedge clk);
    tor_t_r = TR2_W'(tr); tor_start = 1;
    @(negedge clk);
    tor_start = 0;
    for (int t = 1; t <= steps; t++) begin
      bit mism;
      for (int r = 0; r < D2; r++)
        for (int c = 0; c < D2; c++) begin
          if (coin(p)) begin xh[r][c] ^= 1; mx.h[r][c] ^= 1; n_data++; end
          if (coin(p)) begin xv[r][c] ^= 1; mx.v[r][c] ^= 1; n_data++; end
          if (coin(p)) begin zh[r][c] ^= 1; mz.h[r][c] ^= 1; n_data++; end
          if (coin(p)) begin zv[r][c] ^= 1; mz.v[r][c] ^= 1; n_data++; end
        end
      for (int r = 0; r < D2; r++)
        for (int c = 0; c < D2; c++) begin
          sx[r][c] = xh[r][c] ^ xh[(r + 1) % D2][c] ^ xv[r][c] ^ xv[r][(c + 1) % D2];
          sz[r][c] = zh[r][c] ^ zh[(r + 1) % D2][c] ^ zv[r][c] ^ zv[r][(c + 1) % D2];
          if (coin(qm)) begin sx[r][c] ^= 1; n_meas++; end
          if (coin(qm)) begin sz[r][c] ^= 1; n_meas++; end
          tor_synd_plaq[r][c] = sx[r][c];
          tor_synd_star[r][c] = sz[r][c];
        end
      @(negedge clk);
      tor_step = 1;
      @(negedge clk);
      tor_step = 0;
      for (int r = 0; r < D2; r++)
        for (int c = 0; c < D2; c++) begin
          xh[r][c] ^= tor_xflip_h[r][c]; xv[r][c] ^= tor_xflip_v[r][c];
          zh[r][c] ^= tor_zflip_h[r][c]; zv[r][c] ^= tor_zflip_v[r][c];
        end
      mx.step_syn(sx, t % tr == 0);
      mz.step_syn(sz, t % tr == 0);
      if (t % tr == 0) n_rst++;
      mism = 0;
      for (int r = 0; r < D2; r++)
        for (int c = 0; c < D2; c++)
          if (xh[r][c] != mx.h[r][c] || xv[r][c] != mx.v[r][c] ||
              zh[r][c] != mz.h[r][c] || zv[r][c] != mz.v[r][c]) mism = 1;
      check(!mism, $sformatf("toric qubits differ from model at step %0d", t));
    end
    n_corr_x += mx.n_nn + mx.n_sf;
    n_corr_z += mz.n_nn + mz.n_sf;
  endtask

  initial begin
    int unsigned rates[2] = '{10_000, 60_000};   // p = q = 1 % and 6 %
    real mean_tf[2];
    repeat (3) @(negedge clk);
    rst_n = 1;

    // repetition code: mean steps to failure at two error rates
    foreach (rates[k]) begin
      int sum;
      sum = 0;
      for (int run = 0; run < 20; run++) begin
        int tf;
        rep_lifetime(rates[k], rates[k], D1 / 2, tf);
        sum += tf;
      end
      mean_tf[k] = real'(sum) / 20.0;
      $display("SCALA1D d=%0d p=q=%0.3f t_R=%0d: mean steps to logical failure %0.1f (cap %0d)",
               D1, real'(rates[k]) / 1e6, D1 / 2, mean_tf[k], MAX_STEPS);
    end
    check(mean_tf[0] > mean_tf[1], "lower error rate lives longer");

    // quiet tail: after noise, with t_R = d, the syndrome clears
    for (int run = 0; run < 20; run++) begin
      ref1d m;
      int w;
      m = new(D1);
      foreach (q[i]) q[i] = 0;
      @(negedge clk);
      rep_t_r = TR1_W'(D1); rep_start = 1;
      @(negedge clk);
      rep_start = 0;
      for (int t = 1; t <= 3 * D1; t++) rep_noisy_step(m, 20_000, 20_000, D1, t, w);
      for (int t = 3 * D1 + 1; t <= 8 * D1; t++) rep_noisy_step(m, 0, 0, D1, t, w);
      begin
        bit z = 1;
        for (int i = 0; i < D1; i++) if (q[i] != q[(i + 1) % D1]) z = 0;
        check(z, $sformatf("syndrome not cleared after the quiet tail (run %0d)", run));
      end
    end

    // toric code under noise, both arrays
    tor_run(5_000, 5_000, D2 / 2, 300);
    tor_run(20_000, 20_000, 4, 300);

    check(n_data > 0, "data errors injected");
    check(n_meas > 0, "measurement errors injected");
    check(n_rst > 0,  "periodic resets");
    check(n_fail > 0, "logical failures observed");
    check(n_corr_x > 0 && n_corr_z > 0, "corrections on both toric arrays");
    $display("data=%0d meas=%0d resets=%0d failures=%0d corr_x=%0d corr_z=%0d",
             n_data, n_meas, n_rst, n_fail, n_corr_x, n_corr_z);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
