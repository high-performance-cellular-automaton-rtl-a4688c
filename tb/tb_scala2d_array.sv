// tb_scala2d_array -- closed-loop test of the SCALA2D lattice on a small
// toric code.
//
// The testbench keeps the toric-code qubits (north edge h[r][c] and west edge
// v[r][c] of every plaquette), computes the plaquette syndrome, steps the
// array, applies flip_h/flip_v, and after every step compares qubits and all
// stored signal bits with the behavioural model ref2d in scala_ref_pkg. The
// signal-reset schedule is driven by the testbench from its own list of reset
// steps (1, 3, 6, ..., D*D: intervals 1..D then D-1..1), for D*D steps.
// Checks:
//   * bit-exact agreement with ref2d in every step (random errors of weight
//     1 to 6);
//   * for every error of weight 1 or 2 the syndrome is zero after D*D steps
//     and no logical operator was applied;
//   * an L-shaped weight-2 error (defects on diagonal neighbours) is removed
//     and reflection occurs in it;
//   * flip_valid the cycle after each step only;
//   * every mechanism (Nearest-Neighbour, Signal-Follow, reflection, reset)
//     occurs at least once.
// D is 7 to keep the run short.
module tb_scala2d_array;
  import scala_pkg::*;
  import scala_ref_pkg::*;

  localparam int unsigned D = 7;

  logic                  clk = 0, rst_n = 0, clear = 0, step = 0, sig_reset = 0;
  logic [D-1:0][D-1:0]   syndrome = '0;
  logic [D-1:0][D-1:0]   flip_h, flip_v, defect;
  logic                  flip_valid;
  sig2d_t [D-1:0][D-1:0] sig;

  int checks = 0, failures = 0;
  int tot_nn = 0, tot_sf = 0, tot_refl = 0, tot_rst = 0;

  scala2d_array #(.D(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100_000_000;
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

  bit h[D][D], v[D][D];

  function automatic logic [D-1:0][D-1:0] synd_of();
    logic [D-1:0][D-1:0] s;
    for (int r = 0; r < D; r++)
      for (int c = 0; c < D; c++)
        s[r][c] = h[r][c] ^ h[(r + 1) % D][c] ^ v[r][c] ^ v[r][(c + 1) % D];
    return s;
  endfunction

  // ramp reset steps, from the triangular sums of the interval list
  bit is_reset[int];
  initial begin
    int t = 0;
    for (int k = 1; k <= D; k++) begin t += k; is_reset[t] = 1; end
    for (int k = D - 1; k >= 1; k--) begin t += k; is_reset[t] = 1; end
  end

  task automatic do_step(ref2d m, bit rst);
    @(negedge clk);
    syndrome  = synd_of();
    step      = 1;
    sig_reset = rst;
    @(negedge clk);
    step      = 0;
    sig_reset = 0;
    check(flip_valid === 1'b1, "flip_valid after step");
    for (int r = 0; r < D; r++)
      for (int c = 0; c < D; c++) begin
        h[r][c] ^= flip_h[r][c];
        v[r][c] ^= flip_v[r][c];
      end
    m.step(rst);
    if (rst) tot_rst++;
    for (int r = 0; r < D; r++)
      for (int c = 0; c < D; c++) begin
        if (h[r][c] != m.h[r][c] || v[r][c] != m.v[r][c] ||
            sig[r][c].n != m.sn[r][c] || sig[r][c].e != m.se[r][c] ||
            sig[r][c].s != m.ss[r][c] || sig[r][c].w != m.sw[r][c]) begin
          check(0, $sformatf("state mismatch at (%0d,%0d)", r, c));
          return;
        end
      end
    checks++;
  endtask

  // one full decoding run of D*D steps from the current h/v; returns the
  // model for the caller's checks
  task automatic run(output ref2d m);
    m = new(D);
    for (int r = 0; r < D; r++)
      for (int c = 0; c < D; c++) begin
        m.h[r][c] = h[r][c];
        m.v[r][c] = v[r][c];
      end
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int t = 1; t <= D * D; t++) do_step(m, is_reset.exists(t));
    tot_nn += m.n_nn; tot_sf += m.n_sf; tot_refl += m.n_refl;
  endtask

  function automatic void clear_q();
    for (int r = 0; r < D; r++)
      for (int c = 0; c < D; c++) begin
        h[r][c] = 0;
        v[r][c] = 0;
      end
  endfunction

  function automatic void add_random_error();
    int unsigned r, c;
    r = $urandom_range(D - 1);
    c = $urandom_range(D - 1);
    if ($urandom_range(1)) h[r][c] ^= 1;
    else                   v[r][c] ^= 1;
  endfunction

  function automatic bit lh();
    bit p = 0;
    for (int c = 0; c < D; c++) p ^= h[0][c];
    return p;
  endfunction
  function automatic bit lv();
    bit p = 0;
    for (int r = 0; r < D; r++) p ^= v[r][0];
    return p;
  endfunction

  initial begin
    ref2d m;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // every single-qubit error
    for (int e = 0; e < 2 * D * D; e++) begin
      clear_q();
      if (e < D * D) h[e / D][e % D] = 1;
      else           v[(e - D * D) / D][(e - D * D) % D] = 1;
      run(m);
      check(synd_of() == '0 && !lh() && !lv(), $sformatf("weight-1 error %0d not corrected", e));
    end

    // random weight-2 errors
    for (int n = 0; n < 60; n++) begin
      clear_q();
      add_random_error();
      add_random_error();
      run(m);
      check(synd_of() == '0 && !lh() && !lv(), "weight-2 error not corrected");
    end

    // L-shaped error: north and west edge of plaquette (3,3); defects on
    // (2,3) and (3,2), diagonal neighbours, which meet through reflection
    clear_q();
    h[3][3] = 1;
    v[3][3] = 1;
    run(m);
    check(synd_of() == '0 && !lh() && !lv(), "L-shaped error corrected");
    check(m.n_refl > 0, "reflection in the L-shaped case");

    // random heavier errors: model agreement only
    for (int n = 0; n < 40; n++) begin
      int w;
      clear_q();
      w = $urandom_range(6, 3);
      repeat (w) add_random_error();
      run(m);
    end

    // no step: no flip_valid
    @(negedge clk);
    check(flip_valid == 1'b0, "flip_valid low without step");

    check(tot_nn > 0,   "Nearest-Neighbour happened");
    check(tot_sf > 0,   "Signal-Follow happened");
    check(tot_refl > 0, "reflection happened");
    check(tot_rst > 0,  "signal reset happened");
    $display("nn=%0d sf=%0d refl=%0d resets=%0d", tot_nn, tot_sf, tot_refl, tot_rst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
