// tb_scala1d_array -- exhaustive code-capacity test of the SCALA1D ring.
//
// For every one of the 2^D error patterns on a distance-D repetition code the
// testbench closes the measure-decode-correct loop around the ring: it computes
// the syndrome of its qubit vector, steps the ring, and applies the returned
// flips, for D-2 steps without any signal reset. After every step it compares
// qubits and signal bits with the behavioural model in scala_ref_pkg. At the
// end it checks three properties the decoder is known to have:
//   * the result equals a global majority vote: all errors removed when fewer
//     than (D+1)/2 qubits were flipped, the logical flip completed otherwise;
//   * the number of stored signals is 4*min(w0, D-w0);
//   * no pattern needs more than D-2 steps, and some pattern needs exactly D-2.
// It also checks the one-cycle latency (flip_valid the cycle after step) and
// that sig_reset empties the signals. D is reduced to 11 to keep the
// exhaustive sweep short.
module tb_scala1d_array;
  import scala_ref_pkg::*;

  localparam int unsigned D = 11;

  logic         clk = 0, rst_n = 0, clear = 0, step = 0, sig_reset = 0;
  logic [D-1:0] syndrome = '0;
  logic [D-1:0] flip, sig_l, sig_r, defect;
  logic         flip_valid;

  int checks = 0, failures = 0;

  scala1d_array #(.D(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  bit q[D];

  function automatic logic [D-1:0] synd_of();
    logic [D-1:0] s;
    for (int i = 0; i < D; i++) s[i] = q[i] ^ q[(i + 1) % D];
    return s;
  endfunction

  // one closed-loop step; returns 1 if the syndrome was non-zero before it
  task automatic do_step(ref1d m, bit rst);
    @(negedge clk);
    syndrome  = synd_of();
    step      = 1;
    sig_reset = rst;
    @(negedge clk);
    step      = 0;
    sig_reset = 0;
    check(flip_valid === 1'b1, "flip_valid one cycle after step");
    for (int i = 0; i < D; i++) q[i] ^= flip[i];
    m.step(rst);
    for (int i = 0; i < D; i++) begin
      if (q[i] != m.q[i] || sig_l[i] != m.l[i] || sig_r[i] != m.r[i]) begin
        check(0, $sformatf("state mismatch at cell %0d", i));
        return;
      end
    end
    checks++;
  endtask

  initial begin
    int max_t = 0;
    ref1d m;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int pat = 0; pat < (1 << D); pat++) begin
      int w0, t_clear, ns;
      w0 = 0;
      t_clear = 0;
      m = new(D);
      for (int i = 0; i < D; i++) begin
        q[i] = pat[i];
        m.q[i] = pat[i];
        w0 += pat[i];
      end
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      for (int t = 1; t <= D - 2; t++) begin
        if (synd_of() != '0) t_clear = t;
        do_step(m, 0);
      end
      if (synd_of() == '0 && t_clear > max_t) max_t = t_clear;
      // majority vote
      begin
        int w;
        w = 0;
        foreach (q[i]) w += q[i];
        if (w0 < (D + 1) / 2) check(w == 0, $sformatf("pattern %0h not cleared", pat));
        else                  check(w == D, $sformatf("pattern %0h not completed", pat));
      end
      ns = $countones(sig_l) + $countones(sig_r);
      check(ns == 4 * ((w0 < D - w0) ? w0 : D - w0),
            $sformatf("pattern %0h: %0d signals", pat, ns));
      check(synd_of() == '0, "syndrome cleared within D-2 steps");
    end
    check(max_t == D - 2, $sformatf("longest erosion %0d steps, expected %0d", max_t, D - 2));

    // sig_reset clears all signals at the end of the step
    m = new(D);
    foreach (q[i]) begin q[i] = (i < 3); m.q[i] = q[i]; end
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    do_step(m, 0);
    check((sig_l | sig_r) != '0, "signals present before reset");
    do_step(m, 1);
    check((sig_l | sig_r) == '0, "signals cleared by sig_reset");
    // no step: no flip_valid
    @(negedge clk);
    check(flip_valid == 1'b0, "flip_valid low without step");

    $display("longest erosion: %0d steps", max_t);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
