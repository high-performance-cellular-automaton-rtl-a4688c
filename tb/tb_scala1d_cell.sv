// tb_scala1d_cell -- self-checking test of a single SCALA1D cell.
//
// Drives the cell with random neighbour syndromes, incoming signals, step,
// sig_reset and clear, and compares every cycle with a small model of the
// cell written here from the rules: the model keeps its own copy of the
// stored signals and defect and predicts `out` (broadcast when a defect meets
// two empty signal bits), the next stored signals (pure shift, or zero after
// sig_reset) and the registered flips (Nearest-Neighbour on d_l & d_c, else
// Signal-Follow for an isolated defect on the stored signals). Directed cases
// then check one example of each rule. Counts of each rule firing are checked
// to be non-zero so a rule that never happens fails the test.
module tb_scala1d_cell;
  import scala_pkg::*;

  logic   clk = 0, rst_n = 0, clear = 0, step = 0, sig_reset = 0;
  logic   d_l = 0, d_c = 0, d_r = 0, in_l = 0, in_r = 0;
  sig1d_t out, sig;
  logic   defect, flip_left, flip_right;

  int checks = 0, failures = 0;
  int n_bcast = 0, n_nn = 0, n_sfl = 0, n_sfr = 0, n_rst = 0;

  scala1d_cell dut (.*);

  always #5 clk = ~clk;

  initial begin
    #10_000_000;
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

  // model state
  bit m_l = 0, m_r = 0, m_def = 0, m_fl = 0, m_fr = 0;

  // drive inputs at negedge, check at the next negedge after the posedge
  task automatic cycle(bit c_clear, bit c_step, bit c_rst, bit dl, bit dc, bit dr, bit il, bit ir);
    bit emit, e_fl, e_fr;
    @(negedge clk);
    clear = c_clear; step = c_step; sig_reset = c_rst;
    d_l = dl; d_c = dc; d_r = dr; in_l = il; in_r = ir;
    #1;
    emit = dc && !m_l && !m_r;
    check(out.l == (m_l | emit) && out.r == (m_r | emit), "broadcast output");
    if (c_step && !c_clear && emit) n_bcast++;
    e_fl = 0; e_fr = 0;
    if (dl && dc) begin
      e_fl = 1; if (c_step && !c_clear) n_nn++;
    end else if (!dl && dc && !dr && m_r && !m_l) begin
      e_fl = 1; if (c_step && !c_clear) n_sfl++;
    end else if (!dl && dc && !dr && m_l && !m_r) begin
      e_fr = 1; if (c_step && !c_clear) n_sfr++;
    end
    // model update at the clock edge
    if (c_clear) begin
      m_l = 0; m_r = 0; m_def = 0; m_fl = 0; m_fr = 0;
    end else begin
      m_fl = c_step && e_fl;
      m_fr = c_step && e_fr;
      if (c_step) begin
        m_def = dc;
        m_l = c_rst ? 1'b0 : il;
        m_r = c_rst ? 1'b0 : ir;
        if (c_rst && (il || ir)) n_rst++;
      end
    end
    @(negedge clk);
    check(sig.l == m_l && sig.r == m_r, "stored signals");
    check(defect == m_def, "stored defect");
    check(flip_left == m_fl && flip_right == m_fr,
          $sformatf("flips got %b%b exp %b%b", flip_left, flip_right, m_fl, m_fr));
    check(!(flip_left && flip_right), "at most one flip");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // random
    for (int i = 0; i < 20000; i++) begin
      int unsigned rv;
      rv = $urandom;
      cycle(rv[15:0] < 16'd1000, rv[16] | rv[17], rv[18] & rv[19] & rv[20],
            rv[21], rv[22], rv[23], rv[24], rv[25]);
    end
    // directed: Signal-Follow left after a signal moving right arrives
    cycle(1, 0, 0, 0, 0, 0, 0, 0);
    cycle(0, 1, 0, 0, 0, 0, 0, 1);      // r arrives
    check(sig.r == 1 && sig.l == 0, "r stored");
    cycle(0, 1, 0, 0, 1, 0, 0, 0);      // isolated defect acts on stored r
    check(flip_left == 1 && flip_right == 0, "Signal-Follow to the left");
    // stored both: no action, no broadcast
    cycle(1, 0, 0, 0, 0, 0, 0, 0);
    cycle(0, 1, 0, 0, 0, 0, 1, 1);
    cycle(0, 1, 0, 0, 1, 0, 0, 0);
    check(flip_left == 0 && flip_right == 0, "two signals: no action");
    // Nearest-Neighbour wins over Signal-Follow
    cycle(0, 1, 0, 1, 1, 0, 0, 0);
    check(flip_left == 1 && flip_right == 0, "Nearest-Neighbour");
    // asynchronous reset
    cycle(0, 1, 0, 0, 1, 0, 1, 1);
    rst_n = 0; #1;
    check(sig == '0 && defect == 0 && flip_left == 0, "async reset");
    m_l = 0; m_r = 0; m_def = 0; m_fl = 0; m_fr = 0;
    @(negedge clk); rst_n = 1;

    check(n_bcast > 0, "broadcast happened");
    check(n_nn > 0,    "Nearest-Neighbour happened");
    check(n_sfl > 0,   "Signal-Follow left happened");
    check(n_sfr > 0,   "Signal-Follow right happened");
    check(n_rst > 0,   "signal reset happened");
    $display("bcast=%0d nn=%0d sf_l=%0d sf_r=%0d resets=%0d", n_bcast, n_nn, n_sfl, n_sfr, n_rst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
