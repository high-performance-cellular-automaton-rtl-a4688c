// tb_scala2d_cell -- self-checking test of a single SCALA2D cell.
//
// Random stimulus on the five syndrome inputs, the four incoming signals,
// step, sig_reset and clear, compared every cycle with a model of the cell
// written here from the rules: per-axis broadcast on `out`; the received
// signals, swapped N<->S and E<->W when the cell has no defect and two or
// more arrive (reflection); and the registered flip: Nearest-Neighbour (W
// first, then N), else Signal-Follow for an isolated defect on the stored
// signals. The Signal-Follow table is written out as the list of drawn
// patterns, independent of the design's "non-blocking signal" logic: for one
// or three signals the flip goes towards the signal that has no opposite
// partner; for two signals only the three patterns {from W, from N},
// {from W, from S} -> W and {from N, from E} -> N act. Directed cases then
// check one example per pattern, and each mechanism is counted and must occur.
module tb_scala2d_cell;
  import scala_pkg::*;

  logic    clk = 0, rst_n = 0, clear = 0, step = 0, sig_reset = 0;
  logic    d_c = 0, d_n = 0, d_e = 0, d_s = 0, d_w = 0;
  logic    in_n = 0, in_e = 0, in_s = 0, in_w = 0;
  sig2d_t  out, sig;
  logic    defect;
  flip2d_t flip;

  int checks = 0, failures = 0;
  int n_bh = 0, n_bv = 0, n_refl = 0, n_nn_w = 0, n_nn_n = 0, n_sf1 = 0, n_sf2 = 0, n_sf3 = 0, n_rst = 0;

  scala2d_cell dut (.*);

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

  // model state: stored signals by travel direction, defect, flip (NESW bits)
  bit [3:0] m_s = 0;        // {n,e,s,w}
  bit       m_def = 0;
  bit [3:0] m_f = 0;        // {n,e,s,w}

  // Signal-Follow lookup written as a table over the stored signals, indexed
  // by "from" bits {fn, fe, fs, fw}; returns the flip {n,e,s,w}.
  function automatic bit [3:0] sf_table(bit [3:0] from);
    case (from)
      // one signal
      4'b1000: return 4'b1000;   // from N -> N
      4'b0100: return 4'b0100;   // from E -> E
      4'b0010: return 4'b0010;   // from S -> S
      4'b0001: return 4'b0001;   // from W -> W
      // three signals: the odd one out of the complete pair
      4'b1101: return 4'b1000;   // N, E, W -> N
      4'b1011: return 4'b0001;   // N, S, W -> W
      4'b0111: return 4'b0010;   // E, S, W -> S
      4'b1110: return 4'b0100;   // N, E, S -> E
      // two signals
      4'b1001: return 4'b0001;   // N, W -> W
      4'b0011: return 4'b0001;   // S, W -> W
      4'b1100: return 4'b1000;   // N, E -> N
      default: return 4'b0000;
    endcase
  endfunction

  task automatic cycle(bit c_clear, bit c_step, bit c_rst, bit [4:0] dsyn, bit [3:0] inn);
    bit dc, dn, de, ds, dw, bh, bv, iso;
    bit [3:0] rx, nx, from, ef, o_exp;
    {dc, dn, de, ds, dw} = dsyn;
    @(negedge clk);
    clear = c_clear; step = c_step; sig_reset = c_rst;
    {d_c, d_n, d_e, d_s, d_w} = dsyn;
    {in_n, in_e, in_s, in_w} = inn;
    #1;
    bh = dc && !m_s[2] && !m_s[0];
    bv = dc && !m_s[3] && !m_s[1];
    o_exp = m_s | {bv, bh, bv, bh};
    check({out.n, out.e, out.s, out.w} == o_exp, "broadcast output");
    rx = inn;
    nx = rx;
    if (!dc && $countones(rx) >= 2) nx = {rx[1], rx[0], rx[3], rx[2]};
    // from-bits: travelling S came from N, W from E, N from S, E from W
    from = {m_s[1], m_s[0], m_s[3], m_s[2]};
    iso = dc && !dn && !de && !ds && !dw;
    ef = 0;
    if (dc && dw)      ef = 4'b0001;
    else if (dc && dn) ef = 4'b1000;
    else if (iso)      ef = sf_table(from);
    if (c_step && !c_clear) begin
      if (bh) n_bh++;
      if (bv) n_bv++;
      if (!dc && $countones(rx) >= 2 && (rx[3] | rx[1]) && (rx[2] | rx[0])) n_refl++;
      if (dc && dw) n_nn_w++;
      else if (dc && dn) n_nn_n++;
      else if (iso && ef != 0) begin
        case ($countones(from))
          1: n_sf1++;
          2: n_sf2++;
          default: n_sf3++;
        endcase
      end
    end
    if (c_clear) begin
      m_s = 0; m_def = 0; m_f = 0;
    end else begin
      m_f = c_step ? ef : 4'b0;
      if (c_step) begin
        m_def = dc;
        m_s = c_rst ? 4'b0 : nx;
        if (c_rst && nx != 0) n_rst++;
      end
    end
    @(negedge clk);
    check({sig.n, sig.e, sig.s, sig.w} == m_s,
          $sformatf("stored signals got %b exp %b", {sig.n, sig.e, sig.s, sig.w}, m_s));
    check(defect == m_def, "stored defect");
    check({flip.n, flip.e, flip.s, flip.w} == m_f,
          $sformatf("flip got %b exp %b", {flip.n, flip.e, flip.s, flip.w}, m_f));
  endtask

  // load stored signals {n,e,s,w} from a cleared cell in one step (the cell
  // has no defect and fewer than two signals arrive, or two opposite ones,
  // which are swapped into the same set)
  task automatic load(bit [3:0] s);
    bit [3:0] inn;
    cycle(1, 0, 0, 5'b0, 4'b0);
    inn = s;
    // with >= 2 arriving and no defect the cell swaps: pre-swap the input
    if ($countones(s) >= 2) inn = {s[1], s[0], s[3], s[2]};
    cycle(0, 1, 0, 5'b0, inn);
    check({sig.n, sig.e, sig.s, sig.w} == s, "load stored signals");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 40000; i++) begin
      int unsigned rv;
      bit [4:0] ds;
      rv = $urandom;
      ds = rv[4:0];
      // isolated defects often, so Signal-Follow gets exercised
      if (rv[30:29] == 2'b00) ds = 5'b10000;
      cycle(rv[15:8] < 8'd3, rv[16] | rv[17], rv[18] & rv[19] & rv[20], ds, rv[24:21]);
    end
    // directed: every stored signal pattern with an isolated defect
    for (int s = 0; s < 16; s++) begin
      bit [3:0] from, exp;
      load(s[3:0]);
      from = {s[1], s[0], s[3], s[2]};
      exp  = sf_table(from);
      cycle(0, 1, 0, 5'b10000, 4'b0);
      check({flip.n, flip.e, flip.s, flip.w} == exp,
            $sformatf("Signal-Follow pattern %b", s[3:0]));
    end
    // directed: reflection of a signal arriving with a perpendicular one
    cycle(1, 0, 0, 5'b0, 4'b0);
    cycle(0, 1, 0, 5'b00000, 4'b1100);   // N- and E-travelling arrive
    check({sig.n, sig.e, sig.s, sig.w} == 4'b0011, "reflected to S and W");
    // no reflection at a defect
    cycle(1, 0, 0, 5'b0, 4'b0);
    cycle(0, 1, 0, 5'b10000, 4'b1100);
    check({sig.n, sig.e, sig.s, sig.w} == 4'b1100, "defect: no reflection");
    // Nearest-Neighbour priority W over N
    cycle(0, 1, 0, 5'b11001, 4'b0);
    check({flip.n, flip.e, flip.s, flip.w} == 4'b0001, "NN west first");
    // async reset
    rst_n = 0; #1;
    check(sig == '0 && defect == 0 && flip == '0, "async reset");
    m_s = 0; m_def = 0; m_f = 0;
    @(negedge clk); rst_n = 1;

    check(n_bh > 0 && n_bv > 0, "broadcast on both axes happened");
    check(n_refl > 0, "reflection happened");
    check(n_nn_w > 0 && n_nn_n > 0, "both Nearest-Neighbour rules happened");
    check(n_sf1 > 0 && n_sf2 > 0 && n_sf3 > 0, "Signal-Follow with 1, 2, 3 signals happened");
    check(n_rst > 0, "signal reset happened");
    $display("bh=%0d bv=%0d refl=%0d nnw=%0d nnn=%0d sf1=%0d sf2=%0d sf3=%0d rst=%0d",
             n_bh, n_bv, n_refl, n_nn_w, n_nn_n, n_sf1, n_sf2, n_sf3, n_rst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
