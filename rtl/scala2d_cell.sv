// scala2d_cell -- one cell of the SCALA2D automaton (toric-code decoder).
//
// A cell sits on one plaquette of the toric code and can flip any one of its
// four edge qubits (N, E, S, W) per step. Its state is a defect bit and four
// signal bits s_N, s_E, s_S, s_W, named by the direction they travel. One
// automaton step (clock edge with `step` high) applies:
//
//   1. acquire defect : defect <= d_c
//   2. broadcast      : per axis, as two SCALA1D automata: a defect cell whose
//                       two horizontal signals are both off sets both, and
//                       likewise for the two vertical signals (`out`)
//   3. signalling     : s_N from the southern neighbour's out.n, s_S from the
//                       northern one's out.s, s_E from the western one's out.e,
//                       s_W from the eastern one's out.w. Then reflection: a
//                       cell without a defect that now holds two or more
//                       signals swaps N<->S and E<->W, sending a signal that
//                       arrives together with a perpendicular one back to its
//                       emitter.
//   4. correction     : Nearest-Neighbour: defect here and west -> flip W;
//                       defect here and north but not west -> flip N.
//                       Signal-Follow, only if the defect is isolated (no
//                       defect on the four neighbours), on the signal bits
//                       held at the start of the step; a signal "from X" is
//                       one that travels away from X:
//                         1 or 3 signals: flip towards the one signal whose
//                           opposite partner is absent (the non-blocking one);
//                         2 signals: from W and N, or W and S -> flip W;
//                           from N and E -> flip N; all else no action.
//
// sig_reset clears the signal bits at the end of the step; clear empties the
// cell. `flip` is registered: valid for one cycle after the step, else zero.
//
// Follows the paper: state, broadcast per axis, reflection condition ("at
// least two signals and no defect"), Nearest-Neighbour rules and the 1- and
// 3-signal Signal-Follow rules, which the paper's figure and text agree on.
// For two signals the text says these rules mirror the Nearest-Neighbour rules
// (west first, then north) and that three patterns act; this design takes the
// three patterns that mirror gives. The figure draws the third pattern (signals
// from N and E) with a flip of the S qubit; this design flips N, as the text's
// mirror rule and the attraction towards the emitter both give. Synchronous
// update, end-of-step reset and Signal-Follow on the stored signal bits are
// this design's choices, made as in SCALA1D.
module scala2d_cell
  import scala_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    clear,
  input  logic    step,
  input  logic    sig_reset,
  input  logic    d_c,        // own syndrome, this step
  input  logic    d_n,        // syndrome of the neighbour to the north
  input  logic    d_e,
  input  logic    d_s,
  input  logic    d_w,
  input  logic    in_n,       // southern neighbour's out.n
  input  logic    in_e,       // western  neighbour's out.e
  input  logic    in_s,       // northern neighbour's out.s
  input  logic    in_w,       // eastern  neighbour's out.w
  output sig2d_t  out,        // own signals after broadcast
  output sig2d_t  sig,        // stored signal bits
  output logic    defect,
  output flip2d_t flip        // registered correction, one-hot or zero
);

  sig2d_t  sig_q, rx, sig_nxt;
  logic    defect_q;
  flip2d_t flip_q, flip_nxt;
  logic    emit_h, emit_v, isolated;
  logic    from_n, from_e, from_s, from_w;
  int unsigned nsig;

  // Sub-rule 2: broadcast, each axis on its own.
  assign emit_h = d_c && !sig_q.e && !sig_q.w;
  assign emit_v = d_c && !sig_q.n && !sig_q.s;
  assign out.n  = sig_q.n || emit_v;
  assign out.s  = sig_q.s || emit_v;
  assign out.e  = sig_q.e || emit_h;
  assign out.w  = sig_q.w || emit_h;

  // Sub-rule 3: propagation, then reflection.
  assign rx.n = in_n;
  assign rx.e = in_e;
  assign rx.s = in_s;
  assign rx.w = in_w;

  always_comb begin
    sig_nxt = rx;
    if (!d_c && popcount4(rx) > 1) begin
      sig_nxt.n = rx.s;
      sig_nxt.s = rx.n;
      sig_nxt.e = rx.w;
      sig_nxt.w = rx.e;
    end
  end

  // Sub-rule 4: corrections.
  assign isolated = d_c && !d_n && !d_e && !d_s && !d_w;
  assign nsig     = popcount4(sig_q);
  assign from_s   = sig_q.n;
  assign from_w   = sig_q.e;
  assign from_n   = sig_q.s;
  assign from_e   = sig_q.w;

  always_comb begin
    flip_nxt = '0;
    if (d_c && d_w) begin
      flip_nxt.w = 1'b1;
    end else if (d_c && d_n) begin
      flip_nxt.n = 1'b1;
    end else if (isolated) begin
      if (nsig == 1 || nsig == 3) begin
        if      (from_w && !from_e) flip_nxt.w = 1'b1;
        else if (from_e && !from_w) flip_nxt.e = 1'b1;
        else if (from_n && !from_s) flip_nxt.n = 1'b1;
        else if (from_s && !from_n) flip_nxt.s = 1'b1;
      end else if (nsig == 2) begin
        if      (from_w && !from_e)          flip_nxt.w = 1'b1;
        else if (from_n && from_e)           flip_nxt.n = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sig_q    <= '0;
      defect_q <= 1'b0;
      flip_q   <= '0;
    end else if (clear) begin
      sig_q    <= '0;
      defect_q <= 1'b0;
      flip_q   <= '0;
    end else begin
      flip_q <= step ? flip_nxt : '0;
      if (step) begin
        defect_q <= d_c;
        sig_q    <= sig_reset ? '0 : sig_nxt;
      end
    end
  end

  assign sig    = sig_q;
  assign defect = defect_q;
  assign flip   = flip_q;

endmodule
