// scala_pkg -- shared types for the SCALA cellular-automaton decoders.
//
// SCALA (signaling cellular automaton with local attraction) decodes bit-flip
// errors on the periodic repetition code (1D) and on the toric code (2D). Each
// automaton cell sits on one stabilizer, holds a defect bit and a few signal
// bits, and may flip one adjacent data qubit per automaton step. This package
// holds the signal and correction bundles that cells and arrays exchange and
// the encoding of the signal-reset schedule.
//
// Signal naming follows the direction of travel: a 1D signal `l` moves one
// cell to the left per step, `r` one cell to the right; in 2D `n`,`e`,`s`,`w`
// move north, east, south, west. North is the row above (row index - 1),
// west the column to the left (column index - 1). These conventions are this
// design's own; the paper draws them but does not name an index order.
package scala_pkg;

  // Signal bits of one SCALA1D cell.
  typedef struct packed {
    logic l;   // signal travelling to the left  (emitted by a cell further right)
    logic r;   // signal travelling to the right (emitted by a cell further left)
  } sig1d_t;

  // Signal bits of one SCALA2D cell.
  typedef struct packed {
    logic n;   // travelling north (emitted to the south of this cell)
    logic e;   // travelling east  (emitted to the west)
    logic s;   // travelling south (emitted to the north)
    logic w;   // travelling west  (emitted to the east)
  } sig2d_t;

  // One-hot (or all-zero) correction of a SCALA2D cell: which of its four
  // adjacent data qubits it flips in this step.
  typedef struct packed {
    logic n;
    logic e;
    logic s;
    logic w;
  } flip2d_t;

  // Signal-reset schedule.
  //   SCHED_NONE     : signals are never cleared (1D code-capacity decoding).
  //   SCHED_PERIODIC : signals are cleared every t_R steps (phenomenological noise).
  //   SCHED_RAMP     : t_R = 1,2,...,d then d-1,...,1; d*d steps in all
  //                    (2D code-capacity decoding).
  typedef enum logic [1:0] {
    SCHED_NONE     = 2'd0,
    SCHED_PERIODIC = 2'd1,
    SCHED_RAMP     = 2'd2
  } sched_mode_e;

  function automatic int unsigned popcount4(sig2d_t s);
    return int'(s.n) + int'(s.e) + int'(s.s) + int'(s.w);
  endfunction

endpackage
