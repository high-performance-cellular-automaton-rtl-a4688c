// scala1d_cell -- one cell of the SCALA1D automaton (repetition-code decoder).
//
// A cell sits between two data qubits of a periodic repetition code: its left
// qubit is shared with the left neighbour cell, its right qubit with the right
// neighbour. Its state is three bits: the defect (the last Z.Z stabilizer
// result it was given) and two signal bits, l and r. One automaton step, taken
// on a clock edge with `step` high, applies the paper's four sub-rules:
//
//   1. acquire defect : defect <= d_c (this step's syndrome bit)
//   2. broadcast      : a cell with a defect and neither signal bit set sets
//                       both; the result is `out` (combinational)
//   3. signalling     : l <= right neighbour's out.l, r <= left neighbour's out.r
//                       (signals move one cell per step and are never absorbed)
//   4. correction     : Nearest-Neighbour: d_l & d_c flips the left qubit.
//                       Signal-Follow, only for an isolated defect
//                       (!d_l & d_c & !d_r): r without l flips the left qubit,
//                       l without r the right qubit; the defect moves towards
//                       the cell that emitted the signal. Two signals or none:
//                       no action. The signal bits used are those the cell
//                       holds at the start of the step, i.e. a signal acts one
//                       step after it arrives.
//
// With `sig_reset` high during a step, the signal bits are cleared at the end of
// that step instead of being stored. `clear` empties the cell for a new
// decoding run.
//
// Timing: flip_left/flip_right are registered; they are valid for one cycle,
// the cycle after the step, and are zero otherwise.
//
// Follows the paper: the state, the sub-rules and the correction conditions.
// This design's choice: all cells update synchronously from the state before
// the step (the paper's pseudo-code loops over cells in place, but its text
// calls the update synchronous); the reset acts at the end of a step; the
// registered outputs and the clear input. Which signal bits the correction
// reads is not fixed by the pseudo-code; reading the stored ones reproduces
// the paper's statements that defects start moving in the step after a signal
// arrives and that the slowest pattern takes exactly d-2 steps.
module scala1d_cell
  import scala_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clear,       // synchronous: empty state, no correction
  input  logic   step,        // take one automaton step this cycle
  input  logic   sig_reset,   // clear the signal bits at the end of this step
  input  logic   d_l,         // syndrome of the left neighbour, this step
  input  logic   d_c,         // own syndrome, this step
  input  logic   d_r,         // syndrome of the right neighbour, this step
  input  logic   in_l,        // right neighbour's out.l
  input  logic   in_r,        // left neighbour's out.r
  output sig1d_t out,         // own signals after broadcast, to the neighbours
  output sig1d_t sig,         // stored signal bits
  output logic   defect,      // stored defect bit
  output logic   flip_left,   // flip the left qubit (registered)
  output logic   flip_right   // flip the right qubit (registered)
);

  sig1d_t sig_q, sig_nxt;
  logic   defect_q;
  logic   fl_q, fr_q;
  logic   fl_nxt, fr_nxt;
  logic   emit, isolated;

  // Sub-rule 2: broadcast only when both signal bits are off.
  assign emit  = d_c && !sig_q.l && !sig_q.r;
  assign out.l = sig_q.l || emit;
  assign out.r = sig_q.r || emit;

  // Sub-rules 3 and 4.
  assign isolated = !d_l && d_c && !d_r;

  always_comb begin
    sig_nxt.l = in_l;
    sig_nxt.r = in_r;
    fl_nxt    = 1'b0;
    fr_nxt    = 1'b0;
    if (d_l && d_c) begin
      fl_nxt = 1'b1;                              // Nearest-Neighbour
    end else if (isolated && !sig_q.l && sig_q.r) begin
      fl_nxt = 1'b1;                              // Signal-Follow, to the left
    end else if (isolated && sig_q.l && !sig_q.r) begin
      fr_nxt = 1'b1;                              // Signal-Follow, to the right
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sig_q    <= '0;
      defect_q <= 1'b0;
      fl_q     <= 1'b0;
      fr_q     <= 1'b0;
    end else if (clear) begin
      sig_q    <= '0;
      defect_q <= 1'b0;
      fl_q     <= 1'b0;
      fr_q     <= 1'b0;
    end else begin
      fl_q <= step && fl_nxt;
      fr_q <= step && fr_nxt;
      if (step) begin
        defect_q <= d_c;
        sig_q    <= sig_reset ? '0 : sig_nxt;
      end
    end
  end

  assign sig        = sig_q;
  assign defect     = defect_q;
  assign flip_left  = fl_q;
  assign flip_right = fr_q;

endmodule
