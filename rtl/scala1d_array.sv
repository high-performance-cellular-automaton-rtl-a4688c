// scala1d_array -- the SCALA1D automaton: a ring of D cells that decodes
// bit-flip errors on a distance-D periodic repetition code.
//
// Indexing: data qubit i lies between cell i-1 and cell i (mod D), so cell i
// measures syndrome[i] = q[i] xor q[i+1]; qubit i is the left qubit of cell i
// and the right qubit of cell i-1. Each step the ring takes one syndrome
// vector and returns, one cycle later, the vector of qubits to flip. Two cells
// may flip the same qubit in one step; the flips then cancel (xor), as they
// would on the qubit.
//
// The array only wires neighbours together: syndrome bits of the left and
// right neighbour into every cell, and the broadcast signals of each cell into
// its neighbours (out.l leftwards, out.r rightwards), closing the ring.
//
// Interface: step/sig_reset/clear are common to all cells. flip is valid,
// and flip_valid high, for one cycle after each step. sig_l/sig_r/defect
// expose the cell state (used to count signals in tests).
//
// Follows the paper: ring topology, one cell per stabilizer, the correction
// applied to at most one adjacent qubit per cell. This design's choice: the
// qubit indexing above and the registered one-cycle latency.
//
// Lint notes that rst_n is both an asynchronous flop reset and a signal in the
// assertions' disable condition; that is intended, and the assertions are not
// part of the synthesized circuit.
module scala1d_array
  import scala_pkg::*;
#(
  parameter int unsigned D = 81     // code distance (number of cells = qubits)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         step,
  input  logic         sig_reset,
  input  logic [D-1:0] syndrome,    // syndrome[i] = q[i] ^ q[(i+1)%D]
  output logic [D-1:0] flip,        // qubits to flip, valid with flip_valid
  output logic         flip_valid,
  output logic [D-1:0] sig_l,
  output logic [D-1:0] sig_r,
  output logic [D-1:0] defect
);

  sig1d_t       out  [D];
  sig1d_t       sig  [D];
  logic [D-1:0] fl, fr;
  logic         valid_q;

  for (genvar i = 0; i < D; i++) begin : g_cell
    localparam int unsigned IL = (i + D - 1) % D;   // left neighbour
    localparam int unsigned IR = (i + 1) % D;       // right neighbour

    scala1d_cell u_cell (
      .clk       (clk),
      .rst_n     (rst_n),
      .clear     (clear),
      .step      (step),
      .sig_reset (sig_reset),
      .d_l       (syndrome[IL]),
      .d_c       (syndrome[i]),
      .d_r       (syndrome[IR]),
      .in_l      (out[IR].l),
      .in_r      (out[IL].r),
      .out       (out[i]),
      .sig       (sig[i]),
      .defect    (defect[i]),
      .flip_left (fl[i]),
      .flip_right(fr[i])
    );

    assign sig_l[i] = sig[i].l;
    assign sig_r[i] = sig[i].r;
    // qubit i: left qubit of cell i, right qubit of cell i-1
    assign flip[i]  = fl[i] ^ fr[IL];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     valid_q <= 1'b0;
    else if (clear) valid_q <= 1'b0;
    else            valid_q <= step;
  end
  assign flip_valid = valid_q;

  // A cell flips at most one of its qubits per step.
  for (genvar i = 0; i < D; i++) begin : g_chk
    a_one_flip: assert property (@(posedge clk) disable iff (!rst_n) !(fl[i] && fr[i]));
  end

endmodule
