// scala2d_array -- the SCALA2D automaton: a D x D torus of cells that decodes
// one error type (bit flips, from the plaquette syndrome) of a distance-D
// toric code. The other error type needs a second, identical array on the
// star syndrome (dual lattice).
//
// Indexing: cell (r,c) sits on plaquette (r,c); row r-1 is north, column c-1
// west, both modulo D. The 2*D*D edge qubits are split in two arrays:
//   h[r][c] : the horizontal edge on the north side of plaquette (r,c)
//             (= south side of plaquette (r-1,c))
//   v[r][c] : the vertical edge on the west side of plaquette (r,c)
//             (= east side of plaquette (r,c-1))
// so syndrome[r][c] = h[r][c] ^ h[r+1][c] ^ v[r][c] ^ v[r][c+1].
// A qubit can be flipped by both of its plaquettes in one step; the two flips
// then cancel (xor), as they would on the qubit.
//
// Each step the array takes the D*D syndrome and returns, one cycle later,
// the flips of both edge arrays. sig and defect expose every cell's stored
// signal bits and defect bit, for tests and debug.
//
// Follows the paper: torus of cells, four-neighbour signal exchange, one
// correction per cell and step. This design's choice: edge indexing, the
// registered one-cycle latency.
//
// Lint notes that rst_n is both an asynchronous flop reset and a signal in the
// assertions' disable condition; that is intended, and the assertions are not
// part of the synthesized circuit.
module scala2d_array
  import scala_pkg::*;
#(
  parameter int unsigned D = 81      // code distance
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 step,
  input  logic                 sig_reset,
  input  logic [D-1:0][D-1:0]  syndrome,   // [row][col]
  output logic [D-1:0][D-1:0]  flip_h,     // north edge of plaquette [row][col]
  output logic [D-1:0][D-1:0]  flip_v,     // west edge of plaquette [row][col]
  output logic                 flip_valid,
  output sig2d_t [D-1:0][D-1:0] sig,
  output logic [D-1:0][D-1:0]  defect
);

  sig2d_t  out [D][D];
  flip2d_t fl  [D][D];
  logic    valid_q;

  for (genvar r = 0; r < D; r++) begin : g_row
    for (genvar c = 0; c < D; c++) begin : g_col
      localparam int unsigned RN = (r + D - 1) % D;  // row to the north
      localparam int unsigned RS = (r + 1) % D;      // row to the south
      localparam int unsigned CW = (c + D - 1) % D;  // column to the west
      localparam int unsigned CE = (c + 1) % D;      // column to the east

      scala2d_cell u_cell (
        .clk      (clk),
        .rst_n    (rst_n),
        .clear    (clear),
        .step     (step),
        .sig_reset(sig_reset),
        .d_c      (syndrome[r][c]),
        .d_n      (syndrome[RN][c]),
        .d_e      (syndrome[r][CE]),
        .d_s      (syndrome[RS][c]),
        .d_w      (syndrome[r][CW]),
        .in_n     (out[RS][c].n),
        .in_e     (out[r][CW].e),
        .in_s     (out[RN][c].s),
        .in_w     (out[r][CE].w),
        .out      (out[r][c]),
        .sig      (sig[r][c]),
        .defect   (defect[r][c]),
        .flip     (fl[r][c])
      );

      // north edge of (r,c) is the south edge of (r-1,c);
      // west edge of (r,c) is the east edge of (r,c-1)
      assign flip_h[r][c] = fl[r][c].n ^ fl[RN][c].s;
      assign flip_v[r][c] = fl[r][c].w ^ fl[r][CW].e;

      a_one_flip: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(fl[r][c]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     valid_q <= 1'b0;
    else if (clear) valid_q <= 1'b0;
    else            valid_q <= step;
  end
  assign flip_valid = valid_q;

endmodule
