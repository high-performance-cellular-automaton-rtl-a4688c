// scala_top -- both SCALA decoders on one die: a SCALA1D decoder for a
// periodic repetition code of distance D1 and a SCALA2D decoder pair for a
// toric code of distance D2.
//
// Repetition code: one ring of D1 cells (scala1d_array) driven by its own
// signal-reset schedule (reset_scheduler). The host measures the D1 Z.Z
// stabilizers, presents them with rep_step, and applies rep_flip one cycle
// later.
//
// Toric code: the code is CSS, so bit flips and phase flips are decoded
// independently by two identical D2 x D2 arrays: one on the plaquette (Z-type)
// syndrome, which returns X corrections, and one on the star (X-type)
// syndrome, which returns Z corrections on the dual lattice. Both arrays step
// together and share one reset schedule. For the star array, star (r,c) is
// treated as the plaquette (r,c) of the dual lattice; mapping its flip_h/flip_v
// back to physical edges is the host's labelling.
//
// The data qubits and the stabilizer measurements are outside this design:
// syndromes come in as ports and corrections go out as ports. A closed
// measure-decode-correct loop therefore takes at least two cycles per step:
// step on one cycle, corrections available on the next.
//
// Follows the paper: the two decoders, two independent SCALA2D instances for
// the CSS toric code, the reset schedules. This design's choice: placing both
// decoders behind one top and the port-level interface.
//
// The arrays' observation outputs (stored signals and defects) and the
// schedulers' current interval are left unused here; they are there for
// testbenches and debug, and lint reports them as unused signals. rst_n is
// used both as the asynchronous flop reset and in the assertions' disable
// condition, which lint reports as a mixed synchronous/asynchronous net; the
// assertions are not part of the synthesized circuit.
module scala_top
  import scala_pkg::*;
#(
  parameter int unsigned D1 = 81,   // repetition-code distance
  parameter int unsigned D2 = 81,   // toric-code distance
  localparam int unsigned TR1_W  = $clog2(D1 + 1),
  localparam int unsigned TR2_W  = $clog2(D2 + 1),
  localparam int unsigned CNT1_W = $clog2(D1 * D1 + 2),
  localparam int unsigned CNT2_W = $clog2(D2 * D2 + 2)
) (
  input  logic                   clk,
  input  logic                   rst_n,

  // ---- repetition code (SCALA1D) ----
  input  logic                   rep_start,      // new run: clear cells, restart schedule
  input  logic                   rep_step,
  input  sched_mode_e            rep_mode,
  input  logic [TR1_W-1:0]       rep_t_r,
  input  logic [D1-1:0]          rep_syndrome,
  output logic [D1-1:0]          rep_flip,
  output logic                   rep_flip_valid,
  output logic                   rep_done,
  output logic [CNT1_W-1:0]      rep_step_count,

  // ---- toric code (2 x SCALA2D) ----
  input  logic                   tor_start,
  input  logic                   tor_step,
  input  sched_mode_e            tor_mode,
  input  logic [TR2_W-1:0]       tor_t_r,
  input  logic [D2-1:0][D2-1:0]  tor_synd_plaq,  // Z-type (plaquette) syndrome
  input  logic [D2-1:0][D2-1:0]  tor_synd_star,  // X-type (star) syndrome
  output logic [D2-1:0][D2-1:0]  tor_xflip_h,    // X corrections, primal edges
  output logic [D2-1:0][D2-1:0]  tor_xflip_v,
  output logic [D2-1:0][D2-1:0]  tor_zflip_h,    // Z corrections, dual edges
  output logic [D2-1:0][D2-1:0]  tor_zflip_v,
  output logic                   tor_flip_valid,
  output logic                   tor_done,
  output logic [CNT2_W-1:0]      tor_step_count
);

  // ---------------- repetition code ----------------
  logic              rep_sig_reset;
  logic [TR1_W-1:0]  rep_tr_cur;
  logic [D1-1:0]     rep_sig_l, rep_sig_r, rep_defect;

  reset_scheduler #(.D(D1)) u_rep_sched (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (rep_start),
    .step      (rep_step && !rep_start),
    .mode      (rep_mode),
    .t_r       (rep_t_r),
    .sig_reset (rep_sig_reset),
    .done      (rep_done),
    .tr_cur    (rep_tr_cur),
    .step_count(rep_step_count)
  );

  scala1d_array #(.D(D1)) u_rep (
    .clk       (clk),
    .rst_n     (rst_n),
    .clear     (rep_start),
    .step      (rep_step),
    .sig_reset (rep_sig_reset),
    .syndrome  (rep_syndrome),
    .flip      (rep_flip),
    .flip_valid(rep_flip_valid),
    .sig_l     (rep_sig_l),
    .sig_r     (rep_sig_r),
    .defect    (rep_defect)
  );

  // ---------------- toric code ----------------
  logic                      tor_sig_reset;
  logic [TR2_W-1:0]          tor_tr_cur;
  logic                      tor_x_valid, tor_z_valid;
  sig2d_t [D2-1:0][D2-1:0]   tor_x_sig, tor_z_sig;
  logic [D2-1:0][D2-1:0]     tor_x_defect, tor_z_defect;

  reset_scheduler #(.D(D2)) u_tor_sched (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (tor_start),
    .step      (tor_step && !tor_start),
    .mode      (tor_mode),
    .t_r       (tor_t_r),
    .sig_reset (tor_sig_reset),
    .done      (tor_done),
    .tr_cur    (tor_tr_cur),
    .step_count(tor_step_count)
  );

  scala2d_array #(.D(D2)) u_tor_x (
    .clk       (clk),
    .rst_n     (rst_n),
    .clear     (tor_start),
    .step      (tor_step),
    .sig_reset (tor_sig_reset),
    .syndrome  (tor_synd_plaq),
    .flip_h    (tor_xflip_h),
    .flip_v    (tor_xflip_v),
    .flip_valid(tor_x_valid),
    .sig       (tor_x_sig),
    .defect    (tor_x_defect)
  );

  scala2d_array #(.D(D2)) u_tor_z (
    .clk       (clk),
    .rst_n     (rst_n),
    .clear     (tor_start),
    .step      (tor_step),
    .sig_reset (tor_sig_reset),
    .syndrome  (tor_synd_star),
    .flip_h    (tor_zflip_h),
    .flip_v    (tor_zflip_v),
    .flip_valid(tor_z_valid),
    .sig       (tor_z_sig),
    .defect    (tor_z_defect)
  );

  assign tor_flip_valid = tor_x_valid && tor_z_valid;

endmodule
