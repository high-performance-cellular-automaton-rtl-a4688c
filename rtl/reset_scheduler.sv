// reset_scheduler -- decides in which automaton steps all signal bits are
// cleared.
//
// Signals in SCALA never die on their own: they keep circulating until they
// are erased. A reset every t_R steps stops old signals from piling up. The
// paper uses three schedules, chosen here by `mode`:
//
//   SCHED_NONE     no reset (SCALA1D code-capacity decoding, run for d-2 steps)
//   SCHED_PERIODIC reset at the end of steps t_R, 2*t_R, 3*t_R, ... (t_R is a
//                  run-time input, the tuned hyper-parameter of the
//                  phenomenological runs; t_R = 0 means never)
//   SCHED_RAMP     reset intervals 1, 2, ..., D, D-1, ..., 1: resets at the end
//                  of steps 1, 3, 6, 10, ..., and the last at step D*D, after
//                  which `done` rises (SCALA2D code-capacity decoding).
//
// Interface: `start` (one cycle) restarts the schedule at step 1. For every
// cycle with `step` high, `sig_reset` (combinational) tells whether that step
// ends with a reset; feed it to the automaton array together with `step`.
// step_count counts the steps taken since `start`; tr_cur is the interval
// currently in force.
//
// Follows the paper: the three schedules and the ramp's d*d total. This
// design's choice: the reset acts at the end of the step named, and after
// `done` the ramp issues no further resets.
//
// Lint notes that rst_n is both an asynchronous flop reset and a signal in the
// assertions' disable condition; that is intended, and the assertions are not
// part of the synthesized circuit.
module reset_scheduler
  import scala_pkg::*;
#(
  parameter int unsigned D    = 81,                  // code distance
  parameter int unsigned TR_W = $clog2(D + 1),       // width of an interval
  parameter int unsigned CNT_W = $clog2(D * D + 2)   // width of the step counter
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              step,
  input  sched_mode_e       mode,
  input  logic [TR_W-1:0]   t_r,         // interval for SCHED_PERIODIC
  output logic              sig_reset,
  output logic              done,
  output logic [TR_W-1:0]   tr_cur,
  output logic [CNT_W-1:0]  step_count
);

  logic [TR_W-1:0]  since_q;    // steps since the last reset
  logic [TR_W-1:0]  tr_q;       // current ramp interval
  logic             up_q;       // ramp going up
  logic             done_q;
  logic [CNT_W-1:0] count_q;
  logic             hit;

  always_comb begin
    unique case (mode)
      SCHED_PERIODIC: hit = (t_r != '0) && (since_q + 1'b1 >= t_r);
      SCHED_RAMP:     hit = !done_q && (since_q + 1'b1 == tr_q);
      default:        hit = 1'b0;
    endcase
  end
  assign sig_reset = step && hit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      since_q <= '0;
      tr_q    <= TR_W'(1);
      up_q    <= 1'b1;
      done_q  <= 1'b0;
      count_q <= '0;
    end else if (start) begin
      since_q <= '0;
      tr_q    <= TR_W'(1);
      up_q    <= 1'b1;
      done_q  <= 1'b0;
      count_q <= '0;
    end else if (step) begin
      count_q <= count_q + 1'b1;
      if (!hit) begin
        since_q <= since_q + 1'b1;
      end else begin
        since_q <= '0;
        if (mode == SCHED_RAMP) begin
          if (up_q) begin
            if (tr_q == TR_W'(D)) begin
              up_q <= 1'b0;
              tr_q <= TR_W'(D - 1);
            end else begin
              tr_q <= tr_q + 1'b1;
            end
          end else if (tr_q == TR_W'(1)) begin
            done_q <= 1'b1;
          end else begin
            tr_q <= tr_q - 1'b1;
          end
        end
      end
    end
  end

  assign done       = done_q;
  assign tr_cur     = (mode == SCHED_PERIODIC) ? t_r : tr_q;
  assign step_count = count_q;

  // The interval never leaves 1..D.
  a_tr_range: assert property (@(posedge clk) disable iff (!rst_n)
                               tr_q >= TR_W'(1) && tr_q <= TR_W'(D));

endmodule
