// tb_reset_scheduler -- self-checking test of the signal-reset schedule.
//
// For D = 5 the testbench steps the scheduler and records on which steps
// sig_reset is high, comparing with lists written out by hand:
//   * SCHED_RAMP: intervals 1,2,3,4,5,4,3,2,1, i.e. resets at the end of
//     steps 1, 3, 6, 10, 15, 19, 22, 24, 25; `done` rises after step 25 and
//     no reset follows;
//   * SCHED_PERIODIC with t_r = 3: resets on steps 3, 6, 9, ...; with t_r = 1
//     on every step; t_r = 0 never;
//   * SCHED_NONE: never.
// It also checks that sig_reset is only high together with step, that
// step_count counts steps, that idle cycles between steps change nothing and
// that start restarts the schedule.
module tb_reset_scheduler;
  import scala_pkg::*;

  localparam int unsigned D = 5;
  localparam int unsigned TR_W = $clog2(D + 1);
  localparam int unsigned CNT_W = $clog2(D * D + 2);

  logic              clk = 0, rst_n = 0, start = 0, step = 0;
  sched_mode_e       mode = SCHED_NONE;
  logic [TR_W-1:0]   t_r = '0;
  logic              sig_reset, done;
  logic [TR_W-1:0]   tr_cur;
  logic [CNT_W-1:0]  step_count;

  int checks = 0, failures = 0;

  reset_scheduler #(.D(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1_000_000;
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

  task automatic restart(sched_mode_e m, int tr);
    @(negedge clk);
    mode = m; t_r = TR_W'(tr); start = 1; step = 0;
    @(negedge clk);
    start = 0;
    check(step_count == 0 && !done, "start clears the schedule");
  endtask

  // take one step (optionally with idle cycles before it); returns sig_reset
  task automatic one_step(int idle, output bit rst);
    repeat (idle) begin
      @(negedge clk);
      check(sig_reset == 1'b0, "no reset without step");
    end
    @(negedge clk);
    step = 1;
    #1;
    rst = sig_reset;
    @(negedge clk);
    step = 0;
  endtask

  initial begin
    int ramp_steps[$] = '{1, 3, 6, 10, 15, 19, 22, 24, 25};
    bit r;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // ramp, with random idle gaps
    restart(SCHED_RAMP, 0);
    for (int t = 1; t <= 40; t++) begin
      bit exp;
      exp = 0;
      foreach (ramp_steps[i]) if (ramp_steps[i] == t) exp = 1;
      check(done == (t > 25), $sformatf("done before step %0d", t));
      one_step($urandom_range(2), r);
      check(r == exp, $sformatf("ramp step %0d: reset %0b expected %0b", t, r, exp));
      check(step_count == CNT_W'(t), "step_count");
    end
    check(done, "ramp done");

    // ramp again after start
    restart(SCHED_RAMP, 0);
    one_step(0, r);
    check(r == 1, "ramp restarts with interval 1");
    one_step(0, r);
    check(r == 0 && tr_cur == 2, "second interval is 2");

    // periodic
    for (int tr = 0; tr <= 4; tr++) begin
      restart(SCHED_PERIODIC, tr);
      for (int t = 1; t <= 20; t++) begin
        one_step($urandom_range(1), r);
        check(r == (tr != 0 && t % tr == 0), $sformatf("periodic t_r=%0d step %0d", tr, t));
      end
      check(tr_cur == TR_W'(tr), "tr_cur shows t_r");
    end

    // none
    restart(SCHED_NONE, 3);
    for (int t = 1; t <= 30; t++) begin
      one_step(0, r);
      check(r == 0, "no reset in SCHED_NONE");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
