// tb_flexcross_workload: the core's two evaluation workloads with each of the three
// output schedulers (round robin, longest queue first, first come first served).
//
// Runs three workload_harness instances side by side, each with its own core, clock and
// traffic: scenario 1 (four flow types) and scenario 2 (a random order of all six
// engines per frame), 52,000 frames each at 60, 80 and 100 % of the line rate. Each
// harness checks every frame byte for byte, the conservation of frames, the drop rate
// below saturation and the delivered throughput, and prints drops, throughput and
// latency per run. This module sums the harnesses' checks and failures.
module tb_flexcross_workload;
  import flexcross_pkg::*;

  bit done [3];
  int checks [3], failures [3];

  workload_harness #(.SCHED(SCHED_RR))   u_rr   (.done(done[0]), .checks(checks[0]), .failures(failures[0]));
  workload_harness #(.SCHED(SCHED_LQF))  u_lqf  (.done(done[1]), .checks(checks[1]), .failures(failures[1]));
  workload_harness #(.SCHED(SCHED_FCFS)) u_fcfs (.done(done[2]), .checks(checks[2]), .failures(failures[2]));

  initial begin
    #100;
    wait (done[0] && done[1] && done[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks[0] + checks[1] + checks[2],
             failures[0] + failures[1] + failures[2]);
    $finish;
  end

  initial begin
    #100ms;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks[0] + checks[1] + checks[2],
             failures[0] + failures[1] + failures[2] + 1);
    $finish;
  end
endmodule
