// tb_xbar: self-checking test of the crosspoint-queued crossbar with each of its three
// schedulers (round robin, longest queue first, first come first served). Each instance
// runs the xbar_harness traffic: traversal latency, throughput, byte-exact delivery,
// per-pair ordering and overflow drops. Queues are shortened to 32 beats so that drops
// occur quickly.
module tb_xbar;
  import flexcross_pkg::*;
  logic done [3];
  int   c [3], f [3], d [3], n [3];
  int   checks, failures;

  xbar_harness #(.SCHED(SCHED_RR))   h_rr   (.done(done[0]), .checks(c[0]), .failures(f[0]), .drops(d[0]), .delivered(n[0]));
  xbar_harness #(.SCHED(SCHED_LQF))  h_lqf  (.done(done[1]), .checks(c[1]), .failures(f[1]), .drops(d[1]), .delivered(n[1]));
  xbar_harness #(.SCHED(SCHED_FCFS)) h_fcfs (.done(done[2]), .checks(c[2]), .failures(f[2]), .drops(d[2]), .delivered(n[2]));

  initial begin
    #100;
    wait (done[0] && done[1] && done[2]);
    checks = c[0] + c[1] + c[2];
    failures = f[0] + f[1] + f[2];
    $display("RR   delivered %0d dropped %0d", n[0], d[0]);
    $display("LQF  delivered %0d dropped %0d", n[1], d[1]);
    $display("FCFS delivered %0d dropped %0d", n[2], d[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    checks = c[0] + c[1] + c[2];
    failures = f[0] + f[1] + f[2] + 1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
