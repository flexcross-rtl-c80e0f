// tb_xbar_controller: self-checking test of the crossbar Controller.
// Presents packets of random size and target with random fill levels of the target
// queue and checks the forward/drop decision against the rule "drop when the free space
// (128 - fill, in 64-byte beats) is smaller than ceil(size/64)", that the decision and
// target are held for all beats of a packet even if the fill level changes, and the
// forwarded/dropped packet counters.
module tb_xbar_controller;
  import flexcross_pkg::*;
  localparam int N = 7, Q = 128, FW = $clog2(Q + 2);
  logic clk = 0, rst = 1;
  beat_t s_beat;
  logic s_valid = 0, s_ready = 1;
  logic [FW-1:0] fill [N];
  port_t sel;
  logic drop, sop;
  logic [31:0] fwd_count, drop_count;
  int checks = 0, failures = 0, n_fwd = 0, n_drop = 0;

  xbar_controller #(.N(N), .QDEPTH(Q)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    s_beat = '0;
    foreach (fill[j]) fill[j] = '0;
    repeat (2) @(posedge clk); #1 rst = 0;
    for (int p = 0; p < 600; p++) begin
      automatic int len = 60 + ($urandom % 1459);
      automatic int t   = $urandom % N;
      automatic int nb  = (len + 63) / 64;
      automatic int f   = (p % 3 == 0) ? (Q - nb + int'($urandom % 3) - 1) : int'($urandom % (Q + 2));
      automatic bit exp_drop;
      if (f < 0) f = 0;
      if (f > Q + 1) f = Q + 1;
      exp_drop = (Q - f) < nb;
      foreach (fill[j]) fill[j] = FW'($urandom % (Q + 2));
      fill[t] = FW'(f);
      s_beat.tuser.next_task = port_t'(t);
      s_beat.tuser.pkt_len = 16'(len);
      for (int b = 0; b < nb; b++) begin
        s_valid = 1;
        s_ready = 1;
        s_beat.tlast = (b == nb - 1);
        #1;
        chk(sop == (b == 0), "sop");
        chk(int'(sel) == t, $sformatf("target held beat %0d", b));
        chk(drop == exp_drop, $sformatf("drop len %0d fill %0d exp %0d", len, f, exp_drop));
        @(posedge clk); #1;
        // a different fill level must not change the decision mid-packet
        fill[t] = FW'($urandom % (Q + 2));
        s_beat.tuser.next_task = port_t'($urandom % N);
        s_beat.tuser.next_task = (b == nb - 1) ? port_t'(t) : s_beat.tuser.next_task;
      end
      s_valid = 0;
      if (exp_drop) n_drop++; else n_fwd++;
      @(posedge clk); #1;
    end
    chk(fwd_count == 32'(n_fwd) && drop_count == 32'(n_drop),
        $sformatf("counters %0d/%0d exp %0d/%0d", fwd_count, drop_count, n_fwd, n_drop));
    chk(n_drop > 50 && n_fwd > 50, "both outcomes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
