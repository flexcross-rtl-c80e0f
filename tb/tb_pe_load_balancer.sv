// tb_pe_load_balancer: self-checking test of a Processing Engine's ingress load balancer.
// With random ingress-queue fill levels, each packet must go, whole, to the unit with the
// lowest fill (lowest index on a tie) seen at its first beat, even if the levels change
// during the packet; TREADY must follow that unit; per-unit packet counters must match.
module tb_pe_load_balancer;
  import flexcross_pkg::*;
  localparam int NU = 4, FW = 6;
  logic clk = 0, rst = 1;
  beat_t s_beat, m_beat;
  logic s_valid = 0, s_ready;
  logic m_valid [NU], m_ready [NU];
  logic [FW-1:0] fill [NU];
  logic [31:0] unit_pkts [NU];
  int checks = 0, failures = 0;
  int cnt [NU];

  pe_load_balancer #(.NUM_UNITS(NU), .FW(FW)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic int least();
    int b = 0;
    for (int u = 1; u < NU; u++) if (fill[u] < fill[b]) b = u;
    return b;
  endfunction

  initial begin
    s_beat = '0;
    foreach (cnt[u]) cnt[u] = 0;
    foreach (fill[u]) begin fill[u] = 0; m_ready[u] = 1; end
    repeat (2) @(posedge clk); #1 rst = 0;
    for (int p = 0; p < 300; p++) begin
      automatic int nb = 1 + $urandom % 6;
      automatic int tgt;
      foreach (fill[u]) fill[u] = FW'($urandom % 8);
      tgt = least();
      for (int b = 0; b < nb; b++) begin
        s_valid = 1;
        s_beat.tlast = (b == nb - 1);
        s_beat.tdata[31:0] = 32'(p * 16 + b);
        foreach (m_ready[u]) m_ready[u] = ($urandom % 3) != 0;
        #1;
        for (int u = 0; u < NU; u++) chk(m_valid[u] == (u == tgt), $sformatf("pkt %0d beat %0d unit %0d", p, b, u));
        chk(s_ready == m_ready[tgt], "ready follows chosen unit");
        chk(m_beat == s_beat, "beat broadcast");
        while (!s_ready) begin @(posedge clk); #1 m_ready[tgt] = ($urandom % 2); #1; end
        @(posedge clk); #1;
        foreach (fill[u]) fill[u] = FW'($urandom % 8);   // must not move the packet
      end
      cnt[tgt]++;
      s_valid = 0;
      @(posedge clk); #1;
    end
    for (int u = 0; u < NU; u++) chk(int'(unit_pkts[u]) == cnt[u], $sformatf("unit_pkts[%0d]", u));
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
