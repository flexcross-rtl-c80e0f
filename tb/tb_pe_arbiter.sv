// tb_pe_arbiter: self-checking test of a Processing Engine's egress arbiter.
// Three units keep multi-beat packets ready; the output must carry whole packets, never
// interleaved, granted in round-robin order 0,1,2,0,...; once units 0 and 1 stop, unit 2
// gets every packet; every beat must arrive unchanged.
module tb_pe_arbiter;
  import flexcross_pkg::*;
  localparam int NU = 3;
  logic clk = 0, rst = 1;
  beat_t s_beat [NU], m_beat;
  logic s_valid [NU], s_ready [NU], m_valid, m_ready = 1;
  int checks = 0, failures = 0;
  int seq [NU], bidx [NU];
  bit active [NU];
  int cur = -1, nxt_exp = 0, pkts = 0, pkts2 = 0;
  bit phase2 = 0;

  pe_arbiter #(.NUM_UNITS(NU)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  // Unit u sends packets of 1 + (k mod 4) beats; beat data = {u, k, beat}.
  function automatic beat_t mk(input int u, input int k, input int b);
    beat_t x = '0;
    x.tdata[31:0] = 32'(u * 1000000 + k * 100 + b);
    x.tlast = (b == (k % 4));
    return x;
  endfunction

  always @(posedge clk) if (!rst) begin
    if (m_valid && m_ready) begin
      automatic int v = int'(m_beat.tdata[31:0]);
      automatic int u = v / 1000000;
      if (cur < 0) begin
        if (nxt_exp >= 0) chk(u == nxt_exp, $sformatf("grant %0d expected %0d", u, nxt_exp));
        if (phase2) chk(u == 2, "only the active unit is granted");
        cur = u;
      end
      chk(u == cur, "no interleaving");
      chk(v == u * 1000000 + seq[u] * 100 + bidx[u], "beat order");
      if (m_beat.tlast) begin
        cur = -1; pkts++; if (phase2) pkts2++;
        if (nxt_exp >= 0) nxt_exp = (nxt_exp + 1) % NU;
      end
    end
    for (int u = 0; u < NU; u++) if (s_valid[u] && s_ready[u]) begin
      if (s_beat[u].tlast) begin seq[u]++; bidx[u] = 0; end else bidx[u]++;
    end
  end

  always @(posedge clk) begin
    #1;
    for (int u = 0; u < NU; u++) begin
      s_valid[u] = active[u] || bidx[u] != 0;   // a stopped unit finishes its packet
      s_beat[u] = mk(u, seq[u], bidx[u]);
    end
    m_ready = ($urandom % 4) != 0;
  end

  initial begin
    foreach (seq[u]) begin seq[u] = 0; bidx[u] = 0; active[u] = 1; s_valid[u] = 0; s_beat[u] = '0; end
    repeat (3) @(posedge clk); #1 rst = 0;
    repeat (600) @(posedge clk);
    // stop units 0 and 1; once their packets in flight have drained only unit 2 may win
    active[0] = 0; active[1] = 0; nxt_exp = -1;
    repeat (40) @(posedge clk);
    phase2 = 1;
    repeat (300) @(posedge clk);
    chk(pkts > 200, $sformatf("packets %0d", pkts));
    chk(pkts2 > 50, $sformatf("unit 2 packets %0d", pkts2));
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
