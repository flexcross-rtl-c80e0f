// tb_xbar_demux: self-checking test of the crossbar DEMUX.
// For every select value and drop flag, checks which queue sees TVALID, that the beat is
// passed unchanged, and that TREADY follows the selected queue (or is forced high when
// the packet is being dropped).
module tb_xbar_demux;
  import flexcross_pkg::*;
  localparam int N = 7;
  beat_t s_beat, m_beat;
  logic s_valid, s_ready, drop;
  port_t sel;
  logic m_valid [N], m_ready [N];
  int checks = 0, failures = 0;

  xbar_demux #(.N(N)) dut (.*);

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    for (int it = 0; it < 400; it++) begin
      s_beat  = {$urandom, $urandom, $urandom};
      s_beat.tdata[31:0] = $urandom;
      s_valid = $urandom % 2;
      drop    = ($urandom % 4) == 0;
      sel     = port_t'($urandom % N);
      foreach (m_ready[j]) m_ready[j] = $urandom % 2;
      #1;
      chk(m_beat == s_beat, "beat passes");
      for (int j = 0; j < N; j++)
        chk(m_valid[j] == (s_valid && !drop && j == int'(sel)), $sformatf("valid %0d", j));
      chk(s_ready == (drop ? 1'b1 : m_ready[sel]), "ready");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
