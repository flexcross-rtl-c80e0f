// tb_xbar_mux: self-checking test of the crossbar MUX.
// For random selects, checks that the selected input's data and TVALID appear at the
// output, that only the selected input sees TREADY, and that nothing passes without a
// valid grant.
module tb_xbar_mux;
  localparam int N = 7, W = 32;
  logic [W-1:0] s_data [N];
  logic s_valid [N], s_ready [N];
  logic [2:0] sel;
  logic sel_valid, m_valid, m_ready;
  logic [W-1:0] m_data;
  int checks = 0, failures = 0;

  xbar_mux #(.N(N), .WIDTH(W)) dut (.*);

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    for (int it = 0; it < 400; it++) begin
      foreach (s_data[i]) begin s_data[i] = $urandom; s_valid[i] = $urandom % 2; end
      sel = 3'($urandom % N);
      sel_valid = ($urandom % 4) != 0;
      m_ready = $urandom % 2;
      #1;
      chk(m_valid == (sel_valid && s_valid[sel]), "m_valid");
      if (sel_valid) chk(m_data == s_data[sel], "m_data");
      for (int i = 0; i < N; i++)
        chk(s_ready[i] == (sel_valid && m_ready && i == int'(sel)), $sformatf("ready %0d", i));
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
