// tb_axis_fifo: self-checking test of the crosspoint queue (axis_fifo).
// Random writes and reads against a queue model: data order, fill level, TREADY at
// full, two-cycle write-to-output latency and the full capacity of DEPTH+1 words.
module tb_axis_fifo;
  localparam int W = 16, D = 8;
  logic clk = 0, rst = 1;
  logic [W-1:0] s_data, m_data;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0;
  logic [$clog2(D+2)-1:0] fill;
  int checks = 0, failures = 0;
  logic [W-1:0] model [$];

  axis_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  // Scoreboard at each rising edge, with the values the registers see.
  always @(posedge clk) if (!rst) begin
    chk(fill == ($clog2(D+2))'(model.size()), $sformatf("fill %0d model %0d", fill, model.size()));
    chk(s_ready == ((model.size() - int'(m_valid)) < D), "s_ready vs model");
    if (m_valid && m_ready) begin
      chk(model.size() > 0 && m_data == model[0], $sformatf("data %h", m_data));
      void'(model.pop_front());
    end
    if (s_valid && s_ready) model.push_back(s_data);
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst = 0;
    // latency: one write into the empty FIFO shows at the output two cycles later
    s_data = 16'h1234; s_valid = 1;
    @(posedge clk); #1 s_valid = 0;
    chk(!m_valid, "not yet valid after 1 cycle");
    @(posedge clk); #1 chk(m_valid && m_data == 16'h1234, "valid after 2 cycles");
    m_ready = 1; @(posedge clk); #1 m_ready = 0;
    // fill completely: DEPTH + 1 words fit
    for (int k = 0; k < D + 3; k++) begin
      s_valid = 1; s_data = 16'(k + 100);
      @(posedge clk); #1;
    end
    s_valid = 0;
    chk(fill == ($clog2(D+2))'(D + 1), "capacity DEPTH+1");
    chk(!s_ready, "full -> not ready");
    // random traffic
    for (int c = 0; c < 3000; c++) begin
      s_valid = ($urandom % 3) != 0;
      s_data  = 16'($urandom);
      m_ready = ($urandom % 2) != 0;
      @(posedge clk); #1;
    end
    s_valid = 0; m_ready = 1;
    repeat (D + 4) @(posedge clk);
    #1 chk(model.size() == 0 && !m_valid, "drained");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
