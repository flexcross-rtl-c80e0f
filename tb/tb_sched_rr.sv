// tb_sched_rr: self-checking test of the round-robin scheduler.
// 1) all queues requesting, single-beat packets: grants rotate 0,1,...,6,0 one per cycle;
// 2) a multi-beat packet keeps its grant until TLAST even when other queues request;
// 3) random requests / handshakes against a reference model of the polling rule.
module tb_sched_rr;
  localparam int N = 7;
  logic clk = 0, rst = 1;
  logic req [N];
  logic fire = 0, last = 0;
  logic [2:0] sel;
  logic sel_valid;
  int checks = 0, failures = 0;

  sched_rr #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  // reference model
  int m_ptr = 0, m_lock = -1;
  function automatic int model_pick();
    if (m_lock >= 0) return m_lock;
    for (int k = 0; k < N; k++) if (req[(m_ptr + k) % N]) return (m_ptr + k) % N;
    return -1;
  endfunction

  always @(posedge clk) if (!rst) begin
    automatic int p = model_pick();
    chk(sel_valid == (p >= 0), "sel_valid");
    if (p >= 0) chk(int'(sel) == p, $sformatf("sel %0d exp %0d", sel, p));
    if (p >= 0) begin
      if (fire && last) begin m_lock = -1; m_ptr = (p + 1) % N; end
      else m_lock = p;
    end
  end

  initial begin
    foreach (req[i]) req[i] = 0;
    repeat (2) @(posedge clk); #1 rst = 0;
    // 1) rotation with back-to-back single-beat packets
    foreach (req[i]) req[i] = 1;
    fire = 1; last = 1;
    for (int c = 0; c < 2 * N; c++) begin
      #0 chk(int'(sel) == c % N, $sformatf("rotation step %0d got %0d", c, sel));
      @(posedge clk); #1;
    end
    // 2) lock for a 3-beat packet
    fire = 1; last = 0;
    begin
      automatic int g = sel;
      @(posedge clk); #1 chk(int'(sel) == g, "locked beat 2");
      @(posedge clk); #1 chk(int'(sel) == g, "locked beat 3"); last = 1;
      @(posedge clk); #1 chk(int'(sel) == (g + 1) % N, "moves on after TLAST");
    end
    // 3) random
    for (int c = 0; c < 4000; c++) begin
      foreach (req[i]) req[i] = ($urandom % 3) == 0;
      #0;
      fire = sel_valid && ($urandom % 2);
      last = ($urandom % 3) == 0;
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
