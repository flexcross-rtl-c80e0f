// tb_sched_lqf: self-checking test of the longest-queue-first scheduler.
// While no packet is in progress the grant must be the requesting queue with the highest
// fill level (lowest index on a tie, found here by a linear scan); once a beat has been
// presented the grant must stay until TLAST is accepted.
module tb_sched_lqf;
  localparam int N = 7, FW = 8;
  logic clk = 0, rst = 1;
  logic req [N];
  logic [FW-1:0] fill [N];
  logic fire = 0, last = 0;
  logic [2:0] sel;
  logic sel_valid;
  int checks = 0, failures = 0, m_lock = -1;

  sched_lqf #(.N(N), .FW(FW)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic int longest();
    int b = -1;
    for (int i = 0; i < N; i++) if (req[i] && (b < 0 || fill[i] > fill[b])) b = i;
    return b;
  endfunction

  always @(posedge clk) if (!rst) begin
    automatic int p = (m_lock >= 0) ? m_lock : longest();
    chk(sel_valid == (p >= 0), "sel_valid");
    if (p >= 0) begin
      chk(int'(sel) == p, $sformatf("sel %0d exp %0d", sel, p));
      m_lock = (fire && last) ? -1 : p;
    end
  end

  initial begin
    foreach (req[i]) begin req[i] = 0; fill[i] = 0; end
    repeat (2) @(posedge clk); #1 rst = 0;
    // directed: queue 5 longest
    foreach (req[i]) begin req[i] = 1; fill[i] = 8'(10 + i); end
    fill[5] = 200; fire = 1; last = 1;
    #1 chk(sel == 3'd5, "directed longest = 5");
    fill[2] = 200;
    #1 chk(sel == 3'd2, "tie goes to lower index");
    @(posedge clk); #1;
    for (int c = 0; c < 4000; c++) begin
      foreach (req[i]) begin req[i] = ($urandom % 2) == 0; fill[i] = 8'($urandom % 16); end
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
