// tb_sched_fcfs: self-checking test of the first-come-first-served scheduler.
// Random packet arrivals (several queues in one cycle possible) are appended to a model
// list in ascending queue order; the grant must always be the list head and the head is
// removed when the beat carrying TLAST is accepted. Also checks the pending count.
module tb_sched_fcfs;
  localparam int N = 7, D = 64;
  logic clk = 0, rst = 1;
  logic push [N];
  logic fire = 0, last = 0;
  logic [2:0] sel;
  logic sel_valid;
  logic [$clog2(D):0] count;
  int checks = 0, failures = 0;
  int model [$];

  sched_fcfs #(.N(N), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  always @(posedge clk) if (!rst) begin
    chk(int'(count) == model.size(), $sformatf("count %0d exp %0d", count, model.size()));
    chk(sel_valid == (model.size() > 0), "sel_valid");
    if (model.size() > 0) begin
      chk(int'(sel) == model[0], $sformatf("sel %0d exp %0d", sel, model[0]));
      if (fire && last) void'(model.pop_front());
    end
    for (int k = 0; k < N; k++) if (push[k]) model.push_back(k);
  end

  initial begin
    foreach (push[i]) push[i] = 0;
    repeat (2) @(posedge clk); #1 rst = 0;
    // directed: 4 then {1,6} in one cycle then 0 -> order 4,1,6,0
    push[4] = 1; @(posedge clk); #1 push[4] = 0;
    push[1] = 1; push[6] = 1; @(posedge clk); #1 push[1] = 0; push[6] = 0;
    push[0] = 1; @(posedge clk); #1 push[0] = 0;
    fire = 1; last = 1;
    #0 chk(sel == 3'd4, "first 4");
    @(posedge clk); #1 chk(sel == 3'd1, "then 1");
    @(posedge clk); #1 chk(sel == 3'd6, "then 6");
    @(posedge clk); #1 chk(sel == 3'd0, "then 0");
    @(posedge clk); #1;
    for (int c = 0; c < 4000; c++) begin
      foreach (push[i]) push[i] = (model.size() < D - N) && (($urandom % 8) == 0);
      fire = sel_valid && ($urandom % 2);
      last = ($urandom % 2) == 0;
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
