// xbar_harness: traffic and scoreboard for one crossbar instance (used by tb_xbar).
//
// Seven drivers send UDP frames of the six evaluation sizes (64..1518 bytes) to random
// outputs; outputs accept with random TREADY and occasional long stalls so that queues
// overflow. The scoreboard checks, per output: packets are not interleaved, every packet
// is complete and byte-exact, packets from one input to one output stay in order, and
// packets missing from that order are exactly the ones the Controllers report dropped.
// Directed parts check the four-cycle traversal latency and one-beat-per-cycle
// throughput of back-to-back minimum-size packets.
module xbar_harness
  import flexcross_pkg::*;
  import tb_pkt_pkg::*;
#(
  parameter sched_e SCHED = SCHED_RR,
  parameter int     Q     = 32
) (
  output logic done,
  output int   checks,
  output int   failures,
  output int   drops,
  output int   delivered
);
  localparam int N = 7;
  localparam int SIZES [6] = '{64, 128, 256, 512, 1024, 1518};
  logic clk = 0, rst = 1;
  beat_t s_beat [N], m_beat [N];
  logic s_valid [N], s_ready [N], m_valid [N], m_ready [N];
  logic [31:0] fwd_count [N], drop_count [N];

  xbar #(.N(N), .QDEPTH(Q), .SCHED(SCHED)) dut (.*);
  always #5 clk = ~clk;

  int exp_q [N][N][$];
  int len_of [int];
  int sent = 0, skipped = 0, drivers_done = 0;
  bit stress = 0, random_ready = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL [%s] %s", SCHED.name(), msg); end
  endtask

  task automatic send(input int i, input int j, input int len, input int id, input bit gaps);
    bq_t f = make_frame(len, 16'(i), 16'(j), 32'hC0A8_0000 + 32'(j), 32'(id), 8'h00);
    meta_t m = simple_meta(len, j);
    len_of[id] = len;
    for (int b = 0; b < nbeats(len); b++) begin
      s_beat[i]  = frame_beat(f, b, m);
      s_valid[i] = 1;
      do @(posedge clk); while (!s_ready[i]);
      if (b == 0) begin exp_q[i][j].push_back(id); sent++; end
      #1;
      if (gaps && ($urandom % 4) == 0) begin s_valid[i] = 0; @(posedge clk); #1; end
    end
    s_valid[i] = 0;
  endtask

  // Output monitors.
  int   cur_id [N], cur_src [N], cur_beat [N], cur_len [N];
  bit   in_pkt [N];
  longint out_cyc [N];
  bq_t  cur_f  [N];
  always @(posedge clk) if (!rst) begin
    for (int j = 0; j < N; j++) if (m_valid[j] && m_ready[j]) begin
      if (!in_pkt[j]) begin
        cur_id[j]  = int'(frame_id(m_beat[j].tdata));
        cur_src[j] = int'({m_beat[j].tdata[8*34 +: 8], m_beat[j].tdata[8*35 +: 8]});
        cur_beat[j] = 0;
        in_pkt[j] = 1;
        chk(len_of.exists(cur_id[j]) && cur_src[j] < N, "known packet");
        cur_len[j] = len_of.exists(cur_id[j]) ? len_of[cur_id[j]] : 64;
        cur_f[j] = make_frame(cur_len[j], 16'(cur_src[j]), 16'(j), 32'hC0A8_0000 + 32'(j), 32'(cur_id[j]), 8'h00);
        if (cur_src[j] < N) begin
          while (exp_q[cur_src[j]][j].size() > 0 && exp_q[cur_src[j]][j][0] != cur_id[j]) begin
            void'(exp_q[cur_src[j]][j].pop_front());
            skipped++;
          end
          chk(exp_q[cur_src[j]][j].size() > 0, "packet in per-pair order");
          if (exp_q[cur_src[j]][j].size() > 0) void'(exp_q[cur_src[j]][j].pop_front());
        end
        chk(int'(m_beat[j].tuser.next_task) == j, "metadata target");
      end
      chk(m_beat[j].tdata == beat_data(cur_f[j], cur_beat[j]) && m_beat[j].tkeep == beat_keep(cur_f[j], cur_beat[j]),
          $sformatf("data out %0d pkt %0d beat %0d", j, cur_id[j], cur_beat[j]));
      chk(m_beat[j].tlast == (cur_beat[j] == nbeats(cur_len[j]) - 1), "tlast position");
      cur_beat[j]++;
      out_cyc[j] = cyc;
      if (m_beat[j].tlast) begin in_pkt[j] = 0; delivered++; end
    end
  end

  // Output TREADY: always 1, or random with long stalls in the stress phase.
  for (genvar j = 0; j < N; j++) begin : g_rdy
    initial begin
      m_ready[j] = 1;
      forever begin
        @(posedge clk); #1;
        if (!random_ready) m_ready[j] = 1;
        else if (($urandom % 1500) == 0) begin
          m_ready[j] = 0;
          repeat (200 + $urandom % 300) @(posedge clk);
          #1;
        end else m_ready[j] = ($urandom % 8) != 0;
      end
    end
  end

  for (genvar i = 0; i < N; i++) begin : g_drv
    initial begin
      s_valid[i] = 0;
      s_beat[i]  = '0;
      wait (stress);
      for (int k = 0; k < 150; k++) begin
        send(i, $urandom % N, SIZES[$urandom % 6], 100000 * (i + 1) + k, 1'b1);
        if (($urandom % 3) == 0) repeat ($urandom % 8) @(posedge clk);
        #1;
      end
      drivers_done++;
    end
  end

  initial begin
    longint t0, t1;
    int n;
    checks = 0; failures = 0; drops = 0; delivered = 0; done = 0;
    foreach (in_pkt[j]) in_pkt[j] = 0;
    repeat (3) @(posedge clk); #1 rst = 0;
    @(posedge clk); #1;
    // Latency: one single-beat packet 3 -> 5 into an idle crossbar.
    fork
      send(3, 5, 64, 1, 1'b0);
      begin
        @(posedge clk iff (s_valid[3] && s_ready[3]));
        t0 = cyc;
        @(posedge clk iff m_valid[5]);
        t1 = cyc;
        chk(t1 - t0 == 4, $sformatf("traversal latency %0d cycles, expected 4", t1 - t0));
      end
    join
    repeat (10) @(posedge clk); #1;
    // Throughput: 32 back-to-back single-beat packets 1 -> 2 leave on consecutive cycles.
    n = delivered;
    fork
      for (int k = 0; k < 32; k++) send(1, 2, 64, 10 + k, 1'b0);
      begin
        @(posedge clk iff (m_valid[2] && m_ready[2]));
        t0 = cyc;
        wait (delivered == n + 32);
        t1 = out_cyc[2];
        chk(t1 - t0 == 31, $sformatf("32 min-size packets took %0d cycles, expected 31", t1 - t0));
      end
    join
    repeat (10) @(posedge clk); #1;
    // Stress with random traffic and stalls.
    random_ready = 1;
    stress = 1;
    wait (drivers_done == N);
    random_ready = 0;
    repeat (3000) @(posedge clk);
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      skipped += exp_q[i][j].size();
      exp_q[i][j].delete();
    end
    for (int i = 0; i < N; i++) drops += int'(drop_count[i]);
    chk(skipped == drops, $sformatf("missing packets %0d, reported drops %0d", skipped, drops));
    chk(sent == delivered + drops, $sformatf("sent %0d delivered %0d dropped %0d", sent, delivered, drops));
    chk(drops > 0, "overflow drops happened");
    done = 1;
  end
endmodule
