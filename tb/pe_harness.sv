// pe_harness: traffic and scoreboard for one Processing Engine configuration (used by
// tb_proc_engine). Packets of the six evaluation sizes carry random task sequences and
// steps; each must leave complete, byte-exact, with its metadata advanced by one task,
// and the load balancer must have used every unit. A closing burst of back-to-back
// 1518-byte packets checks that the parallel units keep up with the 512-bit line rate
// (2400 beats in at most 2400 cycles plus one packet time in a unit plus a small margin).
module pe_harness
  import flexcross_pkg::*;
  import tb_pkt_pkg::*;
#(
  parameter int NU  = 4,
  parameter int UW  = 128,
  parameter bit STALL = 1
) (
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int SIZES [6] = '{64, 128, 256, 512, 1024, 1518};
  logic clk = 0, rst = 1;
  beat_t s_beat, m_beat;
  logic s_valid = 0, s_ready, m_valid, m_ready = 1;
  logic [UW-1:0] tx_d [NU], rx_d [NU];
  logic [UW/8-1:0] tx_k [NU], rx_k [NU];
  logic tx_l [NU], tx_v [NU], tx_r [NU], rx_l [NU], rx_v [NU], rx_r [NU];
  meta_t tx_u [NU], rx_u [NU];
  logic [31:0] unit_pkts [NU];
  int u_pkts [NU], u_err [NU];
  bit burst = 0, rand_ready = 1;

  proc_engine #(.NUM_UNITS(NU), .UNIT_W(UW)) dut (
    .clk, .rst, .s_beat, .s_valid, .s_ready, .m_beat, .m_valid, .m_ready,
    .u_tx_tdata(tx_d), .u_tx_tkeep(tx_k), .u_tx_tlast(tx_l), .u_tx_tuser(tx_u), .u_tx_tvalid(tx_v), .u_tx_tready(tx_r),
    .u_rx_tdata(rx_d), .u_rx_tkeep(rx_k), .u_rx_tlast(rx_l), .u_rx_tuser(rx_u), .u_rx_tvalid(rx_v), .u_rx_tready(rx_r),
    .unit_pkts
  );

  for (genvar u = 0; u < NU; u++) begin : g_u
    unit_model #(.W(UW), .LAT(3 + u), .STALL(STALL)) m (
      .clk, .rst,
      .s_tdata(tx_d[u]), .s_tkeep(tx_k[u]), .s_tlast(tx_l[u]), .s_tuser(tx_u[u]), .s_tvalid(tx_v[u] && !burst_stall), .s_tready(tx_r[u]),
      .m_tdata(rx_d[u]), .m_tkeep(rx_k[u]), .m_tlast(rx_l[u]), .m_tuser(rx_u[u]), .m_tvalid(rx_v[u]), .m_tready(rx_r[u]),
      .pkts(u_pkts[u]), .errors(u_err[u])
    );
  end
  logic burst_stall = 0;

  always #5 clk = ~clk;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL [%0dx%0d] %s", NU, UW, msg); end
  endtask

  bq_t   pend_f [int];
  meta_t pend_m [int];
  int cur_id = -1, beat_i = 0, got = 0, sent = 0;
  longint last_out;

  always @(posedge clk) if (!rst && m_valid && m_ready) begin
    if (beat_i == 0) cur_id = int'(frame_id(m_beat.tdata));
    chk(pend_f.exists(cur_id), "known packet");
    if (pend_f.exists(cur_id)) begin
      automatic meta_t e = pend_m[cur_id];
      chk(m_beat.tdata == beat_data(pend_f[cur_id], beat_i) && m_beat.tkeep == beat_keep(pend_f[cur_id], beat_i),
          $sformatf("data pkt %0d beat %0d", cur_id, beat_i));
      chk(m_beat.tlast == (beat_i == nbeats(pend_f[cur_id].size()) - 1), "tlast");
      chk(m_beat.tuser.step == e.step + 1 && m_beat.tuser.next_task == e.task_seq[e.step + 1],
          "next required task advanced");
      chk(m_beat.tuser.task_seq == e.task_seq && m_beat.tuser.pkt_len == e.pkt_len, "metadata kept");
      beat_i++;
      if (m_beat.tlast) begin pend_f.delete(cur_id); pend_m.delete(cur_id); beat_i = 0; got++; end
    end
    last_out = cyc;
  end

  always @(posedge clk) #1 m_ready = rand_ready ? (($urandom % 5) != 0) : 1'b1;

  task automatic send(input int len, input int id, input bit gaps);
    bq_t f = make_frame(len, 16'd5, 16'd6, 32'h0B000001, 32'(id), 8'h00);
    meta_t m = '0;
    m.pkt_len = 16'(len);
    for (int s = 0; s < MAX_HOPS; s++) m.task_seq[s] = 3'($urandom % 7);
    m.step = 3'($urandom % 6);
    m.next_task = m.task_seq[m.step];
    pend_f[id] = f;
    pend_m[id] = m;
    for (int b = 0; b < nbeats(len); b++) begin
      s_beat = frame_beat(f, b, m);
      s_valid = 1;
      do @(posedge clk); while (!s_ready);
      #1;
      if (gaps && ($urandom % 4) == 0) begin s_valid = 0; @(posedge clk); #1; end
    end
    s_valid = 0;
    sent++;
  endtask

  initial begin
    longint t0;
    int tot = 0;
    checks = 0; failures = 0; done = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int k = 0; k < 300; k++) send(SIZES[$urandom % 6], k, 1'b1);
    rand_ready = 0;
    repeat (500) @(posedge clk);
    chk(got == sent && pend_f.size() == 0, $sformatf("delivered %0d of %0d", got, sent));
    for (int u = 0; u < NU; u++) begin
      chk(unit_pkts[u] > 0, $sformatf("unit %0d used", u));
      chk(int'(unit_pkts[u]) == u_pkts[u], "unit_pkts counts the unit's packets");
      chk(u_err[u] == 0, "no interleaving at a unit");
      tot += int'(unit_pkts[u]);
    end
    chk(tot == sent, "every packet went to exactly one unit");
    // line rate: 100 back-to-back 1518-byte packets (24 beats each) without unit stalls
    if (!STALL) begin
      @(posedge clk); #1;
      t0 = cyc;
      for (int k = 0; k < 100; k++) send(1518, 1000 + k, 1'b0);
      repeat (200) @(posedge clk);
      chk(pend_f.size() == 0, "burst delivered");
      chk(last_out - t0 <= 2400 + 24 * (512 / UW) + 40, $sformatf("2400 beats took %0d cycles", last_out - t0));
    end
    done = 1;
  end
endmodule
