// workload_harness: the core's two evaluation workloads, for one scheduler type (SCHED);
// every other parameter of the core is at its default. Used by tb_flexcross_workload.
//
// Scenario 1: each frame gets one of the four flow types (uniformly), which the Parser's
// flow table maps to CRC-FW-AES-LB-NAT, FW-NAT-AES-Router, CRC-AES-Router and CRC-LB.
// Scenario 2: each frame gets its own random order of all six engines; the flow table
// entry a frame will use is rewritten, through the configuration port, while the frame
// before it is being sent.
// Each run sends N_PKTS frames whose size is drawn uniformly from 64, 128, 256, 512, 1024
// and 1518 bytes, at an offered load RATE_PCT of the 102.4 Gbit/s line: after a frame of
// b beats the generator idles for a random gap averaging b*(100-RATE)/RATE cycles, so the
// load varies in the short term. The CRC and AES units are pass-through models.
// The sink checks every frame byte for byte, its task list and step count, and that
// frames received + crossbar drops == frames sent; it reports throughput, drop rate and
// per-packet latency (Parser entry to sink, in cycles of 5 ns). At loads up to 80 % the
// drop rate must stay below 1 %, and at every load the delivered throughput must be at
// least 95 % of the offered load less the drops (the rest is the start and end of the
// run, when the pipeline fills and drains).
module workload_harness
  import flexcross_pkg::*;
  import tb_pkt_pkg::*;
#(
  parameter sched_e SCHED = SCHED_RR
) (
  output bit done,
  output int checks,
  output int failures
);

  localparam int N_PKTS = 52000;
  localparam int CRC_UNITS = 2, CRC_W = 256, AES_UNITS = 4, AES_W = 128;
  localparam int N_RUNS = 6;
  localparam int RUN_SCEN [N_RUNS] = '{1, 1, 1, 2, 2, 2};
  localparam int RUN_RATE [N_RUNS] = '{60, 80, 100, 60, 80, 100};

  logic clk = 0, rst = 1;
  logic [DATA_W-1:0] rx_tdata = '0;
  logic [KEEP_W-1:0] rx_tkeep = '0;
  logic rx_tlast = 0, rx_tvalid = 0, rx_tready;
  logic [DATA_W-1:0] tx_tdata;
  logic [KEEP_W-1:0] tx_tkeep;
  logic tx_tlast, tx_tvalid, tx_tready = 1;
  meta_t tx_tuser;
  logic cfg_flow_we = 0;
  logic [1:0] cfg_flow = 0;
  task_seq_t cfg_flow_seq = '0;
  logic cfg_fw_we = 0, cfg_fw_valid = 0;
  logic [2:0] cfg_fw_idx = 0;
  logic [15:0] cfg_fw_port = 0;
  logic cfg_nat_we = 0, cfg_nat_valid = 0;
  logic [2:0] cfg_nat_idx = 0;
  logic [31:0] cfg_nat_match = 0, cfg_nat_xlate = 0;
  logic cfg_rt_we = 0, cfg_rt_valid = 0;
  logic [2:0] cfg_rt_idx = 0;
  logic [31:0] cfg_rt_prefix = 0;
  logic [5:0] cfg_rt_len = 0;
  logic [1:0] cfg_rt_port = 0;
  logic [CRC_W-1:0]   crc_tx_tdata  [CRC_UNITS], crc_rx_tdata  [CRC_UNITS];
  logic [CRC_W/8-1:0] crc_tx_tkeep  [CRC_UNITS], crc_rx_tkeep  [CRC_UNITS];
  logic               crc_tx_tlast  [CRC_UNITS], crc_rx_tlast  [CRC_UNITS];
  meta_t              crc_tx_tuser  [CRC_UNITS], crc_rx_tuser  [CRC_UNITS];
  logic               crc_tx_tvalid [CRC_UNITS], crc_rx_tvalid [CRC_UNITS];
  logic               crc_tx_tready [CRC_UNITS], crc_rx_tready [CRC_UNITS];
  logic [AES_W-1:0]   aes_tx_tdata  [AES_UNITS], aes_rx_tdata  [AES_UNITS];
  logic [AES_W/8-1:0] aes_tx_tkeep  [AES_UNITS], aes_rx_tkeep  [AES_UNITS];
  logic               aes_tx_tlast  [AES_UNITS], aes_rx_tlast  [AES_UNITS];
  meta_t              aes_tx_tuser  [AES_UNITS], aes_rx_tuser  [AES_UNITS];
  logic               aes_tx_tvalid [AES_UNITS], aes_rx_tvalid [AES_UNITS];
  logic               aes_tx_tready [AES_UNITS], aes_rx_tready [AES_UNITS];
  logic [31:0] xbar_fwd_count [N_PORTS], xbar_drop_count [N_PORTS];
  logic [31:0] fw_drop_count, nat_xlate_count;
  logic [31:0] crc_unit_pkts [CRC_UNITS], aes_unit_pkts [AES_UNITS];

  flexcross_top #(.SCHED(SCHED)) dut (.*);

  int crc_pkts [CRC_UNITS], crc_err [CRC_UNITS];
  int aes_pkts [AES_UNITS], aes_err [AES_UNITS];
  for (genvar g = 0; g < CRC_UNITS; g++) begin : g_crc
    unit_model #(.W(CRC_W), .LAT(6), .STALL(0)) u_m (
      .clk, .rst,
      .s_tdata(crc_tx_tdata[g]), .s_tkeep(crc_tx_tkeep[g]), .s_tlast(crc_tx_tlast[g]),
      .s_tuser(crc_tx_tuser[g]), .s_tvalid(crc_tx_tvalid[g]), .s_tready(crc_tx_tready[g]),
      .m_tdata(crc_rx_tdata[g]), .m_tkeep(crc_rx_tkeep[g]), .m_tlast(crc_rx_tlast[g]),
      .m_tuser(crc_rx_tuser[g]), .m_tvalid(crc_rx_tvalid[g]), .m_tready(crc_rx_tready[g]),
      .pkts(crc_pkts[g]), .errors(crc_err[g]));
  end
  for (genvar g = 0; g < AES_UNITS; g++) begin : g_aes
    unit_model #(.W(AES_W), .LAT(12), .STALL(0)) u_m (
      .clk, .rst,
      .s_tdata(aes_tx_tdata[g]), .s_tkeep(aes_tx_tkeep[g]), .s_tlast(aes_tx_tlast[g]),
      .s_tuser(aes_tx_tuser[g]), .s_tvalid(aes_tx_tvalid[g]), .s_tready(aes_tx_tready[g]),
      .m_tdata(aes_rx_tdata[g]), .m_tkeep(aes_rx_tkeep[g]), .m_tlast(aes_rx_tlast[g]),
      .m_tuser(aes_rx_tuser[g]), .m_tvalid(aes_rx_tvalid[g]), .m_tready(aes_rx_tready[g]),
      .pkts(aes_pkts[g]), .errors(aes_err[g]));
  end

  always #2.5 clk = ~clk;   // 200 MHz

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

  localparam int SIZES [6] = '{64, 128, 256, 512, 1024, 1518};
  localparam task_seq_t FLOW_SEQ [4] = '{
    {3'd0, 3'd0, 3'(TASK_NAT), 3'(TASK_LB), 3'(TASK_AES), 3'(TASK_FW), 3'(TASK_CRC)},
    {3'd0, 3'd0, 3'd0, 3'(TASK_ROUTER), 3'(TASK_AES), 3'(TASK_NAT), 3'(TASK_FW)},
    {3'd0, 3'd0, 3'd0, 3'd0, 3'(TASK_ROUTER), 3'(TASK_AES), 3'(TASK_CRC)},
    {3'd0, 3'd0, 3'd0, 3'd0, 3'd0, 3'(TASK_LB), 3'(TASK_CRC)}};

  // per-packet records, indexed by packet id (1..N_PKTS)
  int        p_len  [N_PKTS + 1];
  task_seq_t p_seq  [N_PKTS + 1];
  int        p_cyc  [N_PKTS + 1];
  bit        p_seen [N_PKTS + 1];

  function automatic task_seq_t rand_perm();
    task_seq_t s = '0;
    int t [6] = '{1, 2, 3, 4, 5, 6};
    for (int i = 5; i > 0; i--) begin
      int j = $urandom % (i + 1);
      int x = t[i]; t[i] = t[j]; t[j] = x;
    end
    for (int i = 0; i < 6; i++) s[i] = 3'(t[i]);
    return s;
  endfunction

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- sink ----------------
  int n_recv = 0, bi = 0, cur_id = 0;
  bit cur_ok = 0;
  bq_t cur_frame;
  longint rx_bytes = 0, lat_sum = 0;
  int lat_min = 0, lat_max = 0, first_rx = -1, last_rx = 0;

  always @(posedge clk) if (!rst && tx_tvalid && tx_tready) begin
    if (bi == 0) begin
      cur_id = int'(frame_id(tx_tdata));
      cur_ok = cur_id >= 1 && cur_id <= N_PKTS && !p_seen[cur_id] && p_len[cur_id] != 0;
      chk(cur_ok, $sformatf("frame id %0d unknown or duplicated", cur_id));
      if (cur_ok) begin
        int lat, nt;
        p_seen[cur_id] = 1;
        n_recv++;
        nt = 0;
        while (nt < MAX_HOPS && p_seq[cur_id][nt] != TASK_EXIT) nt++;
        chk(tx_tuser.task_seq == p_seq[cur_id], "task sequence");
        chk(int'(tx_tuser.step) == nt && tx_tuser.next_task == TASK_EXIT, "all tasks done");
        cur_frame = make_frame(p_len[cur_id], 16'd2000, 16'(1000 + cur_id % 4), 32'h2B00_0001,
                               32'(cur_id), 8'h00);
        lat = cyc - p_cyc[cur_id];
        lat_sum += lat;
        if (n_recv == 1 || lat < lat_min) lat_min = lat;
        if (lat > lat_max) lat_max = lat;
        if (first_rx < 0) first_rx = cyc;
      end
    end
    if (cur_ok) begin
      chk(tx_tdata == beat_data(cur_frame, bi) && tx_tkeep == beat_keep(cur_frame, bi) &&
          tx_tlast == (bi == nbeats(cur_frame.size()) - 1), $sformatf("frame %0d beat %0d", cur_id, bi));
      rx_bytes += $countones(tx_tkeep);
    end
    if (tx_tlast) begin bi = 0; last_rx = cyc; end else bi++;
  end

  // ---------------- generator ----------------
  longint tx_bytes;
  int tx_first, tx_last;

  task automatic send(input int id, input int len, input int scen, input task_seq_t next_seq);
    bq_t f = make_frame(len, 16'd2000, 16'(1000 + id % 4), 32'h2B00_0001, 32'(id), 8'h00);
    for (int k = 0; k < nbeats(len); k++) begin
      rx_tdata = beat_data(f, k); rx_tkeep = beat_keep(f, k);
      rx_tlast = (k == nbeats(len) - 1); rx_tvalid = 1;
      if (k == 0 && scen == 2) begin
        // table entry of the next frame, written alongside this frame's first beat
        cfg_flow_we = 1; cfg_flow = 2'((id + 1) % 4); cfg_flow_seq = next_seq;
      end
      forever begin @(negedge clk); if (rx_tready) break; end
      if (k == 0) begin
        p_cyc[id] = cyc;
        if (tx_first < 0) tx_first = cyc;
      end
      @(posedge clk); #1;
      cfg_flow_we = 0;
    end
    rx_tvalid = 0;
    tx_last = cyc;
    tx_bytes += len;
  endtask

  initial begin
    done = 0; checks = 0; failures = 0;
    for (int r = 0; r < N_RUNS; r++) begin
      int scen, rate, drops;
      task_seq_t nseq;
      real thr_in, thr_out, droppct;
      scen = RUN_SCEN[r]; rate = RUN_RATE[r];
      rst = 1;
      repeat (4) @(posedge clk); #1;
      rst = 0;
      for (int i = 0; i <= N_PKTS; i++) begin p_len[i] = 0; p_seen[i] = 0; p_seq[i] = '0; end
      n_recv = 0; bi = 0; rx_bytes = 0; lat_sum = 0; lat_min = 0; lat_max = 0; first_rx = -1;
      tx_bytes = 0; tx_first = -1;
      repeat (20) @(posedge clk); #1;
      nseq = rand_perm();
      if (scen == 2) begin
        cfg_flow_we = 1; cfg_flow = 2'(1 % 4); cfg_flow_seq = nseq;
        @(posedge clk); #1 cfg_flow_we = 0;
      end
      for (int id = 1; id <= N_PKTS; id++) begin
        automatic int len = SIZES[$urandom % 6];
        automatic int b = nbeats(len);
        automatic int gap = (rate >= 100) ? 0 : int'($urandom % (2 * b * (100 - rate) / rate + 1));
        p_len[id] = len;
        p_seq[id] = (scen == 1) ? FLOW_SEQ[id % 4] : nseq;
        nseq = rand_perm();
        send(id, len, scen, nseq);
        repeat (gap) @(posedge clk);
        #1;
      end
      repeat (20000) @(posedge clk); #1;
      drops = 0;
      for (int i = 0; i < N_PORTS; i++) drops += int'(xbar_drop_count[i]);
      droppct = 100.0 * drops / N_PKTS;
      thr_in  = 512.0 * 200e6 / 1e9 * real'(tx_bytes) / 64.0 / real'(tx_last - tx_first + 1);
      thr_out = 512.0 * 200e6 / 1e9 * real'(rx_bytes) / 64.0 / real'(last_rx - first_rx + 1);
      $display("%s scenario %0d load %0d%%: sent %0d received %0d dropped %0d (%.3f %%)  in %.1f Gbit/s out %.1f Gbit/s  latency mean %.0f min %0d max %0d cycles (%.2f us mean)",
               SCHED.name(), scen, rate, N_PKTS, n_recv, drops, droppct, thr_in, thr_out,
               real'(lat_sum) / n_recv, lat_min, lat_max, real'(lat_sum) / n_recv * 0.005);
      chk(bi == 0, "no frame left half-way");
      chk(n_recv + drops == N_PKTS, $sformatf("conservation: recv %0d + drops %0d != %0d", n_recv, drops, N_PKTS));
      chk(fw_drop_count == 0, "no firewall drops without blocked ports");
      for (int g = 0; g < CRC_UNITS; g++) chk(crc_err[g] == 0, "CRC unit: no interleaving");
      for (int g = 0; g < AES_UNITS; g++)
        chk(aes_err[g] == 0, $sformatf("AES unit %0d: %0d interleaving errors", g, aes_err[g]));
      if (rate <= 80) chk(droppct < 1.0, $sformatf("drop rate %.3f %% at %0d %% load", droppct, rate));
      chk(thr_out >= thr_in * (1.0 - droppct / 100.0) * 0.95,
          $sformatf("throughput %.1f below offered %.1f less drops", thr_out, thr_in));
    end
    done = 1;
  end
endmodule
