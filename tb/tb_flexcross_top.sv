// tb_flexcross_top: end-to-end test of the FlexCross core at its default configuration
// (7x7 crossbar, 128-beat crosspoint queues, round-robin schedulers, 2 x 256-bit CRC
// units, 4 x 128-bit AES units).
//
// Behavioural pass-through models stand in for the external CRC and AES units (the AES
// ones withhold TREADY at random). Ethernet/IPv4/UDP frames of 64..1518 bytes on all
// four flows are sent into the MAC side; the firewall block list, NAT table and routing
// table are written first. A reference model walks each packet's task sequence
// (firewall verdict, NAT rewrite, route lookup) to predict what must come out:
//   - every frame arriving at the MAC/DMA side was sent, arrives once, is not on the
//     firewall block list, and carries the expected bytes (NAT applied);
//   - its metadata holds the length, flow, priority, task sequence, number of steps
//     done, the routed Ethernet port, and a timestamp with a constant offset to the
//     cycle the frame entered;
//   - at the end, frames received + firewall drops + crossbar drops == frames sent, and
//     the engine/unit packet counters agree with the unit models.
// Traffic phases: random mixed load; a line-rate burst of minimum-size frames; an
// overload with the MAC side stalled (forcing crossbar drops); and, after a run-time
// rewrite of the flow table, traffic on the new task sequence.
// Each mechanism is counted and the test fails for any that never happened.
module tb_flexcross_top;
  import flexcross_pkg::*;
  import tb_pkt_pkg::*;

  localparam int CRC_UNITS = 2, CRC_W = 256, AES_UNITS = 4, AES_W = 128;

  logic clk = 0, rst = 1;
  logic [DATA_W-1:0] rx_tdata = '0;
  logic [KEEP_W-1:0] rx_tkeep = '0;
  logic rx_tlast = 0, rx_tvalid = 0, rx_tready;
  logic [DATA_W-1:0] tx_tdata;
  logic [KEEP_W-1:0] tx_tkeep;
  logic tx_tlast, tx_tvalid, tx_tready;
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

  flexcross_top dut (.*);

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
    unit_model #(.W(AES_W), .LAT(12), .STALL(1)) u_m (
      .clk, .rst,
      .s_tdata(aes_tx_tdata[g]), .s_tkeep(aes_tx_tkeep[g]), .s_tlast(aes_tx_tlast[g]),
      .s_tuser(aes_tx_tuser[g]), .s_tvalid(aes_tx_tvalid[g]), .s_tready(aes_tx_tready[g]),
      .m_tdata(aes_rx_tdata[g]), .m_tkeep(aes_rx_tkeep[g]), .m_tlast(aes_rx_tlast[g]),
      .m_tuser(aes_rx_tuser[g]), .m_tvalid(aes_rx_tvalid[g]), .m_tready(aes_rx_tready[g]),
      .pkts(aes_pkts[g]), .errors(aes_err[g]));
  end

  always #2.5 clk = ~clk;   // 200 MHz

  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

  // ---------------- reference model ----------------
  localparam logic [15:0] BLOCK0 = 16'd6666, BLOCK1 = 16'd7777;
  localparam logic [31:0] NAT_M0 = 32'hC0A8_0101, NAT_X0 = 32'h0A01_024D;   // 192.168.1.1 -> 10.1.2.77
  localparam logic [31:0] NAT_M1 = 32'h0808_0808, NAT_X1 = 32'hC0A8_0707;   // 8.8.8.8 -> 192.168.7.7

  task_seq_t flow_seq [4];

  typedef struct packed {
    logic [15:0] len;
    logic [15:0] sport;
    logic [15:0] dport;
    logic [31:0] dip;
    logic [7:0]  tos;
    task_seq_t   seq;
    logic [31:0] cyc;
  } pinfo_t;
  pinfo_t sent [int];
  bit     arrived [int];

  function automatic int lpm(input logic [31:0] d);
    if (d[31:8] == 24'h0A0102) return 2;    // 10.1.2.0/24
    if (d[31:16] == 16'h0A01) return 1;     // 10.1.0.0/16
    if (d[31:16] == 16'hC0A8) return 3;     // 192.168.0.0/16
    return 0;                               // no route: default port
  endfunction

  // ---------------- stimulus ----------------
  int n_sent = 0, n_blocked_sent = 0;
  logic [31:0] cyc = 0;
  always @(posedge clk) cyc <= rst ? 0 : cyc + 1;

  task automatic cfg_write_flow(input int f, input task_seq_t s);
    @(posedge clk); #1;
    cfg_flow_we = 1; cfg_flow = 2'(f); cfg_flow_seq = s;
    @(posedge clk); #1;
    cfg_flow_we = 0;
    flow_seq[f] = s;
  endtask

  task automatic send(input int len, input int flow, input int sport_kind, input int gap);
    logic [15:0] sport, dport;
    logic [31:0] dip;
    logic [7:0] tos;
    bq_t f;
    int id = n_sent + 1;
    case ($urandom % 5)
      0: dip = 32'h0A01_0200 | ($urandom % 256);
      1: dip = 32'h0A01_0500 | ($urandom % 256);
      2: dip = NAT_M0;
      3: dip = NAT_M1;
      default: dip = 32'h2B00_0000 | ($urandom % 65536);
    endcase
    sport = (sport_kind == 1) ? BLOCK0 : (sport_kind == 2) ? BLOCK1 : 16'(2000 + $urandom % 3000);
    dport = 16'(1000 + flow + 4 * ($urandom % 100));
    tos = 8'($urandom);
    f = make_frame(len, sport, dport, dip, 32'(id), tos);
    for (int k = 0; k < nbeats(len); k++) begin
      rx_tdata = beat_data(f, k); rx_tkeep = beat_keep(f, k);
      rx_tlast = (k == nbeats(len) - 1); rx_tvalid = 1;
      forever begin @(negedge clk); if (rx_tready) break; end
      if (k == 0) begin
        sent[id] = '{len: 16'(len), sport: sport, dport: dport, dip: dip, tos: tos,
                     seq: flow_seq[flow], cyc: cyc};
        n_sent++;
        if (sport_kind != 0) n_blocked_sent++;
      end
      @(posedge clk); #1;
    end
    rx_tvalid = 0;
    repeat (gap) @(posedge clk);
    #1;
  endtask

  // ---------------- checker ----------------
  int n_recv = 0, bi = 0, cur_id = 0, ts_ofs = 0;
  bit ts_ofs_set = 0, cur_ok = 0;
  bq_t cur_frame;
  meta_t cur_meta;
  int  last_tlast_cyc = -10;
  int  m_nat = 0, m_route = 0, m_b2b = 0, m_reconf = 0, m_tx_stall = 0, m_multi = 0;
  bit  lb_port_seen [4];
  int  phaseB_first = -1, phaseB_last = -1;
  bit  phaseB = 0;
  task_seq_t reconf_seq;

  always @(posedge clk) if (!rst) begin
    if (tx_tvalid && !tx_tready) m_tx_stall++;
    if (tx_tvalid && tx_tready) begin
      if (bi == 0) begin
        pinfo_t p;
        logic [31:0] d;
        int port, nt;
        bit lb_last, blocked;
        cur_id = int'(frame_id(tx_tdata));
        cur_ok = sent.exists(cur_id) && !arrived.exists(cur_id);
        chk(cur_ok, $sformatf("frame id %0d unknown or duplicated", cur_id));
        if (cur_ok) begin
          p = sent[cur_id];
          arrived[cur_id] = 1;
          n_recv++;
          // walk the task sequence
          d = p.dip; port = 0; lb_last = 0; blocked = 0; nt = 0;
          for (int s = 0; s < MAX_HOPS && p.seq[s] != TASK_EXIT; s++) begin
            nt++;
            case (p.seq[s])
              TASK_FW:     if (p.sport == BLOCK0 || p.sport == BLOCK1) blocked = 1;
              TASK_NAT:    if (d == NAT_M0) d = NAT_X0; else if (d == NAT_M1) d = NAT_X1;
              TASK_ROUTER: begin port = lpm(d); lb_last = 0; end
              TASK_LB:     lb_last = 1;
              default: ;
            endcase
          end
          chk(!blocked, $sformatf("frame %0d should have been dropped by the firewall", cur_id));
          if (d != p.dip) m_nat++;
          cur_frame = make_frame(int'(p.len), p.sport, p.dport, d, 32'(cur_id), p.tos);
          cur_meta = tx_tuser;
          chk(tx_tuser.pkt_len == p.len, "meta pkt_len");
          chk(int'(tx_tuser.flow_type) == int'(p.dport) % 4, "meta flow_type");
          chk(tx_tuser.prio == p.tos[7:5], "meta prio");
          chk(tx_tuser.task_seq == p.seq, $sformatf("frame %0d meta task_seq", cur_id));
          chk(int'(tx_tuser.step) == nt, $sformatf("frame %0d meta step %0d exp %0d", cur_id, tx_tuser.step, nt));
          chk(tx_tuser.next_task == TASK_EXIT, "meta next_task");
          if (lb_last) lb_port_seen[tx_tuser.eth_port] = 1;
          else begin
            chk(int'(tx_tuser.eth_port) == port, $sformatf("frame %0d eth_port %0d exp %0d", cur_id, tx_tuser.eth_port, port));
            if (port != 0) m_route++;
          end
          if (!ts_ofs_set) begin ts_ofs = int'(tx_tuser.timestamp) - int'(p.cyc); ts_ofs_set = 1; end
          chk(int'(tx_tuser.timestamp) - int'(p.cyc) == ts_ofs, "meta timestamp");
          if (p.seq == reconf_seq && reconf_seq != '0) m_reconf++;
          if (int'(cyc) == last_tlast_cyc + 1) m_b2b++;
          if (phaseB) begin
            if (phaseB_first < 0) phaseB_first = int'(cyc);
          end
        end
      end else begin
        chk(tx_tuser == cur_meta, "metadata constant within packet");
      end
      if (cur_ok) begin
        chk(tx_tdata == beat_data(cur_frame, bi), $sformatf("frame %0d beat %0d data", cur_id, bi));
        chk(tx_tkeep == beat_keep(cur_frame, bi), $sformatf("frame %0d beat %0d keep", cur_id, bi));
        chk(tx_tlast == (bi == nbeats(cur_frame.size()) - 1), $sformatf("frame %0d beat %0d last", cur_id, bi));
      end
      if (bi > 0) m_multi++;
      if (tx_tlast) begin
        bi = 0; last_tlast_cyc = int'(cyc);
        if (phaseB) phaseB_last = int'(cyc);
      end else bi++;
    end
  end

  // MAC-side backpressure
  int tx_mode = 0;   // 0 always ready, 1 random 90 %, 2 stalled
  always @(negedge clk) tx_tready <= (tx_mode == 0) ? 1'b1 : (tx_mode == 1) ? (($urandom % 10) != 0) : 1'b0;

  function automatic int rand_len();
    case ($urandom % 10)
      0: return 64;
      1: return 1518;
      default: return 64 + $urandom % (1518 - 64 + 1);
    endcase
  endfunction

  function automatic int sum_drops();
    int s = 0;
    for (int i = 0; i < N_PORTS; i++) s += int'(xbar_drop_count[i]);
    return s;
  endfunction

  int m_xdrop, m_fwdrop, m_crc_units, m_aes_units, m_stall_drop;

  initial begin
    flow_seq[0] = mk_seq(TASK_CRC, TASK_FW, TASK_AES, TASK_LB, TASK_NAT, 0, 0);
    flow_seq[1] = mk_seq(TASK_FW, TASK_NAT, TASK_AES, TASK_ROUTER, 0, 0, 0);
    flow_seq[2] = mk_seq(TASK_CRC, TASK_AES, TASK_ROUTER, 0, 0, 0, 0);
    flow_seq[3] = mk_seq(TASK_CRC, TASK_LB, 0, 0, 0, 0, 0);
    reconf_seq = '0;
    repeat (4) @(posedge clk); #1 rst = 0;
    #100;
    // tables
    @(posedge clk); #1;
    cfg_fw_we = 1; cfg_fw_idx = 0; cfg_fw_valid = 1; cfg_fw_port = BLOCK0;
    @(posedge clk); #1 cfg_fw_idx = 5; cfg_fw_port = BLOCK1;
    @(posedge clk); #1 cfg_fw_we = 0;
    cfg_nat_we = 1; cfg_nat_idx = 1; cfg_nat_valid = 1; cfg_nat_match = NAT_M0; cfg_nat_xlate = NAT_X0;
    @(posedge clk); #1 cfg_nat_idx = 2; cfg_nat_match = NAT_M1; cfg_nat_xlate = NAT_X1;
    @(posedge clk); #1 cfg_nat_we = 0;
    cfg_rt_we = 1; cfg_rt_valid = 1;
    cfg_rt_idx = 0; cfg_rt_prefix = 32'h0A01_0000; cfg_rt_len = 16; cfg_rt_port = 1;
    @(posedge clk); #1 cfg_rt_idx = 3; cfg_rt_prefix = 32'h0A01_0200; cfg_rt_len = 24; cfg_rt_port = 2;
    @(posedge clk); #1 cfg_rt_idx = 7; cfg_rt_prefix = 32'hC0A8_0000; cfg_rt_len = 16; cfg_rt_port = 3;
    @(posedge clk); #1 cfg_rt_we = 0;

    // Phase A: mixed random load, MAC side mostly ready
    tx_mode = 1;
    for (int k = 0; k < 1200; k++)
      send(rand_len(), $urandom % 4, (($urandom % 10) == 0) ? 1 + $urandom % 2 : 0, $urandom % 40);
    tx_mode = 0;
    repeat (4000) @(posedge clk); #1;

    // Phase B: line-rate burst of minimum-size frames on flow 3 (CRC, LB)
    phaseB = 1;
    for (int k = 0; k < 300; k++) send(64, 3, 0, 0);
    repeat (600) @(posedge clk); #1;
    phaseB = 0;
    chk(phaseB_last - phaseB_first < 330, $sformatf("line-rate burst: 300 frames out in %0d cycles", phaseB_last - phaseB_first));

    // Phase C: MAC side stalled while frames keep coming -> the queues towards it overflow
    m_stall_drop = sum_drops();
    tx_mode = 2;
    for (int k = 0; k < 400; k++) send(rand_len(), $urandom % 4, 0, 0);
    repeat (200) @(posedge clk); #1;
    m_stall_drop = sum_drops() - m_stall_drop;
    tx_mode = 0;
    repeat (6000) @(posedge clk); #1;

    // Phase D: rewrite flow 3 to FW, NAT, ROUTER, CRC at run time, then send on it
    reconf_seq = mk_seq(TASK_FW, TASK_NAT, TASK_ROUTER, TASK_CRC, 0, 0, 0);
    cfg_write_flow(3, reconf_seq);
    repeat (4) @(posedge clk);
    #1;
    for (int k = 0; k < 300; k++)
      send(rand_len(), ($urandom % 2) ? 3 : $urandom % 4, (($urandom % 8) == 0) ? 1 : 0, $urandom % 30);
    repeat (8000) @(posedge clk);

    // ---------------- end-of-test accounting ----------------
    m_xdrop = sum_drops();
    m_fwdrop = int'(fw_drop_count);
    chk(bi == 0, "no packet left half-way");
    chk(n_recv + m_fwdrop + m_xdrop == n_sent,
        $sformatf("conservation: recv %0d + fw %0d + xbar %0d != sent %0d", n_recv, m_fwdrop, m_xdrop, n_sent));
    chk(m_fwdrop <= n_blocked_sent, "firewall drops only blocked frames");
    chk(int'(nat_xlate_count) >= m_nat, "NAT counter covers rewrites seen");
    m_crc_units = 0; m_aes_units = 0;
    for (int g = 0; g < CRC_UNITS; g++) begin
      chk(crc_err[g] == 0, $sformatf("CRC unit %0d saw interleaved packets", g));
      chk(int'(crc_unit_pkts[g]) == crc_pkts[g], $sformatf("CRC unit %0d count", g));
      if (crc_pkts[g] > 0) m_crc_units++;
    end
    for (int g = 0; g < AES_UNITS; g++) begin
      chk(aes_err[g] == 0, $sformatf("AES unit %0d saw interleaved packets", g));
      chk(int'(aes_unit_pkts[g]) == aes_pkts[g], $sformatf("AES unit %0d count", g));
      if (aes_pkts[g] > 0) m_aes_units++;
    end
    begin
      int lbp = 0;
      foreach (lb_port_seen[i]) lbp += int'(lb_port_seen[i]);
      $display("sent %0d received %0d  firewall drops %0d  crossbar drops %0d (during MAC stall %0d)",
               n_sent, n_recv, m_fwdrop, m_xdrop, m_stall_drop);
      $display("mechanisms: xbar_drop=%0d fw_drop=%0d nat_rewrite=%0d routed=%0d lb_ports=%0d crc_units=%0d aes_units=%0d",
               m_xdrop, m_fwdrop, m_nat, m_route, lbp, m_crc_units, m_aes_units);
      $display("mechanisms: flow_reconfig=%0d back_to_back=%0d multi_beat=%0d tx_backpressure=%0d burst_cycles=%0d",
               m_reconf, m_b2b, m_multi, m_tx_stall, phaseB_last - phaseB_first);
      chk(m_xdrop > 0 && m_stall_drop > 0, "mechanism: crossbar drop on full queue");
      chk(m_fwdrop > 0, "mechanism: firewall drop");
      chk(m_nat > 0, "mechanism: NAT rewrite");
      chk(m_route > 0, "mechanism: routed to a non-default port");
      chk(lbp == 4, "mechanism: load balancer used every port");
      chk(m_crc_units == CRC_UNITS, "mechanism: every CRC unit used");
      chk(m_aes_units == AES_UNITS, "mechanism: every AES unit used");
      chk(m_reconf > 0, "mechanism: run-time flow-table rewrite");
      chk(m_b2b > 0, "mechanism: back-to-back packets");
      chk(m_multi > 0, "mechanism: multi-beat packets");
      chk(m_tx_stall > 0, "mechanism: MAC-side backpressure");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
