// flexcross_top: FlexCross packet-processing core.
//
// Frames from the MAC enter the Parser, which attaches the metadata (size, flow type,
// priority, task sequence, next task, timestamp). The 7x7 crosspoint-queued crossbar then
// carries each packet from engine to engine in the order of its task sequence, and
// finally to crossbar output 0, the MAC / DMA side (tx_*). Six Processing Engines hang
// on crossbar ports 1..6:
//   1 CRC check      2 x 256-bit units (external, crc_* ports)
//   2 firewall       1 x 512-bit unit  (pu_firewall)
//   3 NAT            1 x 512-bit unit  (pu_nat)
//   4 AES en/decrypt 4 x 128-bit units (external, aes_* ports)
//   5 IPv4 router    1 x 512-bit unit  (pu_router)
//   6 load balancer  1 x 512-bit unit  (pu_lb)
// The CRC and AES units are third-party cores and are not part of this RTL: their
// engines' unit-side streams are brought out as ports, and whatever is attached there
// must take and return AXI4-Stream beats of the unit width with TUSER passed through.
//
// Data path 512 bits at one beat per cycle (102.4 Gbit/s at 200 MHz). A packet that
// finds no room in the crosspoint queue towards its next engine is dropped by the
// crossbar, never backpressured; xbar_drop_count counts these per crossbar input.
// Tables (flow table, firewall block list, NAT table, routing table) are written at run
// time through the cfg_* ports. Reset: synchronous, active high.
module flexcross_top
  import flexcross_pkg::*;
#(
  parameter int unsigned QDEPTH    = 128,       // crosspoint queue, beats (8 KB)
  parameter sched_e      SCHED     = SCHED_RR,
  parameter int unsigned IQ_DEPTH  = 32,        // engine ingress queue per unit, beats
  parameter int unsigned NUM_FLOWS = 4,
  parameter int unsigned CRC_UNITS = 2,
  parameter int unsigned CRC_W     = 256,
  parameter int unsigned AES_UNITS = 4,
  parameter int unsigned AES_W     = 128,
  parameter int unsigned TAB_ENTRIES = 8,
  localparam int unsigned FLW      = (NUM_FLOWS > 1) ? $clog2(NUM_FLOWS) : 1,
  localparam int unsigned EW       = (TAB_ENTRIES > 1) ? $clog2(TAB_ENTRIES) : 1
) (
  input  logic               clk,
  input  logic               rst,
  // receive stream from the MAC
  input  logic [DATA_W-1:0]  rx_tdata,
  input  logic [KEEP_W-1:0]  rx_tkeep,
  input  logic               rx_tlast,
  input  logic               rx_tvalid,
  output logic               rx_tready,
  // transmit stream to the MAC / DMA engine
  output logic [DATA_W-1:0]  tx_tdata,
  output logic [KEEP_W-1:0]  tx_tkeep,
  output logic               tx_tlast,
  output meta_t              tx_tuser,
  output logic               tx_tvalid,
  input  logic               tx_tready,
  // run-time configuration
  input  logic               cfg_flow_we,
  input  logic [FLW-1:0]     cfg_flow,
  input  task_seq_t          cfg_flow_seq,
  input  logic               cfg_fw_we,
  input  logic [EW-1:0]      cfg_fw_idx,
  input  logic               cfg_fw_valid,
  input  logic [15:0]        cfg_fw_port,
  input  logic               cfg_nat_we,
  input  logic [EW-1:0]      cfg_nat_idx,
  input  logic               cfg_nat_valid,
  input  logic [31:0]        cfg_nat_match,
  input  logic [31:0]        cfg_nat_xlate,
  input  logic               cfg_rt_we,
  input  logic [EW-1:0]      cfg_rt_idx,
  input  logic               cfg_rt_valid,
  input  logic [31:0]        cfg_rt_prefix,
  input  logic [5:0]         cfg_rt_len,
  input  logic [1:0]         cfg_rt_port,
  // external CRC units
  output logic [CRC_W-1:0]   crc_tx_tdata  [CRC_UNITS],
  output logic [CRC_W/8-1:0] crc_tx_tkeep  [CRC_UNITS],
  output logic               crc_tx_tlast  [CRC_UNITS],
  output meta_t              crc_tx_tuser  [CRC_UNITS],
  output logic               crc_tx_tvalid [CRC_UNITS],
  input  logic               crc_tx_tready [CRC_UNITS],
  input  logic [CRC_W-1:0]   crc_rx_tdata  [CRC_UNITS],
  input  logic [CRC_W/8-1:0] crc_rx_tkeep  [CRC_UNITS],
  input  logic               crc_rx_tlast  [CRC_UNITS],
  input  meta_t              crc_rx_tuser  [CRC_UNITS],
  input  logic               crc_rx_tvalid [CRC_UNITS],
  output logic               crc_rx_tready [CRC_UNITS],
  // external AES units
  output logic [AES_W-1:0]   aes_tx_tdata  [AES_UNITS],
  output logic [AES_W/8-1:0] aes_tx_tkeep  [AES_UNITS],
  output logic               aes_tx_tlast  [AES_UNITS],
  output meta_t              aes_tx_tuser  [AES_UNITS],
  output logic               aes_tx_tvalid [AES_UNITS],
  input  logic               aes_tx_tready [AES_UNITS],
  input  logic [AES_W-1:0]   aes_rx_tdata  [AES_UNITS],
  input  logic [AES_W/8-1:0] aes_rx_tkeep  [AES_UNITS],
  input  logic               aes_rx_tlast  [AES_UNITS],
  input  meta_t              aes_rx_tuser  [AES_UNITS],
  input  logic               aes_rx_tvalid [AES_UNITS],
  output logic               aes_rx_tready [AES_UNITS],
  // statistics
  output logic [31:0]        xbar_fwd_count  [N_PORTS],
  output logic [31:0]        xbar_drop_count [N_PORTS],
  output logic [31:0]        fw_drop_count,
  output logic [31:0]        nat_xlate_count,
  output logic [31:0]        crc_unit_pkts [CRC_UNITS],
  output logic [31:0]        aes_unit_pkts [AES_UNITS]
);

  // Crossbar ports: [0] Parser -> / -> MAC-DMA, [k] engine k.
  beat_t x_s_beat [N_PORTS];
  logic  x_s_valid [N_PORTS], x_s_ready [N_PORTS];
  beat_t x_m_beat [N_PORTS];
  logic  x_m_valid [N_PORTS], x_m_ready [N_PORTS];

  parser #(.NUM_FLOWS(NUM_FLOWS)) u_parser (
    .clk, .rst,
    .s_tdata(rx_tdata), .s_tkeep(rx_tkeep), .s_tlast(rx_tlast),
    .s_tvalid(rx_tvalid), .s_tready(rx_tready),
    .m_beat(x_s_beat[0]), .m_valid(x_s_valid[0]), .m_ready(x_s_ready[0]),
    .cfg_we(cfg_flow_we), .cfg_flow(cfg_flow), .cfg_seq(cfg_flow_seq)
  );

  xbar #(.N(N_PORTS), .QDEPTH(QDEPTH), .SCHED(SCHED)) u_xbar (
    .clk, .rst,
    .s_beat(x_s_beat), .s_valid(x_s_valid), .s_ready(x_s_ready),
    .m_beat(x_m_beat), .m_valid(x_m_valid), .m_ready(x_m_ready),
    .fwd_count(xbar_fwd_count), .drop_count(xbar_drop_count)
  );

  assign tx_tdata     = x_m_beat[0].tdata;
  assign tx_tkeep     = x_m_beat[0].tkeep;
  assign tx_tlast     = x_m_beat[0].tlast;
  assign tx_tuser     = x_m_beat[0].tuser;
  assign tx_tvalid    = x_m_valid[0];
  assign x_m_ready[0] = tx_tready;

  // ---- Engine 1: CRC (external units) ----
  proc_engine #(.NUM_UNITS(CRC_UNITS), .UNIT_W(CRC_W), .IQ_DEPTH(IQ_DEPTH)) u_pe_crc (
    .clk, .rst,
    .s_beat(x_m_beat[TASK_CRC]), .s_valid(x_m_valid[TASK_CRC]), .s_ready(x_m_ready[TASK_CRC]),
    .m_beat(x_s_beat[TASK_CRC]), .m_valid(x_s_valid[TASK_CRC]), .m_ready(x_s_ready[TASK_CRC]),
    .u_tx_tdata(crc_tx_tdata), .u_tx_tkeep(crc_tx_tkeep), .u_tx_tlast(crc_tx_tlast),
    .u_tx_tuser(crc_tx_tuser), .u_tx_tvalid(crc_tx_tvalid), .u_tx_tready(crc_tx_tready),
    .u_rx_tdata(crc_rx_tdata), .u_rx_tkeep(crc_rx_tkeep), .u_rx_tlast(crc_rx_tlast),
    .u_rx_tuser(crc_rx_tuser), .u_rx_tvalid(crc_rx_tvalid), .u_rx_tready(crc_rx_tready),
    .unit_pkts(crc_unit_pkts)
  );

  // ---- Engine 4: AES (external units) ----
  proc_engine #(.NUM_UNITS(AES_UNITS), .UNIT_W(AES_W), .IQ_DEPTH(IQ_DEPTH)) u_pe_aes (
    .clk, .rst,
    .s_beat(x_m_beat[TASK_AES]), .s_valid(x_m_valid[TASK_AES]), .s_ready(x_m_ready[TASK_AES]),
    .m_beat(x_s_beat[TASK_AES]), .m_valid(x_s_valid[TASK_AES]), .m_ready(x_s_ready[TASK_AES]),
    .u_tx_tdata(aes_tx_tdata), .u_tx_tkeep(aes_tx_tkeep), .u_tx_tlast(aes_tx_tlast),
    .u_tx_tuser(aes_tx_tuser), .u_tx_tvalid(aes_tx_tvalid), .u_tx_tready(aes_tx_tready),
    .u_rx_tdata(aes_rx_tdata), .u_rx_tkeep(aes_rx_tkeep), .u_rx_tlast(aes_rx_tlast),
    .u_rx_tuser(aes_rx_tuser), .u_rx_tvalid(aes_rx_tvalid), .u_rx_tready(aes_rx_tready),
    .unit_pkts(aes_unit_pkts)
  );

  // ---- Engines 2, 3, 5, 6: one 512-bit unit each, built here ----
  localparam int unsigned NI = 4;
  localparam port_t IPORT [NI] = '{TASK_FW, TASK_NAT, TASK_ROUTER, TASK_LB};

  logic [DATA_W-1:0] i_tx_tdata  [NI][1];
  logic [KEEP_W-1:0] i_tx_tkeep  [NI][1];
  logic              i_tx_tlast  [NI][1];
  meta_t             i_tx_tuser  [NI][1];
  logic              i_tx_tvalid [NI][1];
  logic              i_tx_tready [NI][1];
  logic [DATA_W-1:0] i_rx_tdata  [NI][1];
  logic [KEEP_W-1:0] i_rx_tkeep  [NI][1];
  logic              i_rx_tlast  [NI][1];
  meta_t             i_rx_tuser  [NI][1];
  logic              i_rx_tvalid [NI][1];
  logic              i_rx_tready [NI][1];
  logic [31:0]       i_unit_pkts [NI][1];
  beat_t             u_in  [NI];
  beat_t             u_out [NI];

  for (genvar e = 0; e < NI; e++) begin : g_int
    proc_engine #(.NUM_UNITS(1), .UNIT_W(DATA_W), .IQ_DEPTH(IQ_DEPTH)) u_pe (
      .clk, .rst,
      .s_beat(x_m_beat[IPORT[e]]), .s_valid(x_m_valid[IPORT[e]]), .s_ready(x_m_ready[IPORT[e]]),
      .m_beat(x_s_beat[IPORT[e]]), .m_valid(x_s_valid[IPORT[e]]), .m_ready(x_s_ready[IPORT[e]]),
      .u_tx_tdata(i_tx_tdata[e]), .u_tx_tkeep(i_tx_tkeep[e]), .u_tx_tlast(i_tx_tlast[e]),
      .u_tx_tuser(i_tx_tuser[e]), .u_tx_tvalid(i_tx_tvalid[e]), .u_tx_tready(i_tx_tready[e]),
      .u_rx_tdata(i_rx_tdata[e]), .u_rx_tkeep(i_rx_tkeep[e]), .u_rx_tlast(i_rx_tlast[e]),
      .u_rx_tuser(i_rx_tuser[e]), .u_rx_tvalid(i_rx_tvalid[e]), .u_rx_tready(i_rx_tready[e]),
      .unit_pkts(i_unit_pkts[e])
    );
    assign u_in[e] = '{tdata: i_tx_tdata[e][0], tkeep: i_tx_tkeep[e][0],
                       tlast: i_tx_tlast[e][0], tuser: i_tx_tuser[e][0]};
    assign i_rx_tdata[e][0] = u_out[e].tdata;
    assign i_rx_tkeep[e][0] = u_out[e].tkeep;
    assign i_rx_tlast[e][0] = u_out[e].tlast;
    assign i_rx_tuser[e][0] = u_out[e].tuser;
  end

  pu_firewall #(.ENTRIES(TAB_ENTRIES)) u_fw (
    .clk, .rst,
    .s_beat(u_in[0]), .s_valid(i_tx_tvalid[0][0]), .s_ready(i_tx_tready[0][0]),
    .m_beat(u_out[0]), .m_valid(i_rx_tvalid[0][0]), .m_ready(i_rx_tready[0][0]),
    .cfg_we(cfg_fw_we), .cfg_idx(cfg_fw_idx), .cfg_valid(cfg_fw_valid), .cfg_port(cfg_fw_port),
    .drop_count(fw_drop_count)
  );

  pu_nat #(.ENTRIES(TAB_ENTRIES)) u_nat (
    .clk, .rst,
    .s_beat(u_in[1]), .s_valid(i_tx_tvalid[1][0]), .s_ready(i_tx_tready[1][0]),
    .m_beat(u_out[1]), .m_valid(i_rx_tvalid[1][0]), .m_ready(i_rx_tready[1][0]),
    .cfg_we(cfg_nat_we), .cfg_idx(cfg_nat_idx), .cfg_valid(cfg_nat_valid),
    .cfg_match(cfg_nat_match), .cfg_xlate(cfg_nat_xlate),
    .xlate_count(nat_xlate_count)
  );

  pu_router #(.ENTRIES(TAB_ENTRIES)) u_router (
    .clk, .rst,
    .s_beat(u_in[2]), .s_valid(i_tx_tvalid[2][0]), .s_ready(i_tx_tready[2][0]),
    .m_beat(u_out[2]), .m_valid(i_rx_tvalid[2][0]), .m_ready(i_rx_tready[2][0]),
    .cfg_we(cfg_rt_we), .cfg_idx(cfg_rt_idx), .cfg_valid(cfg_rt_valid),
    .cfg_prefix(cfg_rt_prefix), .cfg_len(cfg_rt_len), .cfg_port(cfg_rt_port)
  );

  pu_lb u_lbu (
    .clk, .rst,
    .s_beat(u_in[3]), .s_valid(i_tx_tvalid[3][0]), .s_ready(i_tx_tready[3][0]),
    .m_beat(u_out[3]), .m_valid(i_rx_tvalid[3][0]), .m_ready(i_rx_tready[3][0])
  );

endmodule
