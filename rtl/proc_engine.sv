// proc_engine: Processing Engine shell around NUM_UNITS parallel processing units.
//
// A packet from the crossbar output is steered by the load balancer to the least-loaded
// unit's ingress queue (IQ_DEPTH beats of 512 bits). If the unit is narrower than the
// 512-bit data path (UNIT_W < 512) a down-converter feeds it UNIT_W-bit beats and an
// up-converter packs its results back; enough units are instantiated to keep line rate
// (two 256-bit CRC units, four 128-bit AES units). A round-robin arbiter merges the
// units' finished packets, and on the way out the metadata is advanced to the next
// required task of the packet's sequence (step + 1, next_task = task_seq[step + 1]), which
// is the crossbar target of the packet's next hop. An output register closes the engine.
//
// The units themselves sit outside this module, on the u_tx_* (engine to unit) and
// u_rx_* (unit to engine) streams, so the same shell serves every unit type. All streams
// are AXI4-Stream with TUSER = metadata. With more than one unit, each unit's results
// first collect in an egress queue of EQ_DEPTH beats (at least one maximum-size packet,
// 24 beats), and the arbiter only grants a unit holding a complete packet; this is what
// lets four 128-bit units share the 512-bit output at line rate. Latency through the shell, unit excluded, is
// 3 cycles for 512-bit units (queue write, queue output register, output register), plus
// one cycle in each converter for narrow units.
//
// From the paper: load balancer at the ingress, round-robin arbiter at the egress, update
// of "next required task" before the packet leaves, and the unit counts. Own choices: the
// queue depths, the width converters' form, and the whole-packet egress queues (the
// paper's arbiter serves units that "have finished processing their packets").
module proc_engine
  import flexcross_pkg::*;
#(
  parameter int unsigned NUM_UNITS = 1,
  parameter int unsigned UNIT_W    = DATA_W,
  parameter int unsigned IQ_DEPTH  = 32,
  parameter int unsigned EQ_DEPTH  = 32,
  localparam int unsigned FW       = $clog2(IQ_DEPTH + 2),
  localparam int unsigned EFW      = $clog2(EQ_DEPTH + 2)
) (
  input  logic                clk,
  input  logic                rst,
  // from the crossbar
  input  beat_t               s_beat,
  input  logic                s_valid,
  output logic                s_ready,
  // to the crossbar
  output beat_t               m_beat,
  output logic                m_valid,
  input  logic                m_ready,
  // to the processing units
  output logic [UNIT_W-1:0]   u_tx_tdata  [NUM_UNITS],
  output logic [UNIT_W/8-1:0] u_tx_tkeep  [NUM_UNITS],
  output logic                u_tx_tlast  [NUM_UNITS],
  output meta_t               u_tx_tuser  [NUM_UNITS],
  output logic                u_tx_tvalid [NUM_UNITS],
  input  logic                u_tx_tready [NUM_UNITS],
  // from the processing units
  input  logic [UNIT_W-1:0]   u_rx_tdata  [NUM_UNITS],
  input  logic [UNIT_W/8-1:0] u_rx_tkeep  [NUM_UNITS],
  input  logic                u_rx_tlast  [NUM_UNITS],
  input  meta_t               u_rx_tuser  [NUM_UNITS],
  input  logic                u_rx_tvalid [NUM_UNITS],
  output logic                u_rx_tready [NUM_UNITS],
  // packets steered to each unit
  output logic [31:0]         unit_pkts   [NUM_UNITS]
);

  beat_t         lb_beat;
  logic          lb_valid [NUM_UNITS], lb_ready [NUM_UNITS];
  logic [FW-1:0] iq_fill  [NUM_UNITS];
  beat_t         iq_beat  [NUM_UNITS];
  logic          iq_valid [NUM_UNITS], iq_ready [NUM_UNITS];
  beat_t         eg_beat  [NUM_UNITS];
  logic          eg_valid [NUM_UNITS], eg_ready [NUM_UNITS];
  beat_t         ar_beat  [NUM_UNITS];
  logic          ar_valid [NUM_UNITS], ar_ready [NUM_UNITS];
  beat_t         arb_beat, upd_beat;
  logic          arb_valid, arb_ready;

  pe_load_balancer #(.NUM_UNITS(NUM_UNITS), .FW(FW)) u_lb (
    .clk, .rst,
    .s_beat, .s_valid, .s_ready,
    .m_beat(lb_beat), .m_valid(lb_valid), .m_ready(lb_ready),
    .fill(iq_fill), .unit_pkts
  );

  for (genvar u = 0; u < NUM_UNITS; u++) begin : g_unit
    axis_fifo #(.WIDTH(BEAT_W), .DEPTH(IQ_DEPTH)) u_iq (
      .clk, .rst,
      .s_data(lb_beat), .s_valid(lb_valid[u]), .s_ready(lb_ready[u]),
      .m_data(iq_beat[u]), .m_valid(iq_valid[u]), .m_ready(iq_ready[u]),
      .fill(iq_fill[u])
    );

    if (UNIT_W == DATA_W) begin : g_full
      assign u_tx_tdata[u]  = iq_beat[u].tdata;
      assign u_tx_tkeep[u]  = iq_beat[u].tkeep;
      assign u_tx_tlast[u]  = iq_beat[u].tlast;
      assign u_tx_tuser[u]  = iq_beat[u].tuser;
      assign u_tx_tvalid[u] = iq_valid[u];
      assign iq_ready[u]    = u_tx_tready[u];

      assign eg_beat[u].tdata = u_rx_tdata[u];
      assign eg_beat[u].tkeep = u_rx_tkeep[u];
      assign eg_beat[u].tlast = u_rx_tlast[u];
      assign eg_beat[u].tuser = u_rx_tuser[u];
      assign eg_valid[u]      = u_rx_tvalid[u];
      assign u_rx_tready[u]   = eg_ready[u];
    end else begin : g_narrow
      axis_downsize #(.OUT_W(UNIT_W)) u_down (
        .clk, .rst,
        .s_beat(iq_beat[u]), .s_valid(iq_valid[u]), .s_ready(iq_ready[u]),
        .m_tdata(u_tx_tdata[u]), .m_tkeep(u_tx_tkeep[u]), .m_tlast(u_tx_tlast[u]),
        .m_tuser(u_tx_tuser[u]), .m_valid(u_tx_tvalid[u]), .m_ready(u_tx_tready[u])
      );
      axis_upsize #(.IN_W(UNIT_W)) u_up (
        .clk, .rst,
        .s_tdata(u_rx_tdata[u]), .s_tkeep(u_rx_tkeep[u]), .s_tlast(u_rx_tlast[u]),
        .s_tuser(u_rx_tuser[u]), .s_valid(u_rx_tvalid[u]), .s_ready(u_rx_tready[u]),
        .m_beat(eg_beat[u]), .m_valid(eg_valid[u]), .m_ready(eg_ready[u])
      );
    end

    // Egress: with several units, each unit's results collect in an egress queue and the
    // arbiter only sees a unit once a whole packet is there, so a slow (narrow) unit never
    // holds the engine output while its packet trickles in.
    if (NUM_UNITS > 1) begin : g_eq
      beat_t         q_beat;
      logic          q_valid, q_ready;
      logic [EFW-1:0] q_fill;
      logic [EFW-1:0] pkts;
      logic          pkt_in, pkt_out;

      axis_fifo #(.WIDTH(BEAT_W), .DEPTH(EQ_DEPTH)) u_eq (
        .clk, .rst,
        .s_data(eg_beat[u]), .s_valid(eg_valid[u]), .s_ready(eg_ready[u]),
        .m_data(q_beat), .m_valid(q_valid), .m_ready(q_ready),
        .fill(q_fill)
      );

      assign pkt_in      = eg_valid[u] && eg_ready[u] && eg_beat[u].tlast;
      assign pkt_out     = q_valid && q_ready && q_beat.tlast;
      assign ar_beat[u]  = q_beat;
      assign ar_valid[u] = q_valid && (pkts != '0);
      assign q_ready     = ar_ready[u] && (pkts != '0);

      always_ff @(posedge clk) begin
        if (rst) pkts <= '0;
        else     pkts <= pkts + EFW'(pkt_in) - EFW'(pkt_out);
      end
    end else begin : g_direct
      assign ar_beat[u]  = eg_beat[u];
      assign ar_valid[u] = eg_valid[u];
      assign eg_ready[u] = ar_ready[u];
    end
  end

  pe_arbiter #(.NUM_UNITS(NUM_UNITS)) u_arb (
    .clk, .rst,
    .s_beat(ar_beat), .s_valid(ar_valid), .s_ready(ar_ready),
    .m_beat(arb_beat), .m_valid(arb_valid), .m_ready(arb_ready)
  );

  always_comb begin
    upd_beat       = arb_beat;
    upd_beat.tuser = advance_task(arb_beat.tuser);
  end

  axis_reg #(.WIDTH(BEAT_W)) u_out_reg (
    .clk, .rst,
    .s_data(upd_beat), .s_valid(arb_valid), .s_ready(arb_ready),
    .m_data(m_beat), .m_valid(m_valid), .m_ready(m_ready)
  );

endmodule
