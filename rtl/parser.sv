// parser: packet Parser between the MAC and the crossbar.
//
// Inspects the first 64-byte beat of each Ethernet frame and builds the packet's metadata,
// which then travels with every beat of the packet in TUSER:
//   pkt_len    IPv4 total length (or IPv6 payload length + 40) + 14 bytes of Ethernet
//              header; frames that are not IP get the Ethernet maximum of 1518 bytes,
//   prio       priority class, bits 7:5 of the IPv4 TOS / IPv6 traffic class byte,
//   flow_type  TCP/UDP destination port modulo NUM_FLOWS (0 for other protocols),
//   task_seq   the task sequence the flow table maps the flow type to,
//   step/next_task  0 / the first task of that sequence,
//   timestamp  a free-running cycle counter sampled at the first beat.
// The flow table can be rewritten at run time through the cfg_* port (one entry per
// cycle); it resets to the four task sequences used in the paper's first evaluation
// scenario (flow 0..3 = the paper's flows 1..4):
//   0: CRC > firewall > AES > load balancer > NAT     1: firewall > NAT > AES > router
//   2: CRC > AES > router                             3: CRC > load balancer
//
// One register stage, one beat per cycle, latency one cycle. The parser assumes options-
// less IPv4 headers (IHL = 5); the choice of header fields, the modulo flow mapping (used
// in the paper's FPGA test) and all widths are this implementation's.
module parser
  import flexcross_pkg::*;
#(
  parameter int unsigned NUM_FLOWS = 4,
  localparam int unsigned FLW      = (NUM_FLOWS > 1) ? $clog2(NUM_FLOWS) : 1
) (
  input  logic              clk,
  input  logic              rst,
  // from the MAC
  input  logic [DATA_W-1:0] s_tdata,
  input  logic [KEEP_W-1:0] s_tkeep,
  input  logic              s_tlast,
  input  logic              s_tvalid,
  output logic              s_tready,
  // to the crossbar
  output beat_t             m_beat,
  output logic              m_valid,
  input  logic              m_ready,
  // run-time flow table configuration
  input  logic              cfg_we,
  input  logic [FLW-1:0]    cfg_flow,
  input  task_seq_t         cfg_seq
);

  task_seq_t   flow_tab [NUM_FLOWS];
  logic [31:0] now;
  logic        in_pkt;
  meta_t       meta_hold, meta_new;

  // Reset contents of the flow table: the paper's four task sequences.
  function automatic task_seq_t default_seq(input int unsigned f);
    task_seq_t s;
    s = '{default: TASK_EXIT};
    case (f % 4)
      0: begin s[0] = TASK_CRC; s[1] = TASK_FW; s[2] = TASK_AES; s[3] = TASK_LB; s[4] = TASK_NAT; end
      1: begin s[0] = TASK_FW; s[1] = TASK_NAT; s[2] = TASK_AES; s[3] = TASK_ROUTER; end
      2: begin s[0] = TASK_CRC; s[1] = TASK_AES; s[2] = TASK_ROUTER; end
      default: begin s[0] = TASK_CRC; s[1] = TASK_LB; end
    endcase
    return s;
  endfunction

  always_comb begin
    logic [15:0] etype, l4dst;
    logic [7:0]  tos, proto;
    logic [FLW-1:0] flow;
    etype    = get_u16(s_tdata, OFS_ETYPE);
    meta_new = '0;
    l4dst    = '0;
    tos      = '0;
    proto    = '0;
    if (etype == ETYPE_IPV4) begin
      meta_new.pkt_len = get_u16(s_tdata, OFS_IP_LEN) + 16'(ETH_HDR);
      tos   = get_byte(s_tdata, OFS_IP + 1);
      proto = get_byte(s_tdata, OFS_IP_PROT);
      if (proto == PROTO_TCP || proto == PROTO_UDP) l4dst = get_u16(s_tdata, OFS_L4_DST);
    end else if (etype == ETYPE_IPV6) begin
      meta_new.pkt_len = get_u16(s_tdata, OFS_IP6_PLEN) + 16'(ETH_HDR + 40);
      tos   = {get_byte(s_tdata, OFS_IP)[3:0], get_byte(s_tdata, OFS_IP + 1)[7:4]};
      proto = get_byte(s_tdata, OFS_IP6_NH);
      if (proto == PROTO_TCP || proto == PROTO_UDP) l4dst = get_u16(s_tdata, OFS_L4_DST6);
    end else begin
      meta_new.pkt_len = 16'd1518;
    end
    flow                = FLW'(32'(l4dst) % NUM_FLOWS);
    meta_new.flow_type  = 4'(flow);
    meta_new.prio       = tos[7:5];
    meta_new.task_seq   = flow_tab[flow];
    meta_new.step       = '0;
    meta_new.next_task  = flow_tab[flow][0];
    meta_new.timestamp  = now;
  end

  assign s_tready = !m_valid || m_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      m_valid <= 1'b0;
      in_pkt  <= 1'b0;
      now     <= '0;
      for (int unsigned f = 0; f < NUM_FLOWS; f++) flow_tab[f] <= default_seq(f);
    end else begin
      now <= now + 1'b1;
      if (cfg_we) flow_tab[cfg_flow] <= cfg_seq;
      if (s_tready) m_valid <= s_tvalid;
      if (s_tvalid && s_tready) in_pkt <= !s_tlast;
    end
  end

  always_ff @(posedge clk) begin
    if (s_tvalid && s_tready) begin
      m_beat.tdata <= s_tdata;
      m_beat.tkeep <= s_tkeep;
      m_beat.tlast <= s_tlast;
      m_beat.tuser <= in_pkt ? meta_hold : meta_new;
      if (!in_pkt) meta_hold <= meta_new;
    end
  end

endmodule
