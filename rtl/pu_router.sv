// pu_router: IPv4 router processing unit (512-bit, one beat per cycle).
//
// Selects the Ethernet port a packet leaves on from its IPv4 destination address by
// longest-prefix match over a routing table of ENTRIES (prefix, length, port) entries;
// a packet that matches no entry, or is not IPv4, gets DEFAULT_PORT. The chosen port is
// written into the metadata field eth_port of every beat of the packet; the data are not
// changed. The table is written at run time through cfg_*; reset clears it. Equal
// prefix lengths resolve to the lower-numbered entry.
//
// One register stage, latency one cycle. From the paper: port selection from the IP
// destination address. Own choices: LPM table form and size, and carrying the result in
// the metadata.
module pu_router
  import flexcross_pkg::*;
#(
  parameter int unsigned ENTRIES      = 8,
  parameter logic [1:0]  DEFAULT_PORT = 2'd0,
  localparam int unsigned EW          = (ENTRIES > 1) ? $clog2(ENTRIES) : 1
) (
  input  logic          clk,
  input  logic          rst,
  input  beat_t         s_beat,
  input  logic          s_valid,
  output logic          s_ready,
  output beat_t         m_beat,
  output logic          m_valid,
  input  logic          m_ready,
  input  logic          cfg_we,
  input  logic [EW-1:0] cfg_idx,
  input  logic          cfg_valid,
  input  logic [31:0]   cfg_prefix,
  input  logic [5:0]    cfg_len,      // prefix length 0..32
  input  logic [1:0]    cfg_port
);

  logic        tab_v [ENTRIES];
  logic [31:0] tab_p [ENTRIES];
  logic [5:0]  tab_l [ENTRIES];
  logic [1:0]  tab_o [ENTRIES];
  logic        in_pkt, hit;
  logic [5:0]  best_len;
  logic [1:0]  port_new, port_hold;
  logic [31:0] dst, mask;
  beat_t       out_beat;

  always_comb begin
    dst      = get_u32(s_beat.tdata, OFS_IP_DST);
    hit      = 1'b0;
    best_len = '0;
    port_new = DEFAULT_PORT;
    mask     = '0;
    if (get_u16(s_beat.tdata, OFS_ETYPE) == ETYPE_IPV4)
      for (int unsigned e = 0; e < ENTRIES; e++) begin
        mask = (tab_l[e] >= 6'd32) ? 32'hFFFF_FFFF : ~(32'hFFFF_FFFF >> tab_l[e]);
        if (tab_v[e] && ((dst & mask) == (tab_p[e] & mask)) && (!hit || tab_l[e] > best_len)) begin
          hit      = 1'b1;
          best_len = tab_l[e];
          port_new = tab_o[e];
        end
      end
    out_beat = s_beat;
    out_beat.tuser.eth_port = in_pkt ? port_hold : port_new;
  end

  assign s_ready = !m_valid || m_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      m_valid   <= 1'b0;
      in_pkt    <= 1'b0;
      port_hold <= DEFAULT_PORT;
      for (int unsigned e = 0; e < ENTRIES; e++) begin
        tab_v[e] <= 1'b0;
        tab_p[e] <= '0;
        tab_l[e] <= '0;
        tab_o[e] <= '0;
      end
    end else begin
      if (cfg_we) begin
        tab_v[cfg_idx] <= cfg_valid;
        tab_p[cfg_idx] <= cfg_prefix;
        tab_l[cfg_idx] <= cfg_len;
        tab_o[cfg_idx] <= cfg_port;
      end
      if (s_ready) m_valid <= s_valid;
      if (s_valid && s_ready) begin
        in_pkt <= !s_beat.tlast;
        if (!in_pkt) port_hold <= port_new;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (s_valid && s_ready) m_beat <= out_beat;
  end

endmodule
