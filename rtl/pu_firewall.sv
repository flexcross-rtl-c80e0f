// pu_firewall: firewall processing unit (512-bit, one beat per cycle).
//
// Decides per packet whether it is forwarded or dropped, from the TCP/UDP source port of
// its first beat: a packet whose source port matches a valid entry of the block list is
// discarded completely (all its beats are consumed, none is sent on). Other packets,
// including non-IPv4 ones, pass unchanged. The block list has ENTRIES entries written at
// run time through cfg_*; reset clears it (everything passes).
//
// One register stage, latency one cycle. From the paper: the drop decision on the source
// port. The table form, its size and the IPv4-without-options header layout are this
// implementation's choices.
module pu_firewall
  import flexcross_pkg::*;
#(
  parameter int unsigned ENTRIES = 8,
  localparam int unsigned EW     = (ENTRIES > 1) ? $clog2(ENTRIES) : 1
) (
  input  logic        clk,
  input  logic        rst,
  input  beat_t       s_beat,
  input  logic        s_valid,
  output logic        s_ready,
  output beat_t       m_beat,
  output logic        m_valid,
  input  logic        m_ready,
  input  logic        cfg_we,
  input  logic [EW-1:0] cfg_idx,
  input  logic        cfg_valid,
  input  logic [15:0] cfg_port,
  output logic [31:0] drop_count
);

  logic        tab_v [ENTRIES];
  logic [15:0] tab_p [ENTRIES];
  logic        in_pkt, drop_hold, hit, drop_now;
  logic [7:0]  proto;

  always_comb begin
    proto = get_byte(s_beat.tdata, OFS_IP_PROT);
    hit   = 1'b0;
    if (get_u16(s_beat.tdata, OFS_ETYPE) == ETYPE_IPV4 && (proto == PROTO_TCP || proto == PROTO_UDP))
      for (int unsigned e = 0; e < ENTRIES; e++)
        if (tab_v[e] && tab_p[e] == get_u16(s_beat.tdata, OFS_L4_SRC)) hit = 1'b1;
  end

  assign drop_now = in_pkt ? drop_hold : hit;
  assign s_ready  = !m_valid || m_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      m_valid    <= 1'b0;
      in_pkt     <= 1'b0;
      drop_hold  <= 1'b0;
      drop_count <= '0;
      for (int unsigned e = 0; e < ENTRIES; e++) begin
        tab_v[e] <= 1'b0;
        tab_p[e] <= '0;
      end
    end else begin
      if (cfg_we) begin
        tab_v[cfg_idx] <= cfg_valid;
        tab_p[cfg_idx] <= cfg_port;
      end
      if (s_ready) m_valid <= s_valid && !drop_now;
      if (s_valid && s_ready) begin
        in_pkt <= !s_beat.tlast;
        if (!in_pkt) begin
          drop_hold <= hit;
          if (hit) drop_count <= drop_count + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (s_valid && s_ready) m_beat <= s_beat;
  end

endmodule
