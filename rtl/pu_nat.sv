// pu_nat: network address translation processing unit (512-bit, one beat per cycle).
//
// Rewrites the IPv4 destination address of a packet (bytes 30..33 of the frame, in the
// first beat) when it matches the original address of a valid entry of the translation
// table; the entry's translated address replaces it. Later beats and non-matching or
// non-IPv4 packets pass unchanged. The table (ENTRIES pairs) is written at run time
// through cfg_*; reset clears it. If several entries match, the lowest-numbered wins.
//
// One register stage, latency one cycle. From the paper: destination-address rewrite
// from a translation table. Own choices: exact-match table of 8 entries, and the IPv4
// header checksum is left as it is (the paper does not mention it).
module pu_nat
  import flexcross_pkg::*;
#(
  parameter int unsigned ENTRIES = 8,
  localparam int unsigned EW     = (ENTRIES > 1) ? $clog2(ENTRIES) : 1
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
  input  logic [31:0]   cfg_match,
  input  logic [31:0]   cfg_xlate,
  output logic [31:0]   xlate_count
);

  logic        tab_v [ENTRIES];
  logic [31:0] tab_m [ENTRIES], tab_x [ENTRIES];
  logic        in_pkt, hit;
  logic [31:0] new_ip;
  beat_t       out_beat;

  always_comb begin
    hit    = 1'b0;
    new_ip = '0;
    if (get_u16(s_beat.tdata, OFS_ETYPE) == ETYPE_IPV4)
      for (int e = int'(ENTRIES) - 1; e >= 0; e--)
        if (tab_v[e] && tab_m[e] == get_u32(s_beat.tdata, OFS_IP_DST)) begin
          hit    = 1'b1;
          new_ip = tab_x[e];
        end
    out_beat = s_beat;
    if (!in_pkt && hit) out_beat.tdata = put_u32(s_beat.tdata, OFS_IP_DST, new_ip);
  end

  assign s_ready = !m_valid || m_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      m_valid     <= 1'b0;
      in_pkt      <= 1'b0;
      xlate_count <= '0;
      for (int unsigned e = 0; e < ENTRIES; e++) begin
        tab_v[e] <= 1'b0;
        tab_m[e] <= '0;
        tab_x[e] <= '0;
      end
    end else begin
      if (cfg_we) begin
        tab_v[cfg_idx] <= cfg_valid;
        tab_m[cfg_idx] <= cfg_match;
        tab_x[cfg_idx] <= cfg_xlate;
      end
      if (s_ready) m_valid <= s_valid;
      if (s_valid && s_ready) begin
        in_pkt <= !s_beat.tlast;
        if (!in_pkt && hit) xlate_count <= xlate_count + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (s_valid && s_ready) m_beat <= out_beat;
  end

endmodule
