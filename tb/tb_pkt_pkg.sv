// tb_pkt_pkg: helpers shared by the FlexCross testbenches.
//
// Builds Ethernet II / IPv4 / UDP frames as byte queues (header fields at the standard
// offsets, a 32-bit packet id at bytes 42..45 and a byte pattern derived from the id
// after it), cuts them into 512-bit beats, and computes the metadata the Parser is
// expected to produce. The testbenches use these to drive blocks and to check outputs
// without relying on the RTL's own helper functions.
package tb_pkt_pkg;
  import flexcross_pkg::*;

  typedef logic [7:0] bq_t [$];

  localparam logic [31:0] SRC_IP = 32'h0A00_0001;

  function automatic bq_t make_frame(input int len, input logic [15:0] sport, input logic [15:0] dport,
                                     input logic [31:0] dip, input logic [31:0] id, input logic [7:0] tos);
    bq_t f;
    for (int k = 0; k < len; k++) f.push_back(8'((id * 7 + k * 13) & 8'hFF));
    // Ethernet
    for (int k = 0; k < 6; k++) f[k] = 8'h02;
    for (int k = 6; k < 12; k++) f[k] = 8'h04;
    f[12] = 8'h08; f[13] = 8'h00;
    // IPv4
    f[14] = 8'h45; f[15] = tos;
    f[16] = 8'((len - 14) >> 8); f[17] = 8'(len - 14);
    f[18] = 0; f[19] = 0; f[20] = 0; f[21] = 0; f[22] = 8'd64; f[23] = 8'd17;
    f[24] = 0; f[25] = 0;
    f[26] = SRC_IP[31:24]; f[27] = SRC_IP[23:16]; f[28] = SRC_IP[15:8]; f[29] = SRC_IP[7:0];
    f[30] = dip[31:24]; f[31] = dip[23:16]; f[32] = dip[15:8]; f[33] = dip[7:0];
    // UDP
    f[34] = sport[15:8]; f[35] = sport[7:0]; f[36] = dport[15:8]; f[37] = dport[7:0];
    f[38] = 8'((len - 34) >> 8); f[39] = 8'(len - 34); f[40] = 0; f[41] = 0;
    // id
    f[42] = id[31:24]; f[43] = id[23:16]; f[44] = id[15:8]; f[45] = id[7:0];
    return f;
  endfunction

  function automatic int nbeats(input int len);
    return (len + 63) / 64;
  endfunction

  function automatic logic [DATA_W-1:0] beat_data(input bq_t f, input int k);
    logic [DATA_W-1:0] d;
    d = '0;
    for (int b = 0; b < 64; b++) if (k * 64 + b < f.size()) d[8*b +: 8] = f[k * 64 + b];
    return d;
  endfunction

  function automatic logic [KEEP_W-1:0] beat_keep(input bq_t f, input int k);
    logic [KEEP_W-1:0] m;
    m = '0;
    for (int b = 0; b < 64; b++) if (k * 64 + b < f.size()) m[b] = 1'b1;
    return m;
  endfunction

  function automatic beat_t frame_beat(input bq_t f, input int k, input meta_t m);
    beat_t b;
    b.tdata = beat_data(f, k);
    b.tkeep = beat_keep(f, k);
    b.tlast = (k == nbeats(f.size()) - 1);
    b.tuser = m;
    return b;
  endfunction

  function automatic logic [31:0] frame_id(input logic [DATA_W-1:0] first_beat);
    return {first_beat[8*42 +: 8], first_beat[8*43 +: 8], first_beat[8*44 +: 8], first_beat[8*45 +: 8]};
  endfunction

  function automatic task_seq_t mk_seq(input int a, input int b, input int c, input int d,
                                       input int e, input int f, input int g);
    task_seq_t s;
    s[0] = 3'(a); s[1] = 3'(b); s[2] = 3'(c); s[3] = 3'(d); s[4] = 3'(e); s[5] = 3'(f); s[6] = 3'(g);
    return s;
  endfunction

  // Metadata for a frame heading to crossbar target t (used when driving blocks directly).
  function automatic meta_t simple_meta(input int len, input int t);
    meta_t m;
    m = '0;
    m.pkt_len   = 16'(len);
    m.next_task = 3'(t);
    m.task_seq[0] = 3'(t);
    return m;
  endfunction

endpackage
