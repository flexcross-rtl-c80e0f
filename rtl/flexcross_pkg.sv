// flexcross_pkg: types and constants shared by every FlexCross module.
//
// The design moves packets as AXI4-Stream beats of 512 data bits (64 bytes) at one beat
// per clock. Each beat carries the packet's metadata as TUSER sideband, so the metadata
// never costs data-path bandwidth. The metadata fields (packet size, flow type, priority
// class, task sequence, next required task, timestamp) are the ones the architecture
// names; their widths, their order and the extra egress-port field written by the IPv4
// router and the load balancer are this implementation's own choices.
//
// Crossbar port numbering (also the task encoding): port 0 is the Parser on the input
// side and the MAC/DMA on the output side; ports 1..6 are the six Processing Engines
// (1 CRC, 2 firewall, 3 NAT, 4 AES, 5 IPv4 router, 6 load balancer). A task sequence is
// a list of up to MAX_HOPS port numbers; the first entry equal to 0 ends it and sends the
// packet to the MAC/DMA.
package flexcross_pkg;

  localparam int DATA_W   = 512;          // data path width in bits
  localparam int KEEP_W   = DATA_W / 8;   // byte enables
  localparam int N_PORTS  = 7;            // 7x7 crossbar
  localparam int PORT_W   = 3;            // bits of a crossbar port / task id
  localparam int MAX_HOPS = 7;            // task-sequence slots: six engines + the exit

  // Task identifiers = crossbar port numbers.
  typedef enum logic [PORT_W-1:0] {
    TASK_EXIT   = 3'd0,   // MAC / DMA
    TASK_CRC    = 3'd1,
    TASK_FW     = 3'd2,
    TASK_NAT    = 3'd3,
    TASK_AES    = 3'd4,
    TASK_ROUTER = 3'd5,
    TASK_LB     = 3'd6
  } task_e;

  typedef logic [PORT_W-1:0] port_t;
  typedef port_t [MAX_HOPS-1:0] task_seq_t;   // entry 0 is the first task

  // Scheduling algorithm of the per-output schedulers.
  typedef enum logic [1:0] {SCHED_RR = 2'd0, SCHED_LQF = 2'd1, SCHED_FCFS = 2'd2} sched_e;

  // Packet metadata, carried in TUSER on every beat of a packet.
  typedef struct packed {
    logic [15:0] pkt_len;    // bytes, Ethernet header included
    logic [3:0]  flow_type;
    logic [2:0]  prio;       // priority class (IP precedence / traffic-class bits 7:5)
    task_seq_t   task_seq;   // required task sequence
    logic [2:0]  step;       // index in task_seq of the next required task
    port_t       next_task;  // next required task = crossbar target
    logic [1:0]  eth_port;   // Ethernet port chosen by the router / load balancer
    logic [31:0] timestamp;  // clock cycle at which the Parser saw the first beat
  } meta_t;

  localparam int USER_W = $bits(meta_t);

  // One AXI4-Stream beat of the 512-bit data path (TVALID/TREADY travel separately).
  typedef struct packed {
    logic [DATA_W-1:0] tdata;
    logic [KEEP_W-1:0] tkeep;
    logic              tlast;
    meta_t             tuser;
  } beat_t;

  localparam int BEAT_W = $bits(beat_t);

  // Byte k of a beat, byte 0 being the first byte on the wire.
  function automatic logic [7:0] get_byte(input logic [DATA_W-1:0] d, input int unsigned k);
    return d[8*k +: 8];
  endfunction

  // Big-endian 16-bit and 32-bit header fields starting at byte k.
  function automatic logic [15:0] get_u16(input logic [DATA_W-1:0] d, input int unsigned k);
    return {d[8*k +: 8], d[8*(k+1) +: 8]};
  endfunction

  function automatic logic [31:0] get_u32(input logic [DATA_W-1:0] d, input int unsigned k);
    return {d[8*k +: 8], d[8*(k+1) +: 8], d[8*(k+2) +: 8], d[8*(k+3) +: 8]};
  endfunction

  function automatic logic [DATA_W-1:0] put_u32(input logic [DATA_W-1:0] d, input int unsigned k,
                                                input logic [31:0] v);
    logic [DATA_W-1:0] r;
    r = d;
    r[8*k +: 8]     = v[31:24];
    r[8*(k+1) +: 8] = v[23:16];
    r[8*(k+2) +: 8] = v[15:8];
    r[8*(k+3) +: 8] = v[7:0];
    return r;
  endfunction

  // Header offsets for Ethernet II + IPv4 without options (IHL = 5).
  localparam int OFS_ETYPE   = 12;
  localparam int OFS_IP      = 14;
  localparam int OFS_IP_LEN  = 16;
  localparam int OFS_IP_PROT = 23;
  localparam int OFS_IP_SRC  = 26;
  localparam int OFS_IP_DST  = 30;
  localparam int OFS_L4_SRC  = 34;
  localparam int OFS_L4_DST  = 36;
  // IPv6: payload length at 18, next header at 20, L4 ports at 54/56.
  localparam int OFS_IP6_PLEN = 18;
  localparam int OFS_IP6_NH   = 20;
  localparam int OFS_L4_DST6  = 56;
  localparam int ETH_HDR      = 14;

  localparam logic [15:0] ETYPE_IPV4 = 16'h0800;
  localparam logic [15:0] ETYPE_IPV6 = 16'h86DD;
  localparam logic [7:0]  PROTO_TCP  = 8'd6;
  localparam logic [7:0]  PROTO_UDP  = 8'd17;

  // Advance the metadata to the following task of the sequence (done at the egress of
  // every Processing Engine). Past the last slot the packet goes to the exit.
  function automatic meta_t advance_task(input meta_t m);
    meta_t r;
    r = m;
    if (m.step >= 3'(MAX_HOPS - 1)) begin
      r.step      = 3'(MAX_HOPS - 1);
      r.next_task = TASK_EXIT;
    end else begin
      r.step      = m.step + 3'd1;
      r.next_task = m.task_seq[m.step + 3'd1];
    end
    return r;
  endfunction

  // Beats a packet of len bytes occupies on the 512-bit path.
  function automatic logic [15:0] beats_of(input logic [15:0] len);
    return (len + 16'(KEEP_W - 1)) >> $clog2(KEEP_W);
  endfunction

endpackage
