// unit_model: behavioural stand-in for a processing unit whose core is not part of the
// RTL (the CRC and AES units). It takes AXI4-Stream beats of width W and returns them
// unchanged, metadata included, LAT cycles later, one beat per cycle; with STALL set it
// also withholds TREADY at random. It checks that beats of different packets never
// interleave on its input, and counts packets and beats.
module unit_model
  import flexcross_pkg::*;
#(
  parameter int W     = 128,
  parameter int LAT   = 4,
  parameter bit STALL = 0
) (
  input  logic           clk,
  input  logic           rst,
  input  logic [W-1:0]   s_tdata,
  input  logic [W/8-1:0] s_tkeep,
  input  logic           s_tlast,
  input  meta_t          s_tuser,
  input  logic           s_tvalid,
  output logic           s_tready,
  output logic [W-1:0]   m_tdata,
  output logic [W/8-1:0] m_tkeep,
  output logic           m_tlast,
  output meta_t          m_tuser,
  output logic           m_tvalid,
  input  logic           m_tready,
  output int             pkts,
  output int             errors
);
  typedef struct packed {
    logic [W-1:0] d; logic [W/8-1:0] k; logic l; meta_t u; longint t;
  } ent_t;
  ent_t q [$];
  longint now = 0;
  bit in_pkt = 0;
  meta_t cur_u;
  logic stall_now = 0;

  // Outputs are registered at each clock edge from the model's queue.
  always @(posedge clk) begin
    if (rst) begin
      q.delete(); pkts = 0; errors = 0; in_pkt = 0;
    end else begin
      if (m_tvalid && m_tready) void'(q.pop_front());
      if (s_tvalid && s_tready) begin
        if (in_pkt && s_tuser != cur_u) errors++;   // interleaved packets
        cur_u = s_tuser;
        in_pkt = !s_tlast;
        if (s_tlast) pkts++;
        q.push_back('{d: s_tdata, k: s_tkeep, l: s_tlast, u: s_tuser, t: now});
      end
    end
    now = now + 1;
    stall_now = STALL && (($urandom % 4) == 0);
    s_tready <= !rst && !stall_now && (q.size() < LAT + 4);
    m_tvalid <= !rst && (q.size() > 0) && (now >= q[0].t + LAT);
    if (q.size() > 0) begin
      m_tdata <= q[0].d; m_tkeep <= q[0].k; m_tlast <= q[0].l; m_tuser <= q[0].u;
    end
  end
endmodule
