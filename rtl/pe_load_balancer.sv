// pe_load_balancer: ingress load balancer of a Processing Engine.
//
// Steers each incoming packet, as a whole, to the processing unit whose ingress queue
// currently holds the fewest beats (ties go to the lower-numbered unit). The choice is
// made combinationally on the first beat and held until the beat carrying TLAST has been
// taken, so a packet is never split between units. The beat is broadcast; only the chosen
// unit's TVALID is raised, and the input waits (TREADY low) while that queue is full.
// Counts the packets sent to each unit.
//
// From the paper: the balancer monitors each unit's load and forwards to the least loaded
// one. Own choice: the load measure is the ingress-queue fill level, as in the FlexPipe
// design the paper refers to.
module pe_load_balancer
  import flexcross_pkg::*;
#(
  parameter int unsigned NUM_UNITS = 2,
  parameter int unsigned FW        = 6,
  localparam int unsigned UW       = (NUM_UNITS > 1) ? $clog2(NUM_UNITS) : 1
) (
  input  logic          clk,
  input  logic          rst,
  input  beat_t         s_beat,
  input  logic          s_valid,
  output logic          s_ready,
  output beat_t         m_beat,
  output logic          m_valid   [NUM_UNITS],
  input  logic          m_ready   [NUM_UNITS],
  input  logic [FW-1:0] fill      [NUM_UNITS],
  output logic [31:0]   unit_pkts [NUM_UNITS]
);

  logic          in_pkt;
  logic [UW-1:0] hold, best, sel;

  always_comb begin
    best = '0;
    for (int unsigned u = 1; u < NUM_UNITS; u++)
      if (fill[u] < fill[best]) best = UW'(u);
    sel     = in_pkt ? hold : best;
    s_ready = m_ready[sel];
    for (int unsigned u = 0; u < NUM_UNITS; u++) m_valid[u] = s_valid && (32'(sel) == u);
  end

  assign m_beat = s_beat;

  always_ff @(posedge clk) begin
    if (rst) begin
      in_pkt <= 1'b0;
      hold   <= '0;
      for (int unsigned u = 0; u < NUM_UNITS; u++) unit_pkts[u] <= '0;
    end else if (s_valid && s_ready) begin
      in_pkt <= !s_beat.tlast;
      if (!in_pkt) begin
        hold <= best;
        unit_pkts[best] <= unit_pkts[best] + 1'b1;
      end
    end
  end

endmodule
