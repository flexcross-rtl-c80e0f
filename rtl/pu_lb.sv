// pu_lb: load-balancer processing unit (512-bit, one beat per cycle).
//
// Spreads packets over NUM_ETH_PORTS Ethernet ports in round-robin order: packet k gets
// port k mod NUM_ETH_PORTS, written into the metadata field eth_port of all its beats.
// The data are not changed. Reset restarts the rotation at port 0.
//
// One register stage, latency one cycle. From the paper: round-robin distribution over
// the Ethernet ports. Own choice: four ports (the FPGA test board has four) and
// carrying the result in the metadata.
module pu_lb
  import flexcross_pkg::*;
#(
  parameter int unsigned NUM_ETH_PORTS = 4
) (
  input  logic  clk,
  input  logic  rst,
  input  beat_t s_beat,
  input  logic  s_valid,
  output logic  s_ready,
  output beat_t m_beat,
  output logic  m_valid,
  input  logic  m_ready
);

  logic       in_pkt;
  logic [1:0] next_port, port_hold;
  beat_t      out_beat;

  always_comb begin
    out_beat = s_beat;
    out_beat.tuser.eth_port = in_pkt ? port_hold : next_port;
  end

  assign s_ready = !m_valid || m_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      m_valid   <= 1'b0;
      in_pkt    <= 1'b0;
      next_port <= '0;
      port_hold <= '0;
    end else begin
      if (s_ready) m_valid <= s_valid;
      if (s_valid && s_ready) begin
        in_pkt <= !s_beat.tlast;
        if (!in_pkt) begin
          port_hold <= next_port;
          next_port <= (32'(next_port) >= NUM_ETH_PORTS - 1) ? '0 : next_port + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (s_valid && s_ready) m_beat <= out_beat;
  end

endmodule
