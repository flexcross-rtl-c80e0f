// xbar_demux: crossbar DEMUX, one per crossbar input.
//
// Forwards each beat from a Parser / Processing Engine output to one of the N crosspoint
// queues of this input, the one chosen by the Controller. When the Controller drops the
// packet, no queue sees TVALID and TREADY to the input is held high, so the packet is
// consumed and discarded at line rate. Purely combinational: the beat is broadcast to all
// queues and only the selected queue's TVALID is raised.
module xbar_demux
  import flexcross_pkg::*;
#(
  parameter int unsigned N = N_PORTS
) (
  input  beat_t  s_beat,
  input  logic   s_valid,
  output logic   s_ready,
  input  port_t  sel,
  input  logic   drop,
  output beat_t  m_beat,
  output logic   m_valid [N],
  input  logic   m_ready [N]
);

  assign m_beat = s_beat;

  always_comb begin
    for (int j = 0; j < int'(N); j++) m_valid[j] = s_valid && !drop && (32'(sel) == j);
    if (drop || 32'(sel) >= N) s_ready = 1'b1;
    else                      s_ready = m_ready[sel];
  end

endmodule
