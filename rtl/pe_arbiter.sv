// pe_arbiter: egress traffic arbiter of a Processing Engine.
//
// When several processing units have finished packets, grants the engine output to one
// of them per packet in round-robin order (a sched_rr scheduler driving an xbar_mux), so
// packets from different units never interleave. Combinational grant, no added latency,
// one beat per cycle.
module pe_arbiter
  import flexcross_pkg::*;
#(
  parameter int unsigned NUM_UNITS = 2,
  localparam int unsigned UW       = (NUM_UNITS > 1) ? $clog2(NUM_UNITS) : 1
) (
  input  logic  clk,
  input  logic  rst,
  input  beat_t s_beat  [NUM_UNITS],
  input  logic  s_valid [NUM_UNITS],
  output logic  s_ready [NUM_UNITS],
  output beat_t m_beat,
  output logic  m_valid,
  input  logic  m_ready
);

  logic [UW-1:0] sel;
  logic          sel_valid;

  sched_rr #(.N(NUM_UNITS)) u_rr (
    .clk, .rst, .req(s_valid),
    .fire(m_valid && m_ready), .last(m_beat.tlast),
    .sel(sel), .sel_valid(sel_valid)
  );

  xbar_mux #(.N(NUM_UNITS), .WIDTH(BEAT_W)) u_mux (
    .s_data(s_beat), .s_valid(s_valid), .s_ready(s_ready),
    .sel(sel), .sel_valid(sel_valid),
    .m_data(m_beat), .m_valid(m_valid), .m_ready(m_ready)
  );

endmodule
