// xbar_mux: crossbar MUX, one per crossbar output (also reused as the egress multiplexer
// of a Processing Engine).
//
// Connects the queue picked by the local scheduler to the output: the selected queue's
// beat and TVALID go out and the output's TREADY goes back to that queue only. Purely
// combinational; the scheduler holds its selection for a whole packet, so packets are
// never interleaved. With sel_valid low nothing is forwarded.
module xbar_mux #(
  parameter int unsigned N     = 7,
  parameter int unsigned WIDTH = 8,
  localparam int unsigned SW   = (N > 1) ? $clog2(N) : 1
) (
  input  logic [WIDTH-1:0] s_data  [N],
  input  logic             s_valid [N],
  output logic             s_ready [N],
  input  logic [SW-1:0]    sel,
  input  logic             sel_valid,
  output logic [WIDTH-1:0] m_data,
  output logic             m_valid,
  input  logic             m_ready
);

  always_comb begin
    m_data  = s_data[0];
    m_valid = 1'b0;
    for (int i = 0; i < int'(N); i++) begin
      s_ready[i] = sel_valid && (32'(sel) == i) && m_ready;
      if (32'(sel) == i) begin
        m_data  = s_data[i];
        m_valid = sel_valid && s_valid[i];
      end
    end
  end

endmodule
