// axis_reg: one-stage AXI4-Stream pipeline register.
//
// Breaks the data path between two blocks with one register. It accepts a word whenever
// its register is empty or is being emptied in the same cycle, so it sustains one word per
// clock; the ready path stays combinational. Latency is one cycle. Used at the input of
// each crossbar DEMUX and at the output of each crossbar MUX, which gives the four-cycle
// crossbar traversal (register, queue write, queue output register, register).
module axis_reg #(
  parameter int unsigned WIDTH = 8
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [WIDTH-1:0] s_data,
  input  logic             s_valid,
  output logic             s_ready,
  output logic [WIDTH-1:0] m_data,
  output logic             m_valid,
  input  logic             m_ready
);

  assign s_ready = !m_valid || m_ready;

  always_ff @(posedge clk) begin
    if (rst) m_valid <= 1'b0;
    else if (s_ready) m_valid <= s_valid;
  end

  always_ff @(posedge clk) begin
    if (s_ready && s_valid) m_data <= s_data;
  end

endmodule
