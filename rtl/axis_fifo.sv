// axis_fifo: first-word-fall-through AXI4-Stream FIFO with a fill-level output.
//
// Used as the crosspoint queue of the crossbar (one per input/output pair, 128 words of
// one 512-bit beat plus sideband = 8 KB of data) and as the ingress queue of each
// processing unit inside a Processing Engine. The beat is opaque: WIDTH bits written on a
// valid/ready handshake and read back in order.
//
// The storage is a simple dual-port array (one write, one registered read), which maps to
// block RAM, followed by a one-word output register, so the head word is presented
// without a combinational path from the array. The write side accepts one word per
// cycle while fewer than DEPTH words sit in the array; the read side delivers one word per
// cycle. A word written in cycle t can leave in cycle t+2.
//
// fill counts the words held, the output register included (0 .. DEPTH+1); it is what the
// crossbar Controller compares with the packet size and what the LQF scheduler and the
// Processing Engine load balancer compare between queues. Reset is synchronous and
// active high and empties the FIFO.
module axis_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 128,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned FW   = $clog2(DEPTH + 2)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [WIDTH-1:0] s_data,
  input  logic             s_valid,
  output logic             s_ready,
  output logic [WIDTH-1:0] m_data,
  output logic             m_valid,
  input  logic             m_ready,
  output logic [FW-1:0]    fill
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wr_ptr, rd_ptr;
  logic [AW:0]      used;
  logic             do_wr, do_rd;

  assign used    = wr_ptr - rd_ptr;
  assign s_ready = (used != (AW+1)'(DEPTH));
  assign do_wr   = s_valid && s_ready;
  // Move the array head into the output register when it is empty or being emptied.
  assign do_rd   = (used != '0) && (!m_valid || m_ready);
  assign fill    = FW'(used) + FW'(m_valid);

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr[AW-1:0]] <= s_data;
  end

  always_ff @(posedge clk) begin
    if (do_rd) m_data <= mem[rd_ptr[AW-1:0]];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_ptr  <= '0;
      rd_ptr  <= '0;
      m_valid <= 1'b0;
    end else begin
      if (do_wr) wr_ptr <= wr_ptr + 1'b1;
      if (do_rd) begin
        rd_ptr  <= rd_ptr + 1'b1;
        m_valid <= 1'b1;
      end else if (m_ready) begin
        m_valid <= 1'b0;
      end
    end
  end

  // A write is never presented to a full FIFO by a well-behaved producer that watches
  // s_ready; the crossbar Controller guarantees room before it forwards a packet.
  a_no_overflow: assert property (@(posedge clk) disable iff (rst) (used <= (AW+1)'(DEPTH)));

endmodule
