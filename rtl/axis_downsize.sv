// axis_downsize: splits 512-bit beats into OUT_W-bit beats for a narrow processing unit.
//
// Each wide beat is sent as DATA_W/OUT_W narrow beats, lowest bytes first. On the last
// beat of a packet only the narrow beats that hold valid bytes (TKEEP) are sent, and the
// final one carries TLAST. The metadata is copied onto every narrow beat. Holds one wide
// beat; accepts the next one in the cycle its last narrow beat leaves, so the narrow side
// runs at one beat per cycle. Latency one cycle.
module axis_downsize
  import flexcross_pkg::*;
#(
  parameter int unsigned OUT_W = 128,
  localparam int unsigned R    = DATA_W / OUT_W,
  localparam int unsigned RW   = (R > 1) ? $clog2(R) : 1
) (
  input  logic                 clk,
  input  logic                 rst,
  input  beat_t                s_beat,
  input  logic                 s_valid,
  output logic                 s_ready,
  output logic [OUT_W-1:0]     m_tdata,
  output logic [OUT_W/8-1:0]   m_tkeep,
  output logic                 m_tlast,
  output meta_t                m_tuser,
  output logic                 m_valid,
  input  logic                 m_ready
);

  beat_t   buf_q;
  logic    have;
  logic [RW-1:0] seg, nseg_m1, s_nseg_m1;
  logic    last_seg;

  // Index of the last narrow beat of an incoming wide beat.
  always_comb begin
    s_nseg_m1 = RW'(R - 1);
    if (s_beat.tlast) begin
      s_nseg_m1 = '0;
      for (int unsigned k = 0; k < R; k++)
        if (s_beat.tkeep[k*(OUT_W/8) +: OUT_W/8] != '0) s_nseg_m1 = RW'(k);
    end
  end

  assign last_seg = (seg == nseg_m1);
  assign s_ready  = !have || (m_ready && last_seg);
  assign m_valid  = have;
  assign m_tdata  = buf_q.tdata[seg*OUT_W +: OUT_W];
  assign m_tkeep  = buf_q.tkeep[seg*(OUT_W/8) +: OUT_W/8];
  assign m_tlast  = buf_q.tlast && last_seg;
  assign m_tuser  = buf_q.tuser;

  always_ff @(posedge clk) begin
    if (rst) begin
      have    <= 1'b0;
      seg     <= '0;
      nseg_m1 <= '0;
    end else if (s_valid && s_ready) begin
      have    <= 1'b1;
      seg     <= '0;
      nseg_m1 <= s_nseg_m1;
    end else if (have && m_ready) begin
      if (last_seg) have <= 1'b0;
      else          seg  <= seg + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (s_valid && s_ready) buf_q <= s_beat;
  end

endmodule
