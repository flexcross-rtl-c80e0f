// axis_upsize: packs IN_W-bit beats of a narrow processing unit back into 512-bit beats.
//
// Narrow beats fill a wide beat from the lowest bytes up; the wide beat is sent when all
// DATA_W/IN_W slots are filled or when a narrow beat carries TLAST (unfilled slots then
// have TKEEP low). The metadata of the last narrow beat of a wide beat is kept. One output
// register; narrow beats are accepted while it is free or being emptied, i.e. one per
// cycle when the wide side is ready. Latency one cycle after the completing narrow beat.
module axis_upsize
  import flexcross_pkg::*;
#(
  parameter int unsigned IN_W = 128,
  localparam int unsigned R   = DATA_W / IN_W,
  localparam int unsigned RW  = (R > 1) ? $clog2(R) : 1
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [IN_W-1:0]    s_tdata,
  input  logic [IN_W/8-1:0]  s_tkeep,
  input  logic               s_tlast,
  input  meta_t              s_tuser,
  input  logic               s_valid,
  output logic               s_ready,
  output beat_t              m_beat,
  output logic               m_valid,
  input  logic               m_ready
);

  logic [DATA_W-1:0] acc_d;
  logic [KEEP_W-1:0] acc_k;
  logic [RW-1:0]     idx;
  logic [DATA_W-1:0] nxt_d;
  logic [KEEP_W-1:0] nxt_k;
  logic              done;

  always_comb begin
    nxt_d = acc_d;
    nxt_k = acc_k;
    nxt_d[idx*IN_W +: IN_W]         = s_tdata;
    nxt_k[idx*(IN_W/8) +: IN_W/8]   = s_tkeep;
    done = s_tlast || (32'(idx) == R - 1);
    // Slots above the last one of a packet carry no bytes: send them as zeros.
    for (int unsigned k = 0; k < R; k++)
      if (k > 32'(idx)) nxt_d[k*IN_W +: IN_W] = '0;
  end

  assign s_ready = !m_valid || m_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      m_valid <= 1'b0;
      idx     <= '0;
      acc_k   <= '0;
    end else if (s_valid && s_ready) begin
      if (done) begin
        m_valid <= 1'b1;
        idx     <= '0;
        acc_k   <= '0;
      end else begin
        if (m_ready) m_valid <= 1'b0;
        idx   <= idx + 1'b1;
        acc_k <= nxt_k;
      end
    end else if (m_ready) begin
      m_valid <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (s_valid && s_ready) begin
      acc_d <= nxt_d;
      if (done) begin
        m_beat.tdata <= nxt_d;
        m_beat.tkeep <= nxt_k;
        m_beat.tlast <= s_tlast;
        m_beat.tuser <= s_tuser;
      end
    end
  end

endmodule
