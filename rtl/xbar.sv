// xbar: the crosspoint-queued crossbar of FlexCross (N x N, 7 x 7 by default).
//
// Every input i has an input register, a Controller and a DEMUX; every output j has a
// local scheduler, a MUX and an output register; and every pair (i, j) has its own
// crosspoint queue, N*N queues in all. Input i writes a packet into queue (i, j), where
// j is the packet's next required task, if the whole packet fits, and drops it otherwise
// (no backpressure towards the sender). Output j's scheduler picks, per packet, one of
// the queues (0..N-1, j) and the MUX streams that packet out. Because every input/output
// pair has its own queue there is no head-of-line blocking and no speedup is needed, and
// because the queues decouple the two sides each output is scheduled locally.
//
// Switching is virtual cut-through: the MUX reads a packet as soon as its first beat is
// in the queue and the output is free, without waiting for the rest.
//
// Timing: a beat entering at input i in cycle t leaves output j at the earliest in cycle
// t+4 (input register, queue write, queue output register, output register). Each
// output sustains one 512-bit beat per cycle.
//
// SCHED selects the scheduling algorithm of all outputs: round robin (the default, and
// the one the FPGA prototype used), longest queue first, or first come first served.
module xbar
  import flexcross_pkg::*;
#(
  parameter int unsigned N          = N_PORTS,
  parameter int unsigned QDEPTH     = 128,        // 128 x 64 B = 8 KB per queue
  parameter sched_e      SCHED      = SCHED_RR,
  parameter int unsigned FCFS_DEPTH = 1024,
  localparam int unsigned FW        = $clog2(QDEPTH + 2),
  localparam int unsigned SW        = (N > 1) ? $clog2(N) : 1
) (
  input  logic        clk,
  input  logic        rst,
  input  beat_t       s_beat  [N],
  input  logic        s_valid [N],
  output logic        s_ready [N],
  output beat_t       m_beat  [N],
  output logic        m_valid [N],
  input  logic        m_ready [N],
  output logic [31:0] fwd_count  [N],   // per input: packets accepted into a queue
  output logic [31:0] drop_count [N]    // per input: packets dropped for lack of space
);

  // Input side.
  beat_t         d_beat  [N];
  logic          d_valid [N], d_ready [N];
  port_t         c_sel   [N];
  logic          c_drop  [N], c_sop [N];
  beat_t         qi_beat [N];

  // Crosspoint queues, indexed [input][output].
  logic          qi_valid [N][N], qi_ready [N][N];
  beat_t         qo_beat  [N][N];
  logic          qo_valid [N][N], qo_ready [N][N];
  logic [FW-1:0] q_fill   [N][N];

  for (genvar i = 0; i < N; i++) begin : g_in
    axis_reg #(.WIDTH(BEAT_W)) u_in_reg (
      .clk, .rst,
      .s_data(s_beat[i]), .s_valid(s_valid[i]), .s_ready(s_ready[i]),
      .m_data(d_beat[i]), .m_valid(d_valid[i]), .m_ready(d_ready[i])
    );

    xbar_controller #(.N(N), .QDEPTH(QDEPTH)) u_ctrl (
      .clk, .rst,
      .s_beat(d_beat[i]), .s_valid(d_valid[i]), .s_ready(d_ready[i]),
      .fill(q_fill[i]),
      .sel(c_sel[i]), .drop(c_drop[i]), .sop(c_sop[i]),
      .fwd_count(fwd_count[i]), .drop_count(drop_count[i])
    );

    xbar_demux #(.N(N)) u_demux (
      .s_beat(d_beat[i]), .s_valid(d_valid[i]), .s_ready(d_ready[i]),
      .sel(c_sel[i]), .drop(c_drop[i]),
      .m_beat(qi_beat[i]), .m_valid(qi_valid[i]), .m_ready(qi_ready[i])
    );

    for (genvar j = 0; j < N; j++) begin : g_q
      axis_fifo #(.WIDTH(BEAT_W), .DEPTH(QDEPTH)) u_queue (
        .clk, .rst,
        .s_data(qi_beat[i]), .s_valid(qi_valid[i][j]), .s_ready(qi_ready[i][j]),
        .m_data(qo_beat[i][j]), .m_valid(qo_valid[i][j]), .m_ready(qo_ready[i][j]),
        .fill(q_fill[i][j])
      );
    end
  end

  // Output side.
  for (genvar j = 0; j < N; j++) begin : g_out
    beat_t         col_beat  [N];
    logic          col_valid [N], col_ready [N], col_push [N];
    logic [FW-1:0] col_fill  [N];
    logic [SW-1:0] sel;
    logic          sel_valid;
    beat_t         o_beat;
    logic          o_valid, o_ready;

    for (genvar i = 0; i < N; i++) begin : g_col
      assign col_beat[i]    = qo_beat[i][j];
      assign col_valid[i]   = qo_valid[i][j];
      assign col_fill[i]    = q_fill[i][j];
      assign col_push[i]    = qi_valid[i][j] && qi_ready[i][j] && c_sop[i];
      assign qo_ready[i][j] = col_ready[i];
    end

    if (SCHED == SCHED_LQF) begin : g_lqf
      sched_lqf #(.N(N), .FW(FW)) u_sched (
        .clk, .rst, .req(col_valid), .fill(col_fill),
        .fire(o_valid && o_ready), .last(o_beat.tlast),
        .sel(sel), .sel_valid(sel_valid)
      );
    end else if (SCHED == SCHED_FCFS) begin : g_fcfs
      logic [$clog2(FCFS_DEPTH):0] pending;
      sched_fcfs #(.N(N), .DEPTH(FCFS_DEPTH)) u_sched (
        .clk, .rst, .push(col_push),
        .fire(o_valid && o_ready), .last(o_beat.tlast),
        .sel(sel), .sel_valid(sel_valid), .count(pending)
      );
    end else begin : g_rr
      sched_rr #(.N(N)) u_sched (
        .clk, .rst, .req(col_valid),
        .fire(o_valid && o_ready), .last(o_beat.tlast),
        .sel(sel), .sel_valid(sel_valid)
      );
    end

    xbar_mux #(.N(N), .WIDTH(BEAT_W)) u_mux (
      .s_data(col_beat), .s_valid(col_valid), .s_ready(col_ready),
      .sel(sel), .sel_valid(sel_valid),
      .m_data(o_beat), .m_valid(o_valid), .m_ready(o_ready)
    );

    axis_reg #(.WIDTH(BEAT_W)) u_out_reg (
      .clk, .rst,
      .s_data(o_beat), .s_valid(o_valid), .s_ready(o_ready),
      .m_data(m_beat[j]), .m_valid(m_valid[j]), .m_ready(m_ready[j])
    );

    // AXI4-Stream rule at the MUX output: a presented beat stays until it is taken.
    logic  o_stall;
    beat_t o_prev;
    always_ff @(posedge clk) begin
      o_stall <= !rst && o_valid && !o_ready;
      o_prev  <= o_beat;
      if (!rst && o_stall)
        a_axis_stable: assert (o_valid && o_beat == o_prev)
          else $error("crossbar output %0d changed a beat before it was taken", j);
    end
  end

endmodule
