// xbar_controller: per-input Controller of the crossbar.
//
// One Controller sits beside each DEMUX. On the first beat of a packet it reads the
// target (metadata field next_task) and the packet size from TUSER, and compares the
// space left in the crosspoint queue towards that target with the number of 512-bit
// beats the packet needs. If the packet fits, the DEMUX is steered to that queue for the
// whole packet; if not, the whole packet is dropped: the DEMUX then keeps TVALID to the
// queue low and TREADY to the input high, so no backpressure ever reaches the sender.
// A target outside 0..N-1 is treated like a full queue.
//
// The decision for the first beat is combinational (same cycle), later beats reuse the
// registered decision, so back-to-back packets pass without a bubble. Only this input
// writes into its N queues and a queue never gains words from elsewhere, so a packet
// that fits at its first beat still fits at its last, even with cut-through reads.
//
// From the paper: one Controller per DEMUX, inputs target/packet size/fill level, drop
// when the remaining space is smaller than the packet. Own choices: space is counted in
// whole beats (ceil(len/64)), a packet equal to the free space is accepted, and the
// counters of forwarded and dropped packets.
module xbar_controller
  import flexcross_pkg::*;
#(
  parameter int unsigned N      = N_PORTS,
  parameter int unsigned QDEPTH = 128,
  localparam int unsigned FW    = $clog2(QDEPTH + 2)
) (
  input  logic          clk,
  input  logic          rst,
  input  beat_t         s_beat,     // beat at the DEMUX input
  input  logic          s_valid,
  input  logic          s_ready,    // handshake as seen by the DEMUX
  input  logic [FW-1:0] fill [N],   // fill levels of this input's queues
  output port_t         sel,        // queue the DEMUX steers to
  output logic          drop,       // discard the current packet
  output logic          sop,        // current beat is the first of a packet
  output logic [31:0]   fwd_count,  // packets forwarded
  output logic [31:0]   drop_count  // packets dropped
);

  logic        in_pkt;
  port_t       hold_sel;
  logic        hold_drop;
  port_t       target;
  logic        fits;
  logic [16:0] need, room;

  assign target = s_beat.tuser.next_task;

  always_comb begin
    need = {1'b0, beats_of(s_beat.tuser.pkt_len)};
    if (need == '0) need = 17'd1;
    fits = 1'b0;
    room = '0;
    if (32'(target) < N) begin
      room = 17'(QDEPTH) - 17'(fill[target]);
      // fill may read QDEPTH+1 (output register occupied): room then wraps negative.
      fits = (17'(fill[target]) <= 17'(QDEPTH)) && (need <= room);
    end
  end

  assign sop  = !in_pkt;
  assign sel  = in_pkt ? hold_sel  : target;
  assign drop = in_pkt ? hold_drop : !fits;

  always_ff @(posedge clk) begin
    if (rst) begin
      in_pkt     <= 1'b0;
      hold_sel   <= '0;
      hold_drop  <= 1'b0;
      fwd_count  <= '0;
      drop_count <= '0;
    end else if (s_valid && s_ready) begin
      if (!in_pkt) begin
        hold_sel  <= target;
        hold_drop <= !fits;
        if (fits) fwd_count  <= fwd_count + 1'b1;
        else      drop_count <= drop_count + 1'b1;
      end
      in_pkt <= !s_beat.tlast;
    end
  end

endmodule
