// sched_fcfs: first-come-first-served packet scheduler for a crossbar output.
//
// Keeps a FIFO of queue indices. Whenever the first beat of a packet is written into any
// of the N queues of this output, the enqueuing logic appends that queue's index at the
// tail (the free slot closest to the head). Several queues can receive a packet in the
// same cycle; their indices are appended in ascending queue order. The index at the head
// selects the queue the MUX reads; it is removed when the beat carrying TLAST leaves, so
// packets leave in the order in which they started to arrive.
//
// DEPTH must cover every packet that can sit in the N queues at once: a queue of Q words
// holds at most Q+1 packets, so N*(Q+1) = 903 for the 7x7 crossbar with 128-word queues;
// the default 1024 is the next power of two (own sizing; the paper gives none).
module sched_fcfs #(
  parameter int unsigned N     = 7,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned SW   = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          push [N],  // first beat of a packet written into queue k
  input  logic          fire,
  input  logic          last,
  output logic [SW-1:0] sel,
  output logic          sel_valid,
  output logic [AW:0]   count      // packets waiting
);

  logic [SW-1:0] mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic [AW-1:0] waddr [N];
  logic [AW:0]   npush;
  logic          pop;

  always_comb begin
    npush = '0;
    for (int unsigned k = 0; k < N; k++) begin
      waddr[k] = wr_ptr + AW'(npush);
      if (push[k]) npush = npush + 1'b1;
    end
  end

  assign sel_valid = (count != '0);
  assign sel       = mem[rd_ptr];
  assign pop       = sel_valid && fire && last;

  always_ff @(posedge clk) begin
    for (int unsigned k = 0; k < N; k++) begin
      if (push[k]) mem[waddr[k]] <= SW'(k);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      wr_ptr <= wr_ptr + AW'(npush);
      if (pop) rd_ptr <= rd_ptr + 1'b1;
      count <= count + npush - (AW+1)'(pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (rst) (count <= (AW+1)'(DEPTH)));

endmodule
