// sched_rr: round-robin packet scheduler (crossbar output scheduler and Processing
// Engine egress arbiter).
//
// Polls the requesters starting at a pointer and picks the first whose TVALID is high.
// The pick is combinational, so a decision can be made in every cycle and back-to-back
// single-beat packets leave without a gap. Once a beat of the picked requester has been
// presented and not completed a packet, the choice is locked until the beat carrying
// TLAST is accepted; the pointer then moves to the requester after the one served
// (wrapping from N-1 to 0). Starvation-free.
//
// From the paper: polling from queue i+1 after the packet of queue i has left. The paper
// writes "queue 0 if i = 7" for a 7-input scheduler; with queues numbered 0..6 this
// design wraps after queue 6.
module sched_rr #(
  parameter int unsigned N  = 7,
  localparam int unsigned SW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          req [N],   // TVALID of each requester
  input  logic          fire,      // output beat accepted this cycle
  input  logic          last,      // ... and it carries TLAST
  output logic [SW-1:0] sel,
  output logic          sel_valid
);

  logic          locked;
  logic [SW-1:0] lock_sel, ptr, pick;
  logic          found;

  function automatic logic [SW-1:0] wrap_inc(input logic [SW-1:0] v);
    return (32'(v) >= N - 1) ? '0 : v + 1'b1;
  endfunction

  always_comb begin
    int unsigned idx;
    found = 1'b0;
    pick  = ptr;
    for (int unsigned k = 0; k < N; k++) begin
      idx = (32'(ptr) + k) % N;
      if (!found && req[idx]) begin
        found = 1'b1;
        pick  = SW'(idx);
      end
    end
    sel       = locked ? lock_sel : pick;
    sel_valid = locked || found;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      locked   <= 1'b0;
      lock_sel <= '0;
      ptr      <= '0;
    end else if (locked) begin
      if (fire && last) begin
        locked <= 1'b0;
        ptr    <= wrap_inc(lock_sel);
      end
    end else if (found) begin
      if (fire && last) ptr <= wrap_inc(pick);
      else begin
        locked   <= 1'b1;
        lock_sel <= pick;
      end
    end
  end

endmodule
