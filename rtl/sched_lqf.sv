// sched_lqf: longest-queue-first packet scheduler for a crossbar output.
//
// A tree comparator over the N queues of one MUX: in each round the queues are paired and
// the one with the higher fill level survives; all rounds settle in the same clock cycle,
// and the last survivor is granted the output. Empty queues (TVALID low) never win; on a
// tie the lower-numbered queue wins. As in the round-robin scheduler, the grant is
// combinational while the output is idle and is then held until the beat carrying TLAST
// leaves. Minimises the spread of fill levels (and so drops) but is not starvation-free.
//
// From the paper: tree of pairwise fill-level comparisons resolved in one cycle. Own
// choices: tie-breaking to the lower index and padding the tree to a power of two with
// empty leaves.
module sched_lqf #(
  parameter int unsigned N  = 7,
  parameter int unsigned FW = 8,
  localparam int unsigned SW = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned P  = 1 << SW
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          req  [N],  // TVALID of each queue
  input  logic [FW-1:0] fill [N],  // fill level of each queue
  input  logic          fire,
  input  logic          last,
  output logic [SW-1:0] sel,
  output logic          sel_valid
);

  logic          locked;
  logic [SW-1:0] lock_sel;
  logic [SW-1:0] t_idx [P];
  logic [FW-1:0] t_fill [P];
  logic          t_vld [P];

  always_comb begin
    for (int unsigned k = 0; k < P; k++) begin
      t_idx[k]  = SW'(k);
      t_fill[k] = (k < N) ? fill[k] : '0;
      t_vld[k]  = (k < N) ? req[k] : 1'b0;
    end
    // Rounds of the tree: pair (2k, 2k+1) survives into slot k.
    for (int unsigned w = P / 2; w >= 1; w = w / 2) begin
      for (int unsigned k = 0; k < w; k++) begin
        if (t_vld[2*k+1] && (!t_vld[2*k] || t_fill[2*k+1] > t_fill[2*k])) begin
          t_idx[k]  = t_idx[2*k+1];
          t_fill[k] = t_fill[2*k+1];
          t_vld[k]  = 1'b1;
        end else begin
          t_idx[k]  = t_idx[2*k];
          t_fill[k] = t_fill[2*k];
          t_vld[k]  = t_vld[2*k];
        end
      end
    end
    sel       = locked ? lock_sel : t_idx[0];
    sel_valid = locked || t_vld[0];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      locked   <= 1'b0;
      lock_sel <= '0;
    end else if (locked) begin
      if (fire && last) locked <= 1'b0;
    end else if (t_vld[0] && !(fire && last)) begin
      locked   <= 1'b1;
      lock_sel <= t_idx[0];
    end
  end

endmodule
