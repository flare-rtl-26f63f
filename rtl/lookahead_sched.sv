// lookahead_sched -- look-ahead (depth-first) task order for one block.
//
// A block of B x B x B points (B = 2^K) is interpolated level by level, level
// l using stride s = 2^(l-1). Instead of finishing a level for the whole block
// before the next (breadth first), the look-ahead order splits the block into
// z-halves and descends into the lower half down to level 1 before the upper
// half is touched, as in the paper's step numbering: for B = 8 the tasks are
// L3[0,8) L2[0,4) L1[0,2) L1[2,4) L2[4,8) L1[4,6) L1[6,8).
// A task is (level l, lo): it covers the z-slab [lo, lo + 2^l). The sequence is
// produced by a counter t = 0 .. B/2-1 (lo = 2t): for each t the levels from
// top(t) down to 1 are issued, top(0) = K and top(t) = trailing_zeros(t) + 1.
// `upper` flags a slab that is the upper half of its parent, whose top plane
// has not yet been reconstructed; `last` flags a level-1 task, after which the
// two slices lo and lo+1 are final.
//
// Interface: valid/ready task stream; `start` restarts the sequence, `done`
// pulses after the last task is taken. The splitting rule follows the paper's
// Fig. 4; the counter formulation is this design's.
module lookahead_sched #(
  parameter int unsigned K = 5   // log2 of the block edge (32 in the paper)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  output logic                 task_valid,
  input  logic                 task_ready,
  output logic [$clog2(K+1)-1:0] task_level,
  output logic [K-1:0]         task_lo,
  output logic                 task_upper,
  output logic                 task_last,
  output logic                 done
);

  localparam int unsigned LW = $clog2(K+1);

  logic          busy;
  logic [K-2:0]  t;      // slab-pair counter, B/2 values
  logic [LW-1:0] lvl;

  // trailing zeros of t+? : top level for the next t
  function automatic logic [LW-1:0] top_level(input logic [K-2:0] tv);
    logic [LW-1:0] r;
    r = LW'(K);
    for (int i = K-2; i >= 0; i--)
      if (tv[i]) r = LW'(i + 1);
    return r;
  endfunction

  assign task_valid = busy;
  assign task_level = lvl;
  assign task_lo    = {t, 1'b0};
  assign task_last  = (lvl == LW'(1));
  // lo is the upper half of its level-(l+1) parent when bit l of lo is set
  always_comb begin
    task_upper = 1'b0;
    for (int i = 1; i < K; i++)
      if (LW'(i) == lvl) task_upper = task_lo[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      t    <= '0;
      lvl  <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        t    <= '0;
        lvl  <= LW'(K);
      end else if (busy && task_ready) begin
        if (lvl != LW'(1)) begin
          lvl <= lvl - 1'b1;
        end else if (&t) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          t   <= t + 1'b1;
          lvl <= top_level(t + 1'b1);
        end
      end
    end
  end

endmodule
