// ready_pool: metadata records of results that have arrived at the host and
// wait for a host task.
//
// The local polling routine pushes records (push, one per cycle, refused
// while full). The host scheduler sees every entry (entry_valid, entries)
// and takes any one of them, in any order, with pop/pop_idx; a pop frees the
// entry in the same cycle's edge. A push fills the lowest free entry. This is
// what lets the host pick tasks by its own policy rather than in arrival
// order (the paper's out-of-order interface to the host scheduler).
//
// From the paper: the pool as the direct interface to the host scheduler,
// free choice of entries. Chosen here: the depth and the fill policy.
module ready_pool
  import axle_pkg::*;
#(
  parameter int unsigned DEPTH = 64
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push,
  input  meta_t                    push_data,
  output logic                     full,
  output logic [DEPTH-1:0]         entry_valid,
  output meta_t                    entries [DEPTH],
  output logic [$clog2(DEPTH+1)-1:0] count,
  input  logic                     pop,
  input  logic [$clog2(DEPTH)-1:0] pop_idx
);
  localparam int unsigned IW = $clog2(DEPTH);

  logic [DEPTH-1:0] v_q;
  meta_t            e_q [DEPTH];

  logic [IW-1:0] free_idx;
  always_comb begin
    free_idx = '0;
    for (int i = DEPTH - 1; i >= 0; i--)
      if (!v_q[i]) free_idx = IW'(i);
  end

  assign full        = &v_q;
  assign entry_valid = v_q;
  assign entries     = e_q;

  always_comb begin
    count = '0;
    for (int i = 0; i < DEPTH; i++) count += $bits(count)'(v_q[i]);
  end

  always_ff @(posedge clk) begin
    if (push && !full) e_q[free_idx] <= push_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) v_q <= '0;
    else begin
      if (pop)          v_q[pop_idx]  <= 1'b0;
      if (push && !full) v_q[free_idx] <= 1'b1;
    end
  end

  a_pop_valid: assert property (@(posedge clk) disable iff (!rst_n) pop |-> v_q[pop_idx]);
  a_no_push_full: assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);

endmodule
