// payload_head_tracker: gap-aware head of the host payload ring.
//
// Host tasks finish with payload slots in any order (consume, consume_slot).
// The tracker sets one bit per consumed slot and moves the head forward, one
// slot per cycle, while the slot at the head is marked consumed, clearing the
// bit as it passes. So the head only ever covers the contiguous run of
// consumed slots: if slot 1 is done but slot 0 is not, the head stays at 0.
// When the head has moved and stops (the slot at the head is not consumed
// yet, or the ring is empty), fc_req asks for one flow-control store carrying
// the new head (fc_ptr). gap pulses when a consumed slot is not the one at
// the head.
//
// After reset the bitmap is zeroed one slot per cycle (init_busy high for
// CAP cycles); no slot may be consumed before that ends.
//
// From the paper: the gap-aware advance of the payload head and the
// flow-control store that reports it. Chosen here: a bitmap of CAP bits, one
// slot of advance per cycle, one coalesced request per run of advances.
module payload_head_tracker
  import axle_pkg::*;
#(
  parameter int unsigned CAP = 50000
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              consume,
  input  logic [SLOT_W-1:0] consume_slot,
  output ptr_t              head,
  output logic              fc_req,
  output ptr_t              fc_ptr,
  output logic              gap,
  output logic              init_busy
);
  logic   done_q [CAP];
  ptr_t   head_q;
  logic   moved_q;
  logic   init_q;
  logic [SLOT_W-1:0] init_idx_q;

  logic [SLOT_W-1:0] hslot;
  logic              adv;
  assign hslot = ptr_slot(head_q, CAP);
  assign adv   = !init_q && done_q[hslot];

  always_ff @(posedge clk) begin
    if (init_q)       done_q[init_idx_q]   <= 1'b0;
    else if (adv)     done_q[hslot]        <= 1'b0;
    if (consume)      done_q[consume_slot] <= 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      init_q     <= 1'b1;
      init_idx_q <= '0;
    end else if (init_q) begin
      init_idx_q <= init_idx_q + 1'b1;
      if (32'(init_idx_q) == CAP - 1) init_q <= 1'b0;
    end
  end
  assign init_busy = init_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      head_q  <= '0;
      moved_q <= 1'b0;
    end else begin
      if (adv) head_q <= ptr_inc(head_q, CAP);
      moved_q <= adv ? 1'b1 : 1'b0;
    end
  end

  assign head   = head_q;
  assign fc_req = moved_q && !adv;
  assign fc_ptr = head_q;
  assign gap    = consume && (consume_slot != hslot);

  a_no_double: assert property (@(posedge clk) disable iff (!rst_n)
    consume |-> !init_q && !done_q[consume_slot] && (32'(consume_slot) < CAP));
  a_not_head_twice: assert property (@(posedge clk) disable iff (!rst_n)
    consume |-> !(adv && consume_slot == hslot));

endmodule
