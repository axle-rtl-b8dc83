// payload_former: turns result stores of the CCM uthreads into payloads.
//
// The result region of an offloaded kernel is cut into slot-sized chunks
// (SLOT_BYTES each, the last one may be shorter). The module watches every
// result store (byte offset and byte count), adds the byte count to the
// chunk's counter, and declares the chunk complete when its counter reaches
// the chunk size. Complete chunks are handed to the DMA executor as payloads
// through a valid/ready port, one per cycle:
//   * ooo_en = 1 (out-of-order streaming, the paper's default): in the order
//     in which chunks complete, whatever their offsets.
//   * ooo_en = 0: strictly by offset. A scan pointer waits at the first
//     chunk that is not complete; hol_wait is high while finished chunks wait
//     behind it (the stall the paper measures when OoO streaming is off).
// chunk_last marks the kernel's final payload so the executor can flush a
// batch smaller than the streaming factor.
//
// Timing: a store that completes a chunk makes it visible on the output
// queue the next cycle (OoO) or two cycles later (in order). A chunk's
// counter returns to zero when the chunk is queued, so all counters are zero
// again once a kernel has been fully handed out. After reset the module
// zeroes the counter array, one entry per cycle (init_busy high for
// MAX_CHUNKS cycles); no store or start may come during that time. A new
// kernel may start once the previous one's last payload was taken.
//
// From the paper: forming one payload per slot of contiguous result data, OoO
// versus in-order streaming. Chosen here: counting bytes per chunk (a store
// never crosses a slot boundary and writes each byte once), the clearing
// scheme, the queue depth of MAX_CHUNKS so that stores are never
// back-pressured.
module payload_former
  import axle_pkg::*;
#(
  parameter int unsigned SLOT_BYTES = 32,
  parameter int unsigned MAX_CHUNKS = 50000
) (
  input  logic        clk,
  input  logic        rst_n,
  // kernel start
  input  logic        start,
  input  logic [31:0] result_bytes,
  input  logic        ooo_en,
  // result stores
  input  logic        st_valid,
  input  logic [31:0] st_offset,
  input  logic [7:0]  st_bytes,
  // completed chunks
  output logic        chunk_valid,
  input  logic        chunk_ready,
  output ptr_t        chunk_id,
  output logic [15:0] chunk_size,
  output logic        chunk_last,
  output logic        hol_wait,
  output logic        init_busy
);
  localparam int unsigned CW = $clog2(SLOT_BYTES + 1);
  localparam int unsigned IW = $clog2(MAX_CHUNKS + 1);
  localparam int unsigned SH = $clog2(SLOT_BYTES);
  localparam int unsigned AW = (MAX_CHUNKS > 1) ? $clog2(MAX_CHUNKS) : 1;  // array index

  logic [CW-1:0] ctr_q [MAX_CHUNKS];
  logic [IW-1:0] fifo_q [MAX_CHUNKS];

  logic          ooo_q;
  logic          init_q;           // zeroing the counters after reset
  logic [IW-1:0] init_idx_q;
  logic [31:0]   total_q;          // chunks in this kernel
  logic [15:0]   last_size_q;      // bytes of the final chunk
  logic [IW-1:0] wr_q, rd_q;       // queue pointers (never wrap within a kernel)
  logic [IW-1:0] scan_q;           // in-order scan pointer
  logic [31:0]   done_q;           // chunks completed
  logic [31:0]   sent_q;           // chunks handed out

  function automatic logic [CW-1:0] chunk_bytes(logic [31:0] idx);
    chunk_bytes = (idx == total_q - 1) ? CW'(last_size_q) : CW'(SLOT_BYTES);
  endfunction

  // store side
  logic [31:0]   st_idx;
  logic [CW-1:0] st_new;
  logic          st_done;
  always_comb begin
    st_idx  = st_offset >> SH;
    st_new  = ctr_q[st_idx[AW-1:0]] + CW'(st_bytes);
    st_done = st_valid && (st_new == chunk_bytes(st_idx));
  end

  // in-order scan
  logic scan_done;
  always_comb begin
    scan_done = !init_q && !ooo_q && (32'(scan_q) < total_q)
                && (ctr_q[scan_q[AW-1:0]] == chunk_bytes(32'(scan_q)));
  end

  logic push;
  logic [IW-1:0] push_id;
  always_comb begin
    push    = ooo_q ? st_done : scan_done;
    push_id = ooo_q ? st_idx[IW-1:0] : scan_q;
  end

  assign chunk_valid = (rd_q != wr_q);
  assign chunk_id    = PTR_W'(fifo_q[rd_q[AW-1:0]]);
  assign chunk_size  = (32'(fifo_q[rd_q[AW-1:0]]) == total_q - 1) ? last_size_q : 16'(SLOT_BYTES);
  assign chunk_last  = (sent_q + 1 == total_q);
  assign init_busy   = init_q;
  assign hol_wait    = !ooo_q && (done_q > 32'(scan_q)) && !scan_done;

  always_ff @(posedge clk) begin
    // a chunk queued in OoO mode keeps a zero count; in order, the scan
    // zeroes the count as it queues the chunk
    if (init_q)        ctr_q[init_idx_q[AW-1:0]]       <= '0;
    else if (st_valid) ctr_q[st_idx[AW-1:0]]   <= (ooo_q && st_done) ? '0 : st_new;
    if (scan_done)     ctr_q[scan_q[AW-1:0]]           <= '0;
    if (push)          fifo_q[wr_q[AW-1:0]]            <= push_id;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      init_q      <= 1'b1;
      init_idx_q  <= '0;
      ooo_q       <= 1'b1;
      total_q     <= '0;
      last_size_q <= '0;
      wr_q        <= '0;
      rd_q        <= '0;
      scan_q      <= '0;
      done_q      <= '0;
      sent_q      <= '0;
    end else if (init_q) begin
      init_idx_q <= init_idx_q + 1'b1;
      if (32'(init_idx_q) == MAX_CHUNKS - 1) init_q <= 1'b0;
    end else if (start) begin
      ooo_q       <= ooo_en;
      total_q     <= (result_bytes + SLOT_BYTES - 1) >> SH;
      last_size_q <= (result_bytes[SH-1:0] == '0) ? 16'(SLOT_BYTES) : 16'(result_bytes[SH-1:0]);
      wr_q        <= '0;
      rd_q        <= '0;
      scan_q      <= '0;
      done_q      <= '0;
      sent_q      <= '0;
    end else begin
      if (push) wr_q <= wr_q + 1'b1;
      if (scan_done) scan_q <= scan_q + 1'b1;
      if (st_done) done_q <= done_q + 1;
      if (chunk_valid && chunk_ready) begin
        rd_q   <= rd_q + 1'b1;
        sent_q <= sent_q + 1;
      end
    end
  end

  // A store must stay inside the result region and inside one slot.
  a_idle_in_init: assert property (@(posedge clk) disable iff (!rst_n)
    init_q |-> !st_valid && !start);
  a_start_after_done: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> (sent_q == total_q));
  a_store_in_region: assert property (@(posedge clk) disable iff (!rst_n)
    st_valid |-> (st_idx < total_q) && (32'(st_offset[SH-1:0]) + 32'(st_bytes) <= SLOT_BYTES));
  a_no_overfill: assert property (@(posedge clk) disable iff (!rst_n)
    st_valid |-> (st_new <= chunk_bytes(st_idx)));

endmodule
