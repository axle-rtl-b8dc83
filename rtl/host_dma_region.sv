// host_dma_region: the host-local DMA region that receives back-streamed
// results.
//
// It holds the two ring buffers of the protocol, each CAP slots:
//   * payload ring: SLOT_BYTES of result data per slot;
//   * metadata ring: one meta_t record per slot {data offset, data size,
//     payload slot};
// and the two tail index words the CCM publishes (p_tail, m_tail). All four
// are written only by CXL.io posted writes from the CCM (dma_*), which are
// always accepted, one per cycle. The host reads the metadata ring (polling
// routine) and the payload ring (host tasks) through two read ports with
// one cycle of latency. The region is pinned and not cached in the paper,
// so a read always returns what the last DMA write left there.
//
// From the paper: two separate rings for payload and metadata, a tail word
// per ring polled locally, the 32-byte slot and 50000-slot capacity. Chosen
// here: on-chip arrays stand in for the pinned host DRAM pages, and writes
// name a ring and a ring position instead of a physical address.
module host_dma_region
  import axle_pkg::*;
#(
  parameter int unsigned SLOT_BYTES = 32,
  parameter int unsigned CAP        = 50000
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // CXL.io posted writes from the CCM
  input  logic                    dma_valid,
  input  dma_kind_e               dma_kind,
  input  ptr_t                    dma_ptr,
  input  logic [SLOT_BYTES*8-1:0] dma_data,
  // tail words
  output ptr_t                    p_tail,
  output ptr_t                    m_tail,
  // metadata ring read port
  input  logic                    meta_rd_en,
  input  logic [SLOT_W-1:0]       meta_rd_slot,
  output meta_t                   meta_rd_data,
  // payload ring read port
  input  logic                    pay_rd_en,
  input  logic [SLOT_W-1:0]       pay_rd_slot,
  output logic [SLOT_BYTES*8-1:0] pay_rd_data
);
  logic [SLOT_BYTES*8-1:0] pay_mem  [CAP];
  meta_t                   meta_mem [CAP];
  ptr_t                    p_tail_q, m_tail_q;

  logic [SLOT_W-1:0] wr_slot;
  assign wr_slot = ptr_slot(dma_ptr, CAP);

  always_ff @(posedge clk) begin
    if (dma_valid && dma_kind == DMA_PAYLOAD) pay_mem[wr_slot]  <= dma_data;
    if (dma_valid && dma_kind == DMA_META)    meta_mem[wr_slot] <= meta_t'(dma_data[META_W-1:0]);
    if (meta_rd_en) meta_rd_data <= meta_mem[meta_rd_slot];
    if (pay_rd_en)  pay_rd_data  <= pay_mem[pay_rd_slot];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      p_tail_q <= '0;
      m_tail_q <= '0;
    end else if (dma_valid) begin
      if (dma_kind == DMA_P_TAIL) p_tail_q <= dma_ptr;
      if (dma_kind == DMA_M_TAIL) m_tail_q <= dma_ptr;
    end
  end

  assign p_tail = p_tail_q;
  assign m_tail = m_tail_q;

  a_ptr_range: assert property (@(posedge clk) disable iff (!rst_n)
    dma_valid |-> 32'(dma_ptr) < 2*CAP);
  a_rd_range: assert property (@(posedge clk) disable iff (!rst_n)
    (meta_rd_en |-> 32'(meta_rd_slot) < CAP) and (pay_rd_en |-> 32'(pay_rd_slot) < CAP));

endmodule
