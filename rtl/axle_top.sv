// axle_top: the asynchronous back-streaming datapath, CCM side and host side.
//
// CCM side (clk_ccm): payload_former watches the result stores of the CCM
// uthreads and hands each completed slot-sized chunk to dma_executor, which
// waits for ring credit, batches payloads up to the streaming factor, reads
// their data from device memory and streams payloads, tail updates and
// metadata to the host as CXL.io posted writes (ccm_dma_*). Flow-control
// stores from the host arrive on ccm_fc_*.
//
// Host side (clk_host): host_dma_region receives the posted writes
// (host_dma_*). host_poller polls the local metadata tail every PF_CYCLES and
// moves new metadata into ready_pool. The host scheduler sees the pool
// (pool_valid, pool_entries), takes an entry (pool_pop/pool_pop_idx), reads
// its payload from the local region (pay_rd_*) and reports the slot done
// (consume/consume_slot). payload_head_tracker advances the payload head
// over the contiguous consumed slots; fc_sender turns both head updates into
// flow-control stores (host_fc_*).
//
// The CXL link itself (CXL.io for the posted writes, CXL.mem for the
// flow-control stores) lies outside this module: connect ccm_dma_* to
// host_dma_* and host_fc_* to ccm_fc_* through it. The two sides share no
// other signal, so each clock domain is self-contained. The device memory
// read port (mem_rd_*) and the uthread store port (st_*) connect to the CCM
// compute and memory that this datapath attaches to, and the kernel start
// (start, result_bytes, ooo_en, sf_slots) comes from the offload store the
// host sends.
//
// Parameter defaults are the paper's main configuration: 32-byte slots,
// 50000 slots per ring, 500 ns DMA preparation at 2 GHz, 50 ns polling at
// 3 GHz. MAX_CHUNKS and POOL_DEPTH are sizes chosen here. MAX_SF_SLOTS
// equals MAX_CHUNKS, so a whole kernel result can leave as one batch (the
// largest streaming factor the paper tries, 100% of the result); sf_slots
// must also stay within CAP, since a batch is published only as a whole.
module axle_top
  import axle_pkg::*;
#(
  parameter int unsigned SLOT_BYTES   = 32,
  parameter int unsigned CAP          = 50000,
  parameter int unsigned MAX_CHUNKS   = 50000,
  parameter int unsigned MAX_SF_SLOTS = 50000,
  parameter int unsigned PREP_CYCLES  = 1000,
  parameter int unsigned PF_CYCLES    = 150,
  parameter int unsigned POOL_DEPTH   = 64,
  parameter int unsigned MAX_PREP_REQS = 128
) (
  // ---------------- CCM side ----------------
  input  logic                    clk_ccm,
  input  logic                    rst_ccm_n,
  input  logic                    start,
  input  logic [31:0]             result_bytes,
  input  logic                    ooo_en,
  input  logic [15:0]             sf_slots,
  input  logic                    st_valid,
  input  logic [31:0]             st_offset,
  input  logic [7:0]              st_bytes,
  output logic                    mem_rd_valid,
  input  logic                    mem_rd_ready,
  output logic [31:0]             mem_rd_offset,
  input  logic                    mem_rsp_valid,
  input  logic [SLOT_BYTES*8-1:0] mem_rsp_data,
  output logic                    ccm_dma_valid,
  input  logic                    ccm_dma_ready,
  output dma_kind_e               ccm_dma_kind,
  output ptr_t                    ccm_dma_ptr,
  output logic [SLOT_BYTES*8-1:0] ccm_dma_data,
  input  logic                    ccm_fc_valid,
  input  fc_kind_e                ccm_fc_kind,
  input  ptr_t                    ccm_fc_ptr,
  output logic                    ccm_init_busy,
  output logic                    ccm_bp_wait,
  output logic                    ccm_hol_wait,
  output logic                    ccm_busy,
  output ptr_t                    ccm_p_tail,
  output ptr_t                    ccm_m_tail,
  // ---------------- host side ----------------
  input  logic                    clk_host,
  input  logic                    rst_host_n,
  input  logic                    host_dma_valid,
  input  dma_kind_e               host_dma_kind,
  input  ptr_t                    host_dma_ptr,
  input  logic [SLOT_BYTES*8-1:0] host_dma_data,
  output logic                    host_fc_valid,
  input  logic                    host_fc_ready,
  output fc_kind_e                host_fc_kind,
  output ptr_t                    host_fc_ptr,
  output logic [POOL_DEPTH-1:0]   pool_valid,
  output meta_t                   pool_entries [POOL_DEPTH],
  input  logic                    pool_pop,
  input  logic [$clog2(POOL_DEPTH)-1:0] pool_pop_idx,
  input  logic                    pay_rd_en,
  input  logic [SLOT_W-1:0]       pay_rd_slot,
  output logic [SLOT_BYTES*8-1:0] pay_rd_data,
  input  logic                    consume,
  input  logic [SLOT_W-1:0]       consume_slot,
  output logic                    host_notify,
  output logic                    host_gap,
  output logic [31:0]             host_polls,
  output ptr_t                    host_p_head,
  output ptr_t                    host_m_head,
  output logic                    host_init_busy,
  output logic [$clog2(POOL_DEPTH+1)-1:0] pool_count
);
  // ---------------- CCM side ----------------
  logic        chunk_valid, chunk_ready, chunk_last;
  ptr_t        chunk_id;
  logic [15:0] chunk_size;

  payload_former #(.SLOT_BYTES(SLOT_BYTES), .MAX_CHUNKS(MAX_CHUNKS)) u_former (
    .clk(clk_ccm), .rst_n(rst_ccm_n),
    .start, .result_bytes, .ooo_en,
    .st_valid, .st_offset, .st_bytes,
    .chunk_valid, .chunk_ready, .chunk_id, .chunk_size, .chunk_last,
    .hol_wait(ccm_hol_wait), .init_busy(ccm_init_busy)
  );

  dma_executor #(.SLOT_BYTES(SLOT_BYTES), .CAP(CAP), .MAX_SF_SLOTS(MAX_SF_SLOTS),
                 .PREP_CYCLES(PREP_CYCLES), .MAX_PREP_REQS(MAX_PREP_REQS)) u_exec (
    .clk(clk_ccm), .rst_n(rst_ccm_n), .sf_slots,
    .chunk_valid, .chunk_ready, .chunk_id, .chunk_size, .chunk_last,
    .rd_req_valid(mem_rd_valid), .rd_req_ready(mem_rd_ready), .rd_req_offset(mem_rd_offset),
    .rd_rsp_valid(mem_rsp_valid), .rd_rsp_data(mem_rsp_data),
    .dma_valid(ccm_dma_valid), .dma_ready(ccm_dma_ready), .dma_kind(ccm_dma_kind),
    .dma_ptr(ccm_dma_ptr), .dma_data(ccm_dma_data),
    .fc_valid(ccm_fc_valid), .fc_kind(ccm_fc_kind), .fc_ptr(ccm_fc_ptr),
    .bp_wait(ccm_bp_wait), .busy(ccm_busy), .p_tail(ccm_p_tail), .m_tail(ccm_m_tail)
  );

  // ---------------- host side ----------------
  ptr_t  p_tail_word, m_tail_word;
  logic  meta_rd_en;
  logic [SLOT_W-1:0] meta_rd_slot;
  meta_t meta_rd_data;
  logic  pool_push, pool_full;
  meta_t pool_data;
  logic  m_fc_req, p_fc_req;
  ptr_t  m_fc_ptr, p_fc_ptr;

  host_dma_region #(.SLOT_BYTES(SLOT_BYTES), .CAP(CAP)) u_region (
    .clk(clk_host), .rst_n(rst_host_n),
    .dma_valid(host_dma_valid), .dma_kind(host_dma_kind), .dma_ptr(host_dma_ptr),
    .dma_data(host_dma_data),
    .p_tail(p_tail_word), .m_tail(m_tail_word),
    .meta_rd_en, .meta_rd_slot, .meta_rd_data,
    .pay_rd_en, .pay_rd_slot, .pay_rd_data
  );

  host_poller #(.CAP(CAP), .PF_CYCLES(PF_CYCLES)) u_poller (
    .clk(clk_host), .rst_n(rst_host_n),
    .m_tail(m_tail_word),
    .meta_rd_en, .meta_rd_slot, .meta_rd_data,
    .pool_push, .pool_data, .pool_full,
    .m_head(host_m_head), .fc_req(m_fc_req), .fc_ptr(m_fc_ptr),
    .notify(host_notify), .polls(host_polls)
  );

  ready_pool #(.DEPTH(POOL_DEPTH)) u_pool (
    .clk(clk_host), .rst_n(rst_host_n),
    .push(pool_push), .push_data(pool_data), .full(pool_full),
    .entry_valid(pool_valid), .entries(pool_entries), .count(pool_count),
    .pop(pool_pop), .pop_idx(pool_pop_idx)
  );

  payload_head_tracker #(.CAP(CAP)) u_phead (
    .clk(clk_host), .rst_n(rst_host_n),
    .consume, .consume_slot,
    .head(host_p_head), .fc_req(p_fc_req), .fc_ptr(p_fc_ptr), .gap(host_gap),
    .init_busy(host_init_busy)
  );

  fc_sender u_fc (
    .clk(clk_host), .rst_n(rst_host_n),
    .m_req(m_fc_req), .m_ptr(m_fc_ptr),
    .p_req(p_fc_req), .p_ptr(p_fc_ptr),
    .fc_valid(host_fc_valid), .fc_ready(host_fc_ready),
    .fc_kind(host_fc_kind), .fc_ptr(host_fc_ptr)
  );

  // The host never consumes a payload slot the CCM has not published.
  a_consume_published: assert property (@(posedge clk_host) disable iff (!rst_host_n)
    consume |-> ptr_occ(p_tail_word, host_p_head, CAP) != '0);

endmodule
