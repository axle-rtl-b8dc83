// dma_executor: the CCM-side back-streaming engine.
//
// It takes completed payloads (result chunks) from the payload former and
// streams them into the two ring buffers of the host DMA region with CXL.io
// posted writes. It keeps its own copy of the four ring indexes: the tails,
// which only it advances, and the heads, which the host reports with
// flow-control stores (fc_*). A stale head only makes the engine more
// careful, so the flow-control stores never have to be waited for.
//
// Three parts work side by side:
//   admission  accepts a payload while both rings have a free slot (by the
//              local head), fewer than sf_slots payloads are pending for the
//              batch being formed, and the payload buffer has room. Each
//              accepted payload is given the next slot of both rings and its
//              {offset, size} joins the payload buffer. No credit while a
//              payload is offered = back-pressure (bp_wait).
//   trigger    when sf_slots payloads are pending (the streaming factor SF,
//              in slots) or the kernel's last payload was taken, the pending
//              payloads become one DMA request (a batch). The request is
//              queued with a due time PREP_CYCLES later: the DMA preparation
//              latency. Up to MAX_PREP_REQS requests are prepared at once,
//              so preparation is a latency per request, not a period during
//              which nothing else moves.
//   issue      takes the oldest request once it is due and writes it:
//              READ/PAY   for each payload: read its slot of result data from
//                         device memory, write it to its payload slot
//                         (DMA_PAYLOAD);
//              PTAIL      one payload-tail update for the batch (DMA_P_TAIL);
//              META/MTAIL for each payload: the metadata record {offset,
//                         size, payload slot} (DMA_META), then a metadata-
//                         tail update (DMA_M_TAIL).
// Requests are issued strictly in order on one in-order channel, which gives
// the ordering the paper requires: payload data before the payload tail,
// payloads before their metadata, each metadata record before the metadata
// tail that publishes it. Tails only ever name slots already written.
//
// Interfaces: device memory read (rd_req valid/ready, rd_rsp valid, any
// latency, one outstanding), DMA write (dma valid/ready), flow-control input
// (fc_valid, one store per cycle, always accepted). Timing: a batch's first
// read is issued no earlier than PREP_CYCLES + 1 cycles after the cycle in
// which it was triggered, and no earlier than the end of the previous batch.
//
// From the paper: slot size, streaming factor, DMA preparation latency per
// request (a one-way control-plane latency), per-batch payload tail and
// per-payload metadata tail updates, credit check against a possibly stale
// head, the metadata fields. Chosen here: the index encoding (axle_pkg), the
// flush of a short final batch, writes that name a ring and index instead of
// a host physical address, the number of requests in preparation at once,
// and a payload buffer of MAX_SF_SLOTS entries shared by all requests: with
// the default of 50000 a whole kernel result can be one batch (the paper's
// largest streaming factor, 100% of the result). sf_slots must stay within
// CAP and MAX_SF_SLOTS, because a batch is published only as a whole.
module dma_executor
  import axle_pkg::*;
#(
  parameter int unsigned SLOT_BYTES    = 32,
  parameter int unsigned CAP           = 50000,
  parameter int unsigned MAX_SF_SLOTS  = 50000,
  parameter int unsigned PREP_CYCLES   = 1000,
  parameter int unsigned MAX_PREP_REQS = 128
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [15:0]             sf_slots,       // streaming factor, in slots (1..MAX_SF_SLOTS, <= CAP)
  // payloads from the payload former
  input  logic                    chunk_valid,
  output logic                    chunk_ready,
  input  ptr_t                    chunk_id,
  input  logic [15:0]             chunk_size,
  input  logic                    chunk_last,
  // device memory read
  output logic                    rd_req_valid,
  input  logic                    rd_req_ready,
  output logic [31:0]             rd_req_offset,
  input  logic                    rd_rsp_valid,
  input  logic [SLOT_BYTES*8-1:0] rd_rsp_data,
  // CXL.io DMA posted writes
  output logic                    dma_valid,
  input  logic                    dma_ready,
  output dma_kind_e               dma_kind,
  output ptr_t                    dma_ptr,
  output logic [SLOT_BYTES*8-1:0] dma_data,
  // CXL.mem flow-control stores from the host
  input  logic                    fc_valid,
  input  fc_kind_e                fc_kind,
  input  ptr_t                    fc_ptr,
  // status
  output logic                    bp_wait,        // payload offered, no ring credit
  output logic                    busy,
  output ptr_t                    p_tail,
  output ptr_t                    m_tail
);
  localparam int unsigned BW = $clog2(MAX_SF_SLOTS + 1);               // payload counts
  localparam int unsigned BI = (MAX_SF_SLOTS > 1) ? $clog2(MAX_SF_SLOTS) : 1;   // buffer index
  localparam int unsigned QW = $clog2(MAX_PREP_REQS + 1);              // request counts
  localparam int unsigned QI = (MAX_PREP_REQS > 1) ? $clog2(MAX_PREP_REQS) : 1; // request index

  typedef enum logic [2:0] {IDLE, READ, WAITRD, PAY, PTAIL, META, MTAIL} state_e;

  typedef struct packed {
    logic [31:0] offset;
    logic [15:0] size;
  } batch_t;

  typedef struct packed {
    logic [BW-1:0] count;   // payloads in the request
    logic [31:0]   due;     // cycle at which its preparation ends
  } req_t;

  // wrap-around of the payload buffer and request queue indexes
  function automatic logic [BI-1:0] bnext(logic [BI-1:0] i);
    return (32'(i) == MAX_SF_SLOTS - 1) ? '0 : i + 1'b1;
  endfunction
  function automatic logic [QI-1:0] qnext(logic [QI-1:0] i);
    return (32'(i) == MAX_PREP_REQS - 1) ? '0 : i + 1'b1;
  endfunction

  // payload buffer (FIFO of every admitted, not yet published payload)
  batch_t         buf_q [MAX_SF_SLOTS];
  logic [BI-1:0]  bwr_q, bbase_q, brd_q;   // write, oldest, and read index
  logic [BW-1:0]  bcnt_q;                  // entries in use
  // request queue
  req_t           req_q [MAX_PREP_REQS];
  logic [QI-1:0]  qwr_q, qrd_q;
  logic [QW-1:0]  qcnt_q;
  // batch being formed
  logic [BW-1:0]  n_q;
  logic           last_q;
  // issue engine
  state_e         state_q;
  logic [BW-1:0]  cnt_q, i_q;
  logic [31:0]    now_q;
  ptr_t           p_head_q, m_head_q;
  ptr_t           p_tail_q, m_tail_q;   // published tails
  ptr_t           p_alloc_q;            // next payload slot to hand out
  ptr_t           m_alloc_q;            // next metadata slot to hand out
  ptr_t           p_wr_q, m_wr_q;       // slot being written
  logic [SLOT_BYTES*8-1:0] data_q;

  logic credit;
  assign credit = (ptr_occ(p_alloc_q, p_head_q, CAP) < (PTR_W+1)'(CAP)) &&
                  (ptr_occ(m_alloc_q, m_head_q, CAP) < (PTR_W+1)'(CAP));

  logic take, trigger, due, pop;
  assign chunk_ready = credit && (n_q < BW'(sf_slots)) && !last_q && (32'(bcnt_q) < MAX_SF_SLOTS);
  assign take        = chunk_valid && chunk_ready;
  assign bp_wait     = chunk_valid && !credit;
  // take and trigger exclude each other: a trigger needs n_q >= sf_slots or
  // last_q, both of which block a take
  assign trigger     = (n_q != '0) && ((n_q >= BW'(sf_slots)) || last_q) &&
                       (32'(qcnt_q) < MAX_PREP_REQS);
  logic signed [31:0] lag;                 // now minus due time, wrap-safe
  assign lag         = signed'(now_q - req_q[qrd_q].due);
  assign due         = (qcnt_q != '0) && (lag >= 0);
  assign pop         = (state_q == IDLE) && due;
  assign busy        = (state_q != IDLE) || (n_q != '0) || (qcnt_q != '0);
  assign p_tail      = p_tail_q;
  assign m_tail      = m_tail_q;

  assign rd_req_valid  = (state_q == READ);
  assign rd_req_offset = buf_q[brd_q].offset;

  meta_t meta;
  always_comb begin
    meta.data_offset = buf_q[brd_q].offset;
    meta.data_size   = buf_q[brd_q].size;
    meta.p_slot      = ptr_slot(p_wr_q, CAP);
  end

  always_comb begin
    dma_valid = 1'b0;
    dma_kind  = DMA_PAYLOAD;
    dma_ptr   = '0;
    dma_data  = '0;
    unique case (state_q)
      PAY:   begin dma_valid = 1'b1; dma_kind = DMA_PAYLOAD; dma_ptr = p_wr_q; dma_data = data_q; end
      PTAIL: begin dma_valid = 1'b1; dma_kind = DMA_P_TAIL;  dma_ptr = p_wr_q; end
      META:  begin dma_valid = 1'b1; dma_kind = DMA_META;    dma_ptr = m_wr_q;
                   dma_data = (SLOT_BYTES*8)'(meta); end
      MTAIL: begin dma_valid = 1'b1; dma_kind = DMA_M_TAIL;  dma_ptr = ptr_inc(m_wr_q, CAP); end
      default: ;
    endcase
  end

  // storage without reset
  always_ff @(posedge clk) begin
    if (take)    buf_q[bwr_q] <= '{offset: 32'(chunk_id) * SLOT_BYTES, size: chunk_size};
    if (trigger) req_q[qwr_q] <= '{count: n_q, due: now_q + PREP_CYCLES};
    if (state_q == WAITRD && rd_rsp_valid) data_q <= rd_rsp_data;
  end

  logic batch_done;
  assign batch_done = (state_q == MTAIL) && dma_ready && (i_q + 1'b1 == cnt_q);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q   <= IDLE;
      now_q     <= '0;
      bwr_q     <= '0;
      bbase_q   <= '0;
      brd_q     <= '0;
      bcnt_q    <= '0;
      qwr_q     <= '0;
      qrd_q     <= '0;
      qcnt_q    <= '0;
      n_q       <= '0;
      last_q    <= 1'b0;
      cnt_q     <= '0;
      i_q       <= '0;
      p_head_q  <= '0;
      m_head_q  <= '0;
      p_tail_q  <= '0;
      m_tail_q  <= '0;
      p_alloc_q <= '0;
      m_alloc_q <= '0;
      p_wr_q    <= '0;
      m_wr_q    <= '0;
    end else begin
      now_q <= now_q + 1'b1;
      if (fc_valid) begin
        if (fc_kind == FC_P_HEAD) p_head_q <= fc_ptr;
        else                      m_head_q <= fc_ptr;
      end

      // admission and trigger
      if (take) begin
        n_q       <= n_q + 1'b1;
        bwr_q     <= bnext(bwr_q);
        p_alloc_q <= ptr_inc(p_alloc_q, CAP);
        m_alloc_q <= ptr_inc(m_alloc_q, CAP);
        if (chunk_last) last_q <= 1'b1;
      end
      if (trigger) begin
        n_q    <= '0;
        last_q <= 1'b0;
        qwr_q  <= qnext(qwr_q);
      end
      qcnt_q <= qcnt_q + QW'(trigger) - QW'(pop);
      bcnt_q <= bcnt_q + BW'(take) - (batch_done ? cnt_q : '0);

      // issue
      unique case (state_q)
        IDLE: if (due) begin
          cnt_q   <= req_q[qrd_q].count;
          qrd_q   <= qnext(qrd_q);
          i_q     <= '0;
          brd_q   <= bbase_q;
          p_wr_q  <= p_tail_q;
          state_q <= READ;
        end
        READ:   if (rd_req_ready) state_q <= WAITRD;
        WAITRD: if (rd_rsp_valid) state_q <= PAY;
        PAY: if (dma_ready) begin
          p_wr_q <= ptr_inc(p_wr_q, CAP);
          if (i_q + 1'b1 == cnt_q) state_q <= PTAIL;
          else begin
            i_q     <= i_q + 1'b1;
            brd_q   <= bnext(brd_q);
            state_q <= READ;
          end
        end
        PTAIL: if (dma_ready) begin
          p_tail_q <= p_wr_q;
          p_wr_q   <= p_tail_q;   // rewind: metadata names the same slots
          m_wr_q   <= m_tail_q;
          brd_q    <= bbase_q;
          i_q      <= '0;
          state_q  <= META;
        end
        META: if (dma_ready) state_q <= MTAIL;
        MTAIL: if (dma_ready) begin
          m_tail_q <= ptr_inc(m_wr_q, CAP);
          m_wr_q   <= ptr_inc(m_wr_q, CAP);
          p_wr_q   <= ptr_inc(p_wr_q, CAP);
          brd_q    <= bnext(brd_q);
          if (batch_done) begin
            bbase_q <= bnext(brd_q);
            state_q <= IDLE;
          end else begin
            i_q     <= i_q + 1'b1;
            state_q <= META;
          end
        end
        default: state_q <= IDLE;
      endcase
    end
  end

  // The host ring can never be overrun: slots handed out stay within CAP
  // slots of the (possibly stale) heads.
  a_p_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    ptr_occ(p_alloc_q, p_head_q, CAP) <= (PTR_W+1)'(CAP));
  a_m_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    ptr_occ(m_alloc_q, m_head_q, CAP) <= (PTR_W+1)'(CAP));
  a_sf_range: assert property (@(posedge clk) disable iff (!rst_n)
    (sf_slots != '0) && (32'(sf_slots) <= MAX_SF_SLOTS) && (32'(sf_slots) <= CAP));
  a_dma_stable: assert property (@(posedge clk) disable iff (!rst_n)
    dma_valid && !dma_ready |=> dma_valid && $stable(dma_kind) && $stable(dma_ptr));
  // a tail never publishes a slot that has not been handed out
  a_tail_behind_alloc: assert property (@(posedge clk) disable iff (!rst_n)
    ptr_occ(p_alloc_q, p_tail_q, CAP) <= (PTR_W+1)'(CAP));

endmodule
