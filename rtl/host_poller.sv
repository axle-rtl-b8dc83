// host_poller: the host's local polling routine.
//
// A timer expires every PF_CYCLES host cycles (the polling interval PF).
// On expiry the routine reads the metadata tail word of the local DMA region
// (a local read, not a read over the CXL link). If the tail differs from its
// metadata head, it copies every ready metadata slot, from head to tail - 1,
// into the ready pool: read the slot (one cycle), push it into the pool,
// advance the head. It pauses while the pool is full. When it has caught up
// with the tail it sampled, it asks for one flow-control store carrying the
// new metadata head (fc_req/fc_ptr) and waits for the next expiry. The
// payload ring is not touched: only metadata moves here, payloads are read
// later by the host tasks.
//
// polls counts timer expiries, notify pulses when an expiry found new
// metadata.
//
// From the paper: polling one local word every PF, moving head..tail-1 into
// the ready pool, flow control after consumption. Chosen here: the rate of
// two cycles per slot and the pause on a full pool.
module host_poller
  import axle_pkg::*;
#(
  parameter int unsigned CAP       = 50000,
  parameter int unsigned PF_CYCLES = 150
) (
  input  logic              clk,
  input  logic              rst_n,
  input  ptr_t              m_tail,
  output logic              meta_rd_en,
  output logic [SLOT_W-1:0] meta_rd_slot,
  input  meta_t             meta_rd_data,
  output logic              pool_push,
  output meta_t             pool_data,
  input  logic              pool_full,
  output ptr_t              m_head,
  output logic              fc_req,
  output ptr_t              fc_ptr,
  output logic              notify,
  output logic [31:0]       polls
);
  localparam int unsigned TW = (PF_CYCLES > 1) ? $clog2(PF_CYCLES + 1) : 1;

  typedef enum logic [1:0] {WAIT, FETCH, PUSH, REPORT} state_e;

  state_e        state_q;
  logic [TW-1:0] timer_q;
  ptr_t          head_q, snap_q;
  logic [31:0]   polls_q;

  assign meta_rd_en   = (state_q == FETCH) && !pool_full;
  assign meta_rd_slot = ptr_slot(head_q, CAP);
  assign pool_push    = (state_q == PUSH);
  assign pool_data    = meta_rd_data;
  assign m_head       = head_q;
  assign fc_req       = (state_q == REPORT);
  assign fc_ptr       = head_q;
  assign polls        = polls_q;

  logic expire;
  assign expire = (state_q == WAIT) && (timer_q <= TW'(1));
  assign notify = expire && (m_tail != head_q);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q <= WAIT;
      timer_q <= TW'(PF_CYCLES);
      head_q  <= '0;
      snap_q  <= '0;
      polls_q <= '0;
    end else begin
      unique case (state_q)
        WAIT: begin
          if (expire) begin
            timer_q <= TW'(PF_CYCLES);
            polls_q <= polls_q + 1;
            if (m_tail != head_q) begin
              snap_q  <= m_tail;
              state_q <= FETCH;
            end
          end else timer_q <= timer_q - 1'b1;
        end
        FETCH: if (!pool_full) state_q <= PUSH;
        PUSH: begin
          head_q  <= ptr_inc(head_q, CAP);
          state_q <= (ptr_inc(head_q, CAP) == snap_q) ? REPORT : FETCH;
        end
        REPORT: state_q <= WAIT;
        default: state_q <= WAIT;
      endcase
      // the polling timer keeps running while the routine works
      if (state_q != WAIT) timer_q <= (timer_q > TW'(1)) ? timer_q - 1'b1 : TW'(1);
    end
  end

  a_push_room: assert property (@(posedge clk) disable iff (!rst_n) pool_push |-> !pool_full);

endmodule
