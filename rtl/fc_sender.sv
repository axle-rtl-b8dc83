// fc_sender: issues the host's flow-control stores toward the CCM.
//
// Two sources report new ring heads: the polling routine (metadata head,
// m_req/m_ptr) and the gap-aware payload tracker (payload head,
// p_req/p_ptr). Each source has one pending register; a new request
// overwrites it, because only the newest head matters and an older one is
// never unsafe for the CCM (it only makes the CCM more careful). The output
// is one CXL.mem store at a time (fc_valid/fc_ready, fc_kind, fc_ptr);
// when both kinds are pending they alternate.
//
// From the paper: flow control as CXL.mem stores carrying the updated
// payload and metadata head indexes, and the safety of a stale head.
// Chosen here: coalescing and the alternating priority.
module fc_sender
  import axle_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     m_req,
  input  ptr_t     m_ptr,
  input  logic     p_req,
  input  ptr_t     p_ptr,
  output logic     fc_valid,
  input  logic     fc_ready,
  output fc_kind_e fc_kind,
  output ptr_t     fc_ptr
);
  logic m_pend_q, p_pend_q, last_m_q;
  ptr_t m_val_q, p_val_q;

  logic pick_m;
  assign pick_m   = m_pend_q && (!p_pend_q || !last_m_q);
  assign fc_valid = m_pend_q || p_pend_q;
  assign fc_kind  = pick_m ? FC_M_HEAD : FC_P_HEAD;
  assign fc_ptr   = pick_m ? m_val_q : p_val_q;

  logic send_m, send_p;
  assign send_m = fc_valid && fc_ready && pick_m;
  assign send_p = fc_valid && fc_ready && !pick_m;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      m_pend_q <= 1'b0;
      p_pend_q <= 1'b0;
      last_m_q <= 1'b0;
      m_val_q  <= '0;
      p_val_q  <= '0;
    end else begin
      if (m_req)       begin m_pend_q <= 1'b1; m_val_q <= m_ptr; end
      else if (send_m) m_pend_q <= 1'b0;
      if (p_req)       begin p_pend_q <= 1'b1; p_val_q <= p_ptr; end
      else if (send_p) p_pend_q <= 1'b0;
      if (fc_valid && fc_ready) last_m_q <= pick_m;
    end
  end

  a_stable: assert property (@(posedge clk) disable iff (!rst_n)
    fc_valid && !fc_ready && !m_req && !p_req |=> fc_valid && $stable(fc_kind) && $stable(fc_ptr));

endmodule
