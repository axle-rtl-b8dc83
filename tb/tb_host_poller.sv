// tb_host_poller: self-checking test of host_poller.
//
// Ring of 8 slots, polling interval 10 cycles. A metadata ring model in the
// testbench answers reads one cycle late. The testbench moves the metadata
// tail in steps (including across the lap boundary) and checks that:
// expiries come every 10 cycles; an expiry that finds a new tail raises
// notify, and the records pushed into the pool are exactly slots head..tail-1
// in order; the routine pauses while the pool reports full; after catching
// up it raises one flow-control request carrying the new head; and nothing
// happens while the tail stays put.
module tb_host_poller;
  import axle_pkg::*;
  localparam int unsigned CAPN = 8, PF = 10;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  ptr_t m_tail, m_head, fc_ptr;
  logic meta_rd_en, pool_push, pool_full, fc_req, notify;
  logic [SLOT_W-1:0] meta_rd_slot;
  meta_t meta_rd_data, pool_data;
  logic [31:0] polls;

  host_poller #(.CAP(CAPN), .PF_CYCLES(PF)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  meta_t ring [CAPN];
  always @(posedge clk) if (meta_rd_en) meta_rd_data <= ring[meta_rd_slot];

  int pushed[$], fcs[$], notif_cyc[$], poll_cyc[$], cyc = 0;
  logic [31:0] polls_d = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (pool_push) begin
        check(!pool_full, "no push while the pool is full");
        pushed.push_back(int'(pool_data.p_slot));
      end
      if (fc_req) fcs.push_back(int'(fc_ptr));
      if (notify) notif_cyc.push_back(cyc);
      if (polls != polls_d) poll_cyc.push_back(cyc);
      polls_d <= polls;
    end
  end

  task automatic publish(int from, int to, bit block_pool);
    int exp[$];
    pushed.delete(); fcs.delete();
    for (int p = from; p != to; p = (p + 1) % (2 * CAPN)) begin
      ring[p % CAPN].p_slot = 16'(p % CAPN);
      ring[p % CAPN].data_offset = 32'(p * 64);
      ring[p % CAPN].data_size = 16'd32;
      exp.push_back(p % CAPN);
    end
    @(negedge clk);
    m_tail = ptr_t'(to);
    if (block_pool) begin
      pool_full = 1'b1;
      repeat (3 * PF) @(negedge clk);
      check(pushed.size() == 0, "nothing pushed while the pool is full");
      pool_full = 1'b0;
    end
    repeat (PF + 4 * CAPN + 5) @(negedge clk);
    check(pushed.size() == exp.size(), $sformatf("%0d records pushed, expected %0d", pushed.size(), exp.size()));
    foreach (exp[i]) if (i < pushed.size()) check(pushed[i] == exp[i], $sformatf("record %0d slot", i));
    check(fcs.size() == 1 && fcs[0] == to, "one flow-control request with the new head");
    check(int'(m_head) == to, "metadata head caught up with the tail");
  endtask

  initial begin
    m_tail = 0; pool_full = 0;
    for (int i = 0; i < CAPN; i++) ring[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (4 * PF) @(negedge clk);
    check(notif_cyc.size() == 0, "no notification while the tail stays at the head");
    check(poll_cyc.size() >= 3, "polling timer running");
    for (int k = 1; k < poll_cyc.size(); k++)
      check(poll_cyc[k] - poll_cyc[k-1] == PF, $sformatf("polling interval %0d", poll_cyc[k] - poll_cyc[k-1]));
    publish(0, 3, 0);
    publish(3, 8, 1);
    publish(8, 15, 0);
    publish(15, 2, 0);   // crosses the lap boundary 15 -> 0
    check(notif_cyc.size() == 4, $sformatf("%0d notifications, expected 4", notif_cyc.size()));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
