// tb_payload_head_tracker: self-checking test of payload_head_tracker.
//
// Ring of 8 slots. After the reset sweep: consuming slot 1 first is a gap
// and leaves the head at 0 (the example of the paper); consuming slot 0
// then moves the head to 2 and raises one flow-control
// request with head 2. Then random consumption orders over many laps of the
// ring are checked against a reference: the head always equals the first
// unconsumed position, every stop of the head produces one request with the
// current head, and gap pulses exactly when a non-head slot is consumed.
module tb_payload_head_tracker;
  import axle_pkg::*;
  localparam int unsigned CAPN = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic consume, fc_req, gap, init_busy;
  logic [SLOT_W-1:0] consume_slot;
  ptr_t head, fc_ptr;

  payload_head_tracker #(.CAP(CAPN)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int fc_seen[$];
  always @(posedge clk) if (rst_n && fc_req) fc_seen.push_back(int'(fc_ptr));

  int ref_head = 0;       // ring position
  bit done [CAPN];

  task automatic do_consume(int s);
    bit exp_gap;
    @(negedge clk);
    consume = 1'b1; consume_slot = SLOT_W'(s);
    exp_gap = (s != ref_head % CAPN);
    #0 check(gap == exp_gap, $sformatf("gap flag for slot %0d", s));
    @(negedge clk);
    consume = 1'b0;
    done[s] = 1;
    settle();
  endtask

  task automatic settle();
    repeat (CAPN + 3) @(negedge clk);
    while (done[ref_head % CAPN]) begin
      done[ref_head % CAPN] = 0;
      ref_head = (ref_head + 1) % (2 * CAPN);
    end
    check(int'(head) == ref_head, $sformatf("head %0d expected %0d", head, ref_head));
  endtask

  initial begin
    consume = 0; consume_slot = 0;
    for (int i = 0; i < CAPN; i++) done[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    while (init_busy) @(negedge clk);
    do_consume(1);
    settle();
    check(head == '0 && fc_seen.size() == 0, "head stays at 0 behind the gap");
    do_consume(0);
    check(fc_seen.size() == 1 && fc_seen[0] == 2, "one flow-control request carrying head 2");
    // random orders, windows of up to 8 published slots, many laps
    for (int w = 0; w < 40; w++) begin
      automatic int n = $urandom_range(1, CAPN);
      automatic int order[$];
      fc_seen.delete();
      for (int i = 0; i < n; i++) order.push_back((ref_head + i) % CAPN);
      order.shuffle();
      foreach (order[i]) do_consume(order[i]);
      settle();
      check(fc_seen.size() >= 1 && fc_seen[fc_seen.size()-1] == ref_head,
            "last flow-control request carries the final head");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
