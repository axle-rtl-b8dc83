// tb_fc_sender: self-checking test of fc_sender.
//
// While the output is stalled, three metadata-head and two payload-head
// updates arrive: only the newest of each must be sent, metadata first,
// then payload. With both kinds pending continuously the kinds must
// alternate. A random phase checks that after the requests stop, the last
// value sent for each kind is the last value requested.
module tb_fc_sender;
  import axle_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic m_req, p_req, fc_valid, fc_ready;
  ptr_t m_ptr, p_ptr, fc_ptr;
  fc_kind_e fc_kind;

  fc_sender dut (.*);

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

  fc_kind_e sk[$];
  int sp[$];
  always @(posedge clk) if (rst_n && fc_valid && fc_ready) begin sk.push_back(fc_kind); sp.push_back(int'(fc_ptr)); end

  task automatic req(bit m, int mv, bit p, int pv);
    @(negedge clk);
    m_req = m; m_ptr = ptr_t'(mv); p_req = p; p_ptr = ptr_t'(pv);
    @(negedge clk);
    m_req = 0; p_req = 0;
  endtask

  initial begin
    int last_m, last_p, got_m, got_p;
    m_req = 0; p_req = 0; m_ptr = 0; p_ptr = 0; fc_ready = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    req(1, 3, 0, 0); req(1, 5, 1, 2); req(1, 7, 0, 0); req(0, 0, 1, 9);
    check(fc_valid, "request pending while stalled");
    fc_ready = 1;
    repeat (4) @(negedge clk);
    check(sk.size() == 2, $sformatf("%0d stores after coalescing, expected 2", sk.size()));
    if (sk.size() == 2) begin
      check(sk[0] == FC_M_HEAD && sp[0] == 7, "metadata head 7 sent first");
      check(sk[1] == FC_P_HEAD && sp[1] == 9, "payload head 9 sent second");
    end
    // alternation with both kinds always pending
    sk.delete(); sp.delete();
    fork
      for (int k = 0; k < 8; k++) begin
        @(negedge clk); m_req = 1; m_ptr = ptr_t'(k); p_req = 1; p_ptr = ptr_t'(100 + k);
      end
    join
    @(negedge clk); m_req = 0; p_req = 0;
    repeat (4) @(negedge clk);
    for (int k = 1; k < sk.size(); k++) check(sk[k] != sk[k-1], "kinds alternate");
    // random phase
    last_m = 7; last_p = 9;
    for (int k = 0; k < 300; k++) begin
      @(negedge clk);
      fc_ready = ($urandom_range(0, 2) != 0);
      m_req = ($urandom_range(0, 3) == 0); m_ptr = ptr_t'($urandom_range(0, 1000));
      p_req = ($urandom_range(0, 3) == 0); p_ptr = ptr_t'($urandom_range(0, 1000));
      if (m_req) last_m = int'(m_ptr);
      if (p_req) last_p = int'(p_ptr);
    end
    @(negedge clk); m_req = 0; p_req = 0; fc_ready = 1;
    repeat (5) @(negedge clk);
    check(!fc_valid, "nothing left pending");
    got_m = -1; got_p = -1;
    foreach (sk[k]) if (sk[k] == FC_M_HEAD) got_m = sp[k]; else got_p = sp[k];
    check(got_m == last_m && got_p == last_p, "newest values were the last sent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
