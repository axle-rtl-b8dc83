// tb_ready_pool: self-checking test of ready_pool.
//
// A 4-entry pool: four pushes fill entries 0..3 and raise full; popping
// entry 2 frees exactly that entry and the next push lands there; a pop and
// a push in the same cycle (a push is never offered while full); then random pushes and pops against a reference
// copy of the pool, checking valid bits, contents and count every cycle.
module tb_ready_pool;
  import axle_pkg::*;
  localparam int unsigned D = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic push, full, pop;
  meta_t push_data;
  logic [D-1:0] entry_valid;
  meta_t entries [D];
  logic [$clog2(D+1)-1:0] count;
  logic [$clog2(D)-1:0] pop_idx;

  ready_pool #(.DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit    rv [D];
  meta_t re [D];

  function automatic meta_t mk(int n);
    mk.data_offset = 32'(n * 32); mk.data_size = 16'd32; mk.p_slot = 16'(n);
  endfunction

  task automatic step(bit do_push, meta_t d, bit do_pop, int idx);
    int f;
    @(negedge clk);
    push = do_push; push_data = d; pop = do_pop; pop_idx = idx[$clog2(D)-1:0];
    f = -1;
    for (int i = D - 1; i >= 0; i--) if (!rv[i]) f = i;
    @(negedge clk);
    push = 0; pop = 0;
    if (do_pop) rv[idx] = 0;
    if (do_push && f >= 0) begin rv[f] = 1; re[f] = d; end
    compare();
  endtask

  task automatic compare();
    int n = 0;
    for (int i = 0; i < D; i++) begin
      check(entry_valid[i] == rv[i], $sformatf("valid bit %0d", i));
      if (rv[i]) begin
        check(entries[i] == re[i], $sformatf("entry %0d", i));
        n++;
      end
    end
    check(int'(count) == n && full == (n == D), "count and full");
  endtask

  initial begin
    push = 0; pop = 0; pop_idx = 0; push_data = '0;
    for (int i = 0; i < D; i++) rv[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < D; n++) step(1, mk(n), 0, 0);
    check(full, "full after four pushes");
    step(0, '0, 1, 2);
    check(!entry_valid[2] && entry_valid[3] && entry_valid[1], "only entry 2 freed");
    step(1, mk(9), 0, 0);
    check(entries[2] == mk(9), "refill lands in the freed entry");
    step(0, '0, 1, 0);
    step(1, mk(11), 1, 3);   // push and pop in the same cycle
    check(!entry_valid[3], "entry 3 popped");
    check(entries[0] == mk(11), "push after pop fills entry 0");
    for (int k = 0; k < 200; k++) begin
      automatic int idx = $urandom_range(0, D - 1);
      automatic bit dp = rv[idx] && ($urandom_range(0, 1) == 1);
      step(!full && ($urandom_range(0, 1) == 1), mk(100 + k), dp, idx);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
