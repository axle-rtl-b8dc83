// tb_payload_former: self-checking test of payload_former.
//
// Three kernels on a 64-chunk instance with 32-byte slots:
//   1. OoO mode, 200-byte result (7 chunks, the last one 8 bytes), 4-byte
//      stores in a random order. A reference model in the testbench counts
//      bytes per chunk and predicts the order in which chunks complete; the
//      output must follow it, each chunk visible one cycle after the edge that takes its final store.
//   2. In-order mode, same size, random store order: output must be 0..6
//      and hol_wait must be seen.
//   3. OoO mode with a full-size 256-byte region and back-pressure on
//      chunk_ready: no chunk lost or duplicated, chunk_last on the eighth.
module tb_payload_former;
  import axle_pkg::*;

  localparam int unsigned SB = 32;
  localparam int unsigned MC = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic        start, ooo_en, st_valid, chunk_valid, chunk_ready, chunk_last, hol_wait, init_busy;
  logic [31:0] result_bytes, st_offset;
  logic [7:0]  st_bytes;
  ptr_t        chunk_id;
  logic [15:0] chunk_size;

  payload_former #(.SLOT_BYTES(SB), .MAX_CHUNKS(MC)) dut (.*);

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

  // output monitor
  int got_id[$], got_size[$], got_last[$], got_cyc[$];
  int cyc = 0, hol_seen = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && hol_wait) hol_seen++;
    if (rst_n && chunk_valid && chunk_ready) begin
      got_id.push_back(int'(chunk_id));
      got_size.push_back(int'(chunk_size));
      got_last.push_back(int'(chunk_last));
      got_cyc.push_back(cyc);
    end
  end

  int exp_id[$], exp_cyc[$];
  int words[$];

  task automatic run_kernel(int bytes, bit ooo, bit throttle);
    int n, cnt[MC], sz;
    n = (bytes + SB - 1) / SB;
    for (int c = 0; c < MC; c++) cnt[c] = 0;
    words.delete(); exp_id.delete(); exp_cyc.delete();
    got_id.delete(); got_size.delete(); got_last.delete(); got_cyc.delete();
    for (int w = 0; w < bytes / 4; w++) words.push_back(w);
    words.shuffle();
    @(negedge clk);
    start = 1'b1; result_bytes = bytes; ooo_en = ooo;
    @(negedge clk);
    start = 1'b0;
    foreach (words[k]) begin
      int c;
      st_valid = 1'b1; st_offset = words[k] * 4; st_bytes = 4;
      c = words[k] * 4 / SB;
      cnt[c] += 4;
      sz = (c == n - 1 && bytes % SB != 0) ? bytes % SB : SB;
      if (cnt[c] == sz) begin exp_id.push_back(c); exp_cyc.push_back(cyc + 2); end
      chunk_ready = throttle ? 1'($urandom_range(0, 1)) : 1'b1;
      @(negedge clk);
    end
    st_valid = 1'b0;
    chunk_ready = 1'b1;
    repeat (n + 10) @(negedge clk);
    check(got_id.size() == n, $sformatf("kernel got %0d chunks, expected %0d", got_id.size(), n));
    if (!ooo) begin
      exp_id.delete();
      for (int c = 0; c < n; c++) exp_id.push_back(c);
    end
    for (int k = 0; k < n && k < got_id.size(); k++) begin
      int esz;
      check(got_id[k] == exp_id[k], $sformatf("chunk %0d: id %0d expected %0d", k, got_id[k], exp_id[k]));
      esz = (got_id[k] == n - 1 && bytes % SB != 0) ? bytes % SB : SB;
      check(got_size[k] == esz, $sformatf("chunk %0d size %0d expected %0d", got_id[k], got_size[k], esz));
      check(got_last[k] == int'(k == n - 1), $sformatf("chunk %0d last flag", k));
      if (ooo && !throttle)
        check(got_cyc[k] == exp_cyc[k], $sformatf("chunk %0d out at cycle %0d expected %0d", k, got_cyc[k], exp_cyc[k]));
    end
  endtask

  initial begin
    start = 0; ooo_en = 1; st_valid = 0; st_offset = 0; st_bytes = 0; result_bytes = 0; chunk_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(init_busy == 1'b1, "init sweep running after reset");
    while (init_busy) @(negedge clk);
    run_kernel(200, 1'b1, 1'b0);
    hol_seen = 0;
    run_kernel(200, 1'b0, 1'b0);
    check(hol_seen > 0, "in-order mode held finished chunks behind an unfinished one");
    run_kernel(256, 1'b1, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
