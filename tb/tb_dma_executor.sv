// tb_dma_executor: self-checking test of dma_executor.
//
// Instance: 32-byte slots, rings of 8 slots, a payload buffer of 4, 12-cycle
// DMA preparation. Twelve payloads are offered in a scrambled offset
// order with a streaming factor of 2 (sf_slots = 2) and random stalls on the
// DMA channel. The testbench predicts every posted write independently:
// per batch of two, the two payload writes (data read from a device memory
// model), one payload tail update, then metadata record + metadata tail
// update per payload. With no flow control the ring fills after eight
// payloads: the executor must stop (bp_wait) until the testbench sends
// flow-control stores that free four slots; the last four payloads then use
// slots 0..3 again (ring positions 8..11). Also checked: preparation latency
// of every batch, and a second kernel of three payloads with sf_slots = 4,
// whose short batch is flushed by chunk_last. Preparation must overlap:
// some batch starts its reads sooner than PREP cycles after the previous
// batch's last write.
module tb_dma_executor;
  import axle_pkg::*;

  localparam int unsigned SB = 32, CAPN = 8, MSF = 4, PREP = 12;
  localparam int unsigned DW = SB * 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic [15:0] sf_slots;
  logic chunk_valid, chunk_ready, chunk_last;
  ptr_t chunk_id;
  logic [15:0] chunk_size;
  logic rd_req_valid, rd_req_ready, rd_rsp_valid;
  logic [31:0] rd_req_offset;
  logic [DW-1:0] rd_rsp_data;
  logic dma_valid, dma_ready;
  dma_kind_e dma_kind;
  ptr_t dma_ptr;
  logic [DW-1:0] dma_data;
  logic fc_valid;
  fc_kind_e fc_kind;
  ptr_t fc_ptr;
  logic bp_wait, busy;
  ptr_t p_tail, m_tail;

  dma_executor #(.SLOT_BYTES(SB), .CAP(CAPN), .MAX_SF_SLOTS(MSF), .PREP_CYCLES(PREP)) dut (.*);

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

  function automatic logic [DW-1:0] mem_data(logic [31:0] off);
    for (int k = 0; k < SB / 4; k++) mem_data[k*32 +: 32] = (off + k) ^ 32'h5A5A_0000;
  endfunction

  // device memory model: 3-cycle read latency
  logic [31:0] pend_off;
  int pend_t;
  always @(posedge clk) begin
    rd_rsp_valid <= 1'b0;
    if (pend_t > 0) begin
      pend_t <= pend_t - 1;
      if (pend_t == 1) begin rd_rsp_valid <= 1'b1; rd_rsp_data <= mem_data(pend_off); end
    end else if (rd_req_valid && rd_req_ready) begin
      pend_off <= rd_req_offset; pend_t <= 3;
    end
  end
  assign rd_req_ready = (pend_t == 0);

  // capture of posted writes and timing
  typedef struct { dma_kind_e kind; int ptr; logic [DW-1:0] data; } wr_t;
  wr_t got[$];
  int cyc = 0, bp_cycles = 0, take_cyc[$], rd_first[$], wr_cyc[$];
  bit in_batch = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (dma_valid && dma_ready) begin got.push_back('{dma_kind, int'(dma_ptr), dma_data}); wr_cyc.push_back(cyc); end
      if (bp_wait) bp_cycles++;
      if (chunk_valid && chunk_ready) take_cyc.push_back(cyc);
      if (rd_req_valid && !in_batch) begin rd_first.push_back(cyc); in_batch = 1; end
      if (dma_valid && dma_ready && dma_kind == DMA_P_TAIL) in_batch = 0;
    end
  end
  always @(negedge clk) dma_ready = ($urandom_range(0, 3) != 0);

  wr_t exp_w[$];
  int  batch_last_take[$];

  task automatic expect_batch(int ids[$], int sizes[$], int tail);
    for (int i = 0; i < ids.size(); i++)
      exp_w.push_back('{DMA_PAYLOAD, (tail + i) % (2*CAPN), mem_data(ids[i] * SB)});
    exp_w.push_back('{DMA_P_TAIL, (tail + ids.size()) % (2*CAPN), '0});
    for (int i = 0; i < ids.size(); i++) begin
      meta_t m;
      m.data_offset = ids[i] * SB; m.data_size = 16'(sizes[i]); m.p_slot = 16'((tail + i) % CAPN);
      exp_w.push_back('{DMA_META, (tail + i) % (2*CAPN), DW'(m)});
      exp_w.push_back('{DMA_M_TAIL, (tail + i + 1) % (2*CAPN), '0});
    end
  endtask

  task automatic offer(int id, int size, bit last);
    chunk_valid = 1'b1; chunk_id = ptr_t'(id); chunk_size = 16'(size); chunk_last = last;
    do @(posedge clk); while (!(chunk_valid && chunk_ready));
    @(negedge clk);
    chunk_valid = 1'b0;
  endtask

  task automatic send_fc(fc_kind_e k, int p);
    @(negedge clk);
    fc_valid = 1'b1; fc_kind = k; fc_ptr = ptr_t'(p);
    @(negedge clk);
    fc_valid = 1'b0;
  endtask

  int order1[12] = '{5, 2, 0, 9, 1, 11, 3, 4, 10, 6, 8, 7};

  initial begin : main
    static int ids[$], sizes[$];
    sf_slots = 2; chunk_valid = 0; chunk_id = 0; chunk_size = 0; chunk_last = 0;
    fc_valid = 0; fc_kind = FC_P_HEAD; fc_ptr = 0; rd_rsp_data = '0; pend_t = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // kernel 1: 12 payloads, SF = 2 slots
    for (int b = 0; b < 6; b++) begin
      ids = '{order1[2*b], order1[2*b+1]}; sizes = '{SB, SB};
      expect_batch(ids, sizes, 2 * b);
    end
    fork
      begin
        for (int k = 0; k < 12; k++) offer(order1[k], SB, k == 11);
      end
      begin
        // wait for the ring to fill, then free four slots of each ring
        wait (m_tail == ptr_t'(8));
        repeat (10) @(negedge clk);
        check(bp_wait && p_tail == ptr_t'(8) && m_tail == ptr_t'(8),
              "stalled on credit with eight payloads published");
        send_fc(FC_P_HEAD, 4);
        @(negedge clk);
        check(bp_wait, "still stalled: metadata ring is full too");
        send_fc(FC_M_HEAD, 4);
      end
    join
    wait (!busy);
    repeat (5) @(negedge clk);
    check(bp_cycles > 10, $sformatf("back-pressure cycles counted: %0d", bp_cycles));
    // kernel 2: three payloads, SF = 4 slots -> one short batch flushed at last
    send_fc(FC_P_HEAD, 12); send_fc(FC_M_HEAD, 12);
    sf_slots = 4;
    ids = '{1, 0, 2}; sizes = '{SB, SB, 7};
    expect_batch(ids, sizes, 12);
    offer(1, SB, 0); offer(0, SB, 0); offer(2, 7, 1);
    wait (!busy);
    repeat (5) @(negedge clk);
    check(got.size() == exp_w.size(), $sformatf("%0d writes, expected %0d", got.size(), exp_w.size()));
    for (int k = 0; k < exp_w.size() && k < got.size(); k++)
      check(got[k].kind == exp_w[k].kind && got[k].ptr == exp_w[k].ptr && got[k].data == exp_w[k].data,
            $sformatf("write %0d: %s ptr %0d, expected %s ptr %0d", k, got[k].kind.name(), got[k].ptr,
                      exp_w[k].kind.name(), exp_w[k].ptr));
    // preparation latency: first read of a batch comes PREP+2 cycles after
    // the take that completed it (kernel 1: takes 1,3,5,...; kernel 2: take 14)
    check(rd_first.size() == 7, $sformatf("%0d batches, expected 7", rd_first.size()));
    for (int b = 0; b < 7 && b < rd_first.size(); b++) begin
      automatic int t = (b < 6) ? take_cyc[2*b+1] : take_cyc[14];
      check(rd_first[b] - t >= PREP + 2, $sformatf("batch %0d prep latency %0d", b, rd_first[b] - t));
    end
    // preparation is a latency per request: while batch b-1 is being written,
    // batch b is already being prepared, so some batch starts its reads
    // sooner than PREP cycles after the previous batch's last write (each
    // batch of kernel 1 is 7 writes)
    begin
      automatic int overlapped = 0;
      for (int b = 1; b < 6 && b < rd_first.size() && 7 * b - 1 < wr_cyc.size(); b++)
        if (rd_first[b] - wr_cyc[7*b-1] < PREP) overlapped++;
      check(overlapped > 0, $sformatf("%0d batches prepared while the previous one was written", overlapped));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
