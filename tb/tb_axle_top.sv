// tb_axle_top: end-to-end test of the back-streaming datapath.
//
// The testbench plays every part that surrounds axle_top:
//   * CCM uthreads: issue 4-byte result stores, in offset order or
//     scrambled (as a round-robin CCM scheduler would), with random gaps;
//   * CXL device memory: holds what the uthreads stored and answers the
//     executor's slot reads after a few cycles;
//   * CXL link: carries posted DMA writes (CCM -> host) and flow-control
//     stores (host -> CCM) in order, each after a fixed latency, across the
//     two clock domains (CCM clock period 6, host clock period 4: 2 and 3 GHz);
//   * host scheduler and tasks: takes a random ready-pool entry, reads its
//     payload from the local DMA region, checks it against what the uthreads
//     stored, works on it for a while, then marks the slot consumed.
//
// Reduced sizes: rings of 16 slots, pool of 8, 20-cycle DMA preparation
// with at most 2 requests in preparation at once, 15-cycle polling. Six
// kernels run back to back (an iterative offload): OoO with SF 1, in-order
// with SF 2, OoO with SF 4 and a slow host (ring full, back-pressure), a
// kernel whose size is not a multiple of the slot, and two more to wrap the
// ring indexes. Each kernel must deliver every payload exactly once with the
// right offset, size and data. The test counts how often each mechanism
// happened and fails any that never did: back-pressure, in-order hold,
// gap-aware consumption, batching of several payloads, short final batch,
// partial last slot, overlapped preparation of two DMA requests, a full
// request queue, ring lap wrap, local polling notification, flow-control
// stores, and OoO delivery.
module tb_axle_top;
  import axle_pkg::*;

  localparam int unsigned SB = 32, CAPN = 16, MCH = 64, MSF = 8, PREP = 20, PF = 15, PD = 8;
  localparam int unsigned MPR = 2;  // DMA requests in preparation at once
  localparam int unsigned DW = SB * 8;
  localparam int IO_LAT  = 60;   // time units, CCM -> host posted writes
  localparam int MEM_LAT = 20;   // time units, host -> CCM flow-control stores

  logic clk_ccm = 1'b0, clk_host = 1'b0, rst_ccm_n = 1'b0, rst_host_n = 1'b0;
  always #3 clk_ccm = ~clk_ccm;
  always #2 clk_host = ~clk_host;

  // CCM side
  logic start, ooo_en, st_valid;
  logic [31:0] result_bytes, st_offset;
  logic [15:0] sf_slots;
  logic [7:0] st_bytes;
  logic mem_rd_valid, mem_rd_ready, mem_rsp_valid;
  logic [31:0] mem_rd_offset;
  logic [DW-1:0] mem_rsp_data;
  logic ccm_dma_valid, ccm_dma_ready;
  dma_kind_e ccm_dma_kind;
  ptr_t ccm_dma_ptr;
  logic [DW-1:0] ccm_dma_data;
  logic ccm_fc_valid;
  fc_kind_e ccm_fc_kind;
  ptr_t ccm_fc_ptr;
  logic ccm_init_busy, ccm_bp_wait, ccm_hol_wait, ccm_busy;
  ptr_t ccm_p_tail, ccm_m_tail;
  // host side
  logic host_dma_valid;
  dma_kind_e host_dma_kind;
  ptr_t host_dma_ptr;
  logic [DW-1:0] host_dma_data;
  logic host_fc_valid, host_fc_ready;
  fc_kind_e host_fc_kind;
  ptr_t host_fc_ptr;
  logic [PD-1:0] pool_valid;
  meta_t pool_entries [PD];
  logic pool_pop;
  logic [$clog2(PD)-1:0] pool_pop_idx;
  logic pay_rd_en;
  logic [SLOT_W-1:0] pay_rd_slot;
  logic [DW-1:0] pay_rd_data;
  logic consume;
  logic [SLOT_W-1:0] consume_slot;
  logic host_notify, host_gap, host_init_busy;
  logic [31:0] host_polls;
  ptr_t host_p_head, host_m_head;
  logic [$clog2(PD+1)-1:0] pool_count;

  axle_top #(.SLOT_BYTES(SB), .CAP(CAPN), .MAX_CHUNKS(MCH), .MAX_SF_SLOTS(MSF),
             .PREP_CYCLES(PREP), .PF_CYCLES(PF), .POOL_DEPTH(PD), .MAX_PREP_REQS(MPR)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #400000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- device memory (result region) ----------------
  logic [31:0] rmem [MCH * SB / 4];
  int rd_wait = 0;
  logic [31:0] rd_off;
  always @(posedge clk_ccm) begin
    mem_rsp_valid <= 1'b0;
    if (rd_wait > 0) begin
      rd_wait <= rd_wait - 1;
      if (rd_wait == 1) begin
        mem_rsp_valid <= 1'b1;
        for (int k = 0; k < SB / 4; k++) mem_rsp_data[k*32 +: 32] <= rmem[rd_off / 4 + k];
      end
    end else if (mem_rd_valid && mem_rd_ready) begin
      rd_off <= mem_rd_offset; rd_wait <= 4;
    end
  end
  assign mem_rd_ready = (rd_wait == 0);

  // ---------------- CXL link model ----------------
  typedef struct { time t; dma_kind_e k; ptr_t p; logic [DW-1:0] d; } io_t;
  typedef struct { time t; fc_kind_e k; ptr_t p; } fc_t;
  io_t io_q[$];
  fc_t fc_q[$];
  int n_ptail = 0, n_pay = 0, n_fc = 0;
  assign ccm_dma_ready = 1'b1;
  always @(posedge clk_ccm) if (rst_ccm_n && ccm_dma_valid) begin
    io_q.push_back('{$time + IO_LAT, ccm_dma_kind, ccm_dma_ptr, ccm_dma_data});
    if (ccm_dma_kind == DMA_P_TAIL) n_ptail++;
    if (ccm_dma_kind == DMA_PAYLOAD) n_pay++;
  end
  always @(negedge clk_host) begin
    host_dma_valid = 1'b0;
    if (io_q.size() > 0 && io_q[0].t <= $time) begin
      automatic io_t w = io_q.pop_front();
      host_dma_valid = 1'b1; host_dma_kind = w.k; host_dma_ptr = w.p; host_dma_data = w.d;
    end
  end
  assign host_fc_ready = 1'b1;
  always @(posedge clk_host) if (rst_host_n && host_fc_valid) begin
    fc_q.push_back('{$time + MEM_LAT, host_fc_kind, host_fc_ptr});
    n_fc++;
  end
  always @(negedge clk_ccm) begin
    ccm_fc_valid = 1'b0;
    if (fc_q.size() > 0 && fc_q[0].t <= $time) begin
      automatic fc_t f = fc_q.pop_front();
      ccm_fc_valid = 1'b1; ccm_fc_kind = f.k; ccm_fc_ptr = f.p;
    end
  end

  // ---------------- mechanism counters ----------------
  int bp_cyc = 0, hol_cyc = 0, gaps = 0, notifs = 0, lap_wraps = 0, ooo_deliv = 0;
  int short_batches = 0, multi_batches = 0, partial_slots = 0, reqq_full_cyc = 0, reqq_overlap_cyc = 0;
  ptr_t last_head = '0;
  always @(posedge clk_ccm) if (rst_ccm_n) begin
    if (ccm_bp_wait) bp_cyc++;
    if (ccm_hol_wait) hol_cyc++;
    if (32'(dut.u_exec.qcnt_q) == MPR) reqq_full_cyc++;
    if (dut.u_exec.qcnt_q > 1) reqq_overlap_cyc++;
  end
  always @(posedge clk_host) if (rst_host_n) begin
    if (host_gap) gaps++;
    if (host_notify) notifs++;
    if (host_p_head < last_head) lap_wraps++;
    last_head <= host_p_head;
  end

  // ---------------- host scheduler and tasks ----------------
  int  host_work = 3;           // host cycles per task
  bit  got_off [MCH];
  int  got_cnt = 0, kernel_bytes = 0, last_off = -1;
  always begin
    @(negedge clk_host);
    pool_pop = 1'b0; pay_rd_en = 1'b0; consume = 1'b0;
    if (rst_host_n && pool_valid != '0) begin
      int pick;
      meta_t m;
      do pick = $urandom_range(0, PD - 1); while (!pool_valid[pick]);
      m = pool_entries[pick];
      pool_pop = 1'b1; pool_pop_idx = pick[$clog2(PD)-1:0];
      pay_rd_en = 1'b1; pay_rd_slot = m.p_slot;
      @(negedge clk_host);
      pool_pop = 1'b0; pay_rd_en = 1'b0;
      begin
        automatic int c = int'(m.data_offset) / SB;
        automatic int sz = (c == (kernel_bytes + SB - 1) / SB - 1 && kernel_bytes % SB != 0) ? kernel_bytes % SB : SB;
        automatic bit ok = 1;
        for (int k = 0; k < sz / 4; k++) if (pay_rd_data[k*32 +: 32] != rmem[c * SB / 4 + k]) ok = 0;
        check(ok, $sformatf("payload data of offset 0x%0h", m.data_offset));
        check(int'(m.data_size) == sz, $sformatf("size of offset 0x%0h: %0d", m.data_offset, m.data_size));
        check(c < MCH && !got_off[c], $sformatf("offset 0x%0h delivered once", m.data_offset));
        if (c < MCH) got_off[c] = 1;
        if (int'(m.data_offset) < last_off) ooo_deliv++;
        last_off = int'(m.data_offset);
        got_cnt++;
      end
      repeat (host_work) @(negedge clk_host);
      consume = 1'b1; consume_slot = m.p_slot;
    end
  end

  // ---------------- CCM uthreads ----------------
  task automatic run_kernel(int bytes, bit ooo, int sf, bit scramble, int kid);
    int words[$], n;
    n = (bytes + SB - 1) / SB;
    for (int c = 0; c < MCH; c++) got_off[c] = 0;
    got_cnt = 0; kernel_bytes = bytes; last_off = -1;
    for (int w = 0; w < bytes / 4; w++) words.push_back(w);
    if (scramble) words.shuffle();
    @(negedge clk_ccm);
    start = 1'b1; result_bytes = bytes; ooo_en = ooo; sf_slots = 16'(sf);
    @(negedge clk_ccm);
    start = 1'b0;
    foreach (words[i]) begin
      automatic logic [31:0] v = {kid[7:0], 24'(words[i] * 2654435761)};
      rmem[words[i]] = v;
      st_valid = 1'b1; st_offset = words[i] * 4; st_bytes = 4;
      @(negedge clk_ccm);
      st_valid = 1'b0;
      repeat ($urandom_range(0, 2)) @(negedge clk_ccm);
    end
    if (bytes % SB != 0) partial_slots++;
    if (n % sf != 0) short_batches++;
    if (sf > 1) multi_batches++;
    for (int t = 0; t < 30000 && got_cnt != n; t++) @(negedge clk_host);
    check(got_cnt == n, $sformatf("kernel %0d: %0d of %0d payloads reached the host", kid, got_cnt, n));
    for (int c = 0; c < n; c++) check(got_off[c], $sformatf("kernel %0d offset %0d delivered", kid, c * SB));
  endtask

  initial begin
    start = 0; ooo_en = 1; st_valid = 0; st_offset = 0; st_bytes = 0; result_bytes = 0; sf_slots = 1;
    pool_pop = 0; pool_pop_idx = 0; pay_rd_en = 0; pay_rd_slot = 0; consume = 0; consume_slot = 0;
    host_dma_valid = 0; host_dma_kind = DMA_PAYLOAD; host_dma_ptr = 0; host_dma_data = '0;
    ccm_fc_valid = 0; ccm_fc_kind = FC_P_HEAD; ccm_fc_ptr = 0; mem_rsp_data = '0;
    for (int i = 0; i < MCH * SB / 4; i++) rmem[i] = '0;
    #30;
    rst_ccm_n = 1'b1; rst_host_n = 1'b1;
    wait (!ccm_init_busy && !host_init_busy);
    run_kernel(320, 1, 1, 1, 1);         // 10 payloads, OoO, SF1
    run_kernel(384, 0, 2, 1, 2);         // 12 payloads, in order, SF2
    host_work = 60;                      // slow host: ring and pool fill up
    run_kernel(1600, 1, 4, 1, 3);        // 50 payloads, OoO, SF4 (short final batch)
    host_work = 3;
    run_kernel(236, 1, 3, 1, 4);         // 8 payloads, last one 12 bytes
    run_kernel(512, 0, 1, 0, 5);         // in-order stores, in-order stream
    run_kernel(1024, 1, 8, 1, 6);        // SF8
    repeat (40) @(negedge clk_host);
    check(!ccm_busy, "executor idle at the end");
    check(ccm_p_tail == host_p_head && ccm_m_tail == host_m_head, "all slots consumed and reported");
    check(n_ptail < n_pay, $sformatf("batching: %0d payload-tail updates for %0d payloads", n_ptail, n_pay));
    check(host_polls > 0, "host polled");
    $display("mechanisms: back-pressure %0d cycles, in-order hold %0d cycles, gaps %0d, notifications %0d,",
             bp_cyc, hol_cyc, gaps, notifs);
    $display("            lap wraps %0d, OoO deliveries %0d, flow-control stores %0d, multi-slot batches %0d,",
             lap_wraps, ooo_deliv, n_fc, multi_batches);
    $display("            short final batches %0d, partial slots %0d, request queue full %0d cycles",
             short_batches, partial_slots, reqq_full_cyc);
    check(bp_cyc > 0, "back-pressure happened");
    check(hol_cyc > 0, "in-order hold happened");
    check(gaps > 0, "gap-aware consumption happened");
    check(notifs > 0, "local polling notification happened");
    check(lap_wraps > 0, "ring index lap wrap happened");
    check(ooo_deliv > 0, "out-of-order delivery happened");
    check(n_fc > 0, "flow-control stores happened");
    check(multi_batches > 0, "multi-payload batches happened");
    check(short_batches > 0, "short final batch happened");
    check(partial_slots > 0, "partial last slot happened");
    check(reqq_overlap_cyc > 0, "two DMA requests in preparation at once");
    check(reqq_full_cyc > 0, "DMA request queue full (trigger held)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
