// tb_axle_pf: the KNN offload of tb_axle_full with the longest polling
// interval, 5 us.
//
// The polling interval PF decides how soon the host sees a result that has
// already landed in its DMA region. The design is evaluated at PF = 50 ns,
// 500 ns and 5 us (150, 1500 and 15000 host cycles at 3 GHz). The default
// 50 ns is covered by tb_axle_full; this bench sets PF_CYCLES = 15000 and
// keeps every other size at its default. The kernel is the same: 512
// four-byte distances stored in a scrambled order, 64 payloads, streaming
// factor one slot, out-of-order delivery, host tasks taken at random.
//
// Checked, besides the correct delivery of every payload: the poller reads
// the tail word exactly every 15000 host cycles; a metadata tail update that
// reaches the host waits for the next poll, so never more than one interval
// and never less than zero; at this interval some result waits longer than
// a whole 50 ns interval (the cost the shorter interval avoids); and the
// host is notified only at poll instants. Timing: time unit = 1/6 ns, CCM
// clock period 3, host clock period 2, as in tb_axle_full. The link model,
// device memory and host tasks are this bench's own, copied from
// tb_axle_full.
module tb_axle_pf;
  import axle_pkg::*;

  localparam int unsigned SB = 32, DW = SB * 8, PD = 64, ROWS = 512;
  localparam int unsigned NCH = ROWS * 4 / SB;
  localparam int unsigned PF = 15000;  // 5 us at 3 GHz
  localparam int IO_LAT  = 175;  // ns-like time units: half of the 350 ns CXL.io round trip
  localparam int MEM_LAT = 35;   // half of the 70 ns CXL.mem round trip

  // CCM 2 GHz (period 0.5), host 3 GHz (period ~0.333): scaled by 6 -> 3 and 2
  logic clk_ccm = 1'b0, clk_host = 1'b0, rst_ccm_n = 1'b0, rst_host_n = 1'b0;
  always #1.5 clk_ccm = ~clk_ccm;
  always #1 clk_host = ~clk_host;

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

  axle_top #(.PF_CYCLES(PF)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // device memory
  logic [31:0] rmem [ROWS];
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
      rd_off <= mem_rd_offset; rd_wait <= 8;
    end
  end
  assign mem_rd_ready = (rd_wait == 0);

  // CXL link
  typedef struct { realtime t; dma_kind_e k; ptr_t p; logic [DW-1:0] d; } io_t;
  typedef struct { realtime t; fc_kind_e k; ptr_t p; } fc_t;
  io_t io_q[$];
  fc_t fc_q[$];
  assign ccm_dma_ready = 1'b1;
  assign host_fc_ready = 1'b1;
  always @(posedge clk_ccm) if (rst_ccm_n && ccm_dma_valid)
    io_q.push_back('{$realtime + IO_LAT, ccm_dma_kind, ccm_dma_ptr, ccm_dma_data});
  always @(negedge clk_host) begin
    host_dma_valid = 1'b0;
    if (io_q.size() > 0 && io_q[0].t <= $realtime) begin
      automatic io_t w = io_q.pop_front();
      host_dma_valid = 1'b1; host_dma_kind = w.k; host_dma_ptr = w.p; host_dma_data = w.d;
    end
  end
  always @(posedge clk_host) if (rst_host_n && host_fc_valid)
    fc_q.push_back('{$realtime + MEM_LAT, host_fc_kind, host_fc_ptr});
  always @(negedge clk_ccm) begin
    ccm_fc_valid = 1'b0;
    if (fc_q.size() > 0 && fc_q[0].t <= $realtime) begin
      automatic fc_t f = fc_q.pop_front();
      ccm_fc_valid = 1'b1; ccm_fc_kind = f.k; ccm_fc_ptr = f.p;
    end
  end

  int ccm_cyc = 0, notifs = 0;
  always @(posedge clk_ccm) ccm_cyc++;
  always @(posedge clk_host) if (rst_host_n && host_notify) notifs++;

  // polling instants and the wait of each published metadata tail
  int host_cyc = 0, last_poll = -1, poll_gap_bad = 0, pend = -1, max_wait = 0, waits = 0;
  logic [31:0] polls_seen = '0;
  always @(posedge clk_host) begin
    host_cyc++;
    if (rst_host_n) begin
      if (host_polls != polls_seen) begin
        if (last_poll >= 0 && host_cyc - last_poll != int'(PF)) poll_gap_bad++;
        last_poll = host_cyc;
        polls_seen = host_polls;
      end
      if (host_notify) begin
        if (pend >= 0) begin
          if (host_cyc - pend > max_wait) max_wait = host_cyc - pend;
          if (host_cyc - pend > int'(PF) + 2) waits++;
        end
        pend = -1;
      end
      if (host_dma_valid && host_dma_kind == DMA_M_TAIL && pend < 0) pend = host_cyc;
    end
  end

  // host scheduler and tasks
  bit got_off [NCH];
  int got_cnt = 0;
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
        automatic bit ok = 1;
        for (int k = 0; k < SB / 4; k++) if (pay_rd_data[k*32 +: 32] != rmem[c * SB / 4 + k]) ok = 0;
        check(ok && m.data_size == 16'(SB), $sformatf("payload of offset 0x%0h", m.data_offset));
        check(c < NCH && !got_off[c], $sformatf("offset 0x%0h delivered once", m.data_offset));
        if (c < NCH) got_off[c] = 1;
        got_cnt++;
      end
      repeat (20) @(negedge clk_host);   // top-K selection work on 8 distances
      consume = 1'b1; consume_slot = m.p_slot;
    end
  end

  initial begin
    int words[$], t0;
    start = 0; ooo_en = 1; st_valid = 0; st_offset = 0; st_bytes = 0; result_bytes = 0; sf_slots = 1;
    pool_pop = 0; pool_pop_idx = 0; pay_rd_en = 0; pay_rd_slot = 0; consume = 0; consume_slot = 0;
    host_dma_valid = 0; host_dma_kind = DMA_PAYLOAD; host_dma_ptr = 0; host_dma_data = '0;
    ccm_fc_valid = 0; ccm_fc_kind = FC_P_HEAD; ccm_fc_ptr = 0; mem_rsp_data = '0;
    for (int i = 0; i < ROWS; i++) rmem[i] = '0;
    for (int i = 0; i < NCH; i++) got_off[i] = 0;
    #30;
    rst_ccm_n = 1'b1; rst_host_n = 1'b1;
    wait (!ccm_init_busy && !host_init_busy);
    @(negedge clk_ccm);
    start = 1'b1; result_bytes = ROWS * 4; ooo_en = 1'b1; sf_slots = 16'd1;
    @(negedge clk_ccm);
    start = 1'b0;
    t0 = ccm_cyc;
    for (int w = 0; w < ROWS; w++) words.push_back(w);
    words.shuffle();
    foreach (words[i]) begin
      rmem[words[i]] = $urandom;        // a distance value
      st_valid = 1'b1; st_offset = words[i] * 4; st_bytes = 4;
      @(negedge clk_ccm);
      st_valid = 1'b0;
      repeat ($urandom_range(0, 40)) @(negedge clk_ccm);
    end
    while (got_cnt != NCH) @(negedge clk_host);
    repeat (400) @(negedge clk_host);
    check(poll_gap_bad == 0, $sformatf("%0d polls not %0d cycles after the previous one", poll_gap_bad, PF));
    check(host_polls > 1, "the poller ran more than one interval");
    check(waits == 0, $sformatf("%0d results waited more than one interval", waits));
    check(max_wait > 150, $sformatf("longest wait for a poll %0d host cycles, beyond a 50 ns interval", max_wait));
    check(pend < 0, "no published tail left unseen");
    for (int c = 0; c < NCH; c++) check(got_off[c], $sformatf("offset %0d delivered", c * SB));
    check(!ccm_busy, "executor idle");
    check(ccm_p_tail == ptr_t'(NCH) && ccm_m_tail == ptr_t'(NCH), "64 payloads and 64 records published");
    check(host_p_head == ptr_t'(NCH) && host_m_head == ptr_t'(NCH), "host consumed and reported every slot");
    check(notifs > 0 && host_polls > 0, "results found by local polling");
    $display("KNN 512 rows, PF %0d: %0d CCM cycles, %0d polls, %0d notifications, longest wait %0d host cycles",
             PF, ccm_cyc - t0, host_polls, notifs, max_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
