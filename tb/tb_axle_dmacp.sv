// tb_axle_dmacp: back-pressure under a reduced DMA slot capacity.
//
// The paper evaluates rings of 12.5% of the default 50000 slots and reports
// the share of cycles in which the CCM waits for ring credit. This bench
// instantiates axle_top with CAP = 6250 (12.5%), every other parameter at
// its default, and streams the SSSP kernel (264346 vertices, 4 bytes per
// updated vertex, 33044 payloads) at a streaming factor of 64 slots. The
// host runs one task at a time and each task takes 100 host cycles, which is
// slower than the CCM produces payloads, so the rings fill and the CCM must
// wait for flow-control stores. Uthread stores arrive round-robin over 16
// streams; the host takes ready tasks in random order.
// Checked: back-pressure happened, every payload arrived once with the right
// data, the rings lapped several times and ended empty. The back-pressure
// cycles and their share of the run are printed.
// Interface and timing: no ports; CCM period 3 and host period 2 time units
// (2 GHz and 3 GHz); fixed-latency link model (175 units for CXL.io writes,
// 35 for CXL.mem stores). The capacity and the workload size are the
// paper's; the 4-byte vertex value, the streaming factor and the host task
// length are this bench's choices.
module tb_axle_dmacp;
  import axle_pkg::*;

  localparam int unsigned SB = 32, DW = SB * 8, PD = 64, MAXW = 264346;
  localparam int unsigned MAXCH = (MAXW * 4 + SB - 1) / SB;
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

  axle_top #(.CAP(6250)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #200000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // device memory
  logic [31:0] rmem [MAXW + SB / 4];
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

  int ccm_cyc = 0, notifs = 0, bp_cyc = 0;
  always @(posedge clk_ccm) ccm_cyc++;
  always @(posedge clk_ccm) if (rst_ccm_n && ccm_bp_wait) bp_cyc++;
  // laps of the payload ring: the tail position passes from slot CAP-1 to 0
  int laps = 0;
  ptr_t last_tail = '0;
  always @(posedge clk_ccm) if (rst_ccm_n) begin
    if (ptr_slot(ccm_p_tail, 6250) < ptr_slot(last_tail, 6250)) laps++;
    last_tail <= ccm_p_tail;
  end
  always @(posedge clk_host) if (rst_host_n && host_notify) notifs++;

  // host scheduler and tasks
  bit got_off [MAXCH];
  int got_cnt = 0, nch = 0, kbytes = 0;
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
        automatic int sz = (c == nch - 1 && kbytes % SB != 0) ? kbytes % SB : SB;
        automatic bit ok = 1;
        for (int k = 0; k < sz / 4; k++) if (pay_rd_data[k*32 +: 32] != rmem[c * SB / 4 + k]) ok = 0;
        if (!ok || int'(m.data_size) != sz) check(0, $sformatf("payload of offset 0x%0h", m.data_offset));
        if (!(c < nch && !got_off[c])) check(0, $sformatf("offset 0x%0h delivered once", m.data_offset));
        if (c < nch) got_off[c] = 1;
        got_cnt++;
      end
      repeat (100) @(negedge clk_host);
      consume = 1'b1; consume_slot = m.p_slot;
    end
  end

  task automatic run_workload(string name, int nwords, int sf, int streams);
    int t0, w, n;
    n = (nwords * 4 + SB - 1) / SB;
    nch = n; kbytes = nwords * 4; got_cnt = 0;
    for (int i = 0; i < MAXCH; i++) got_off[i] = 0;
    @(negedge clk_ccm);
    start = 1'b1; result_bytes = 32'(nwords * 4); ooo_en = 1'b1; sf_slots = 16'(sf);
    @(negedge clk_ccm);
    start = 1'b0;
    t0 = ccm_cyc;
    // 'streams' uthreads each own a contiguous share and store round-robin
    for (int r = 0; r < (nwords + streams - 1) / streams; r++)
      for (int s = 0; s < streams; s++) begin
        w = s * ((nwords + streams - 1) / streams) + r;
        if (w < nwords) begin
          rmem[w] = $urandom;
          st_valid = 1'b1; st_offset = 32'(w * 4); st_bytes = 4;
          @(negedge clk_ccm);
          st_valid = 1'b0;
        end
      end
    while (got_cnt != n) @(negedge clk_host);
    repeat (400) @(negedge clk_host);
    begin
      automatic int missing = 0;
      for (int c = 0; c < n; c++) if (!got_off[c]) missing++;
      check(missing == 0, $sformatf("%s: %0d of %0d payloads missing", name, missing, n));
    end
    check(got_cnt == n, $sformatf("%s: %0d deliveries for %0d payloads", name, got_cnt, n));
    check(!ccm_busy && ccm_p_tail == host_p_head && ccm_m_tail == host_m_head,
          $sformatf("%s: rings empty and reported", name));
    $display("%s: %0d payloads, SF %0d, %0d CCM cycles", name, n, sf, ccm_cyc - t0);
  endtask

  initial begin
    start = 0; ooo_en = 1; st_valid = 0; st_offset = 0; st_bytes = 0; result_bytes = 0; sf_slots = 1;
    pool_pop = 0; pool_pop_idx = 0; pay_rd_en = 0; pay_rd_slot = 0; consume = 0; consume_slot = 0;
    host_dma_valid = 0; host_dma_kind = DMA_PAYLOAD; host_dma_ptr = 0; host_dma_data = '0;
    ccm_fc_valid = 0; ccm_fc_kind = FC_P_HEAD; ccm_fc_ptr = 0; mem_rsp_data = '0;
    for (int i = 0; i < MAXW + SB / 4; i++) rmem[i] = '0;
    #30;
    rst_ccm_n = 1'b1; rst_host_n = 1'b1;
    wait (!ccm_init_busy && !host_init_busy);
    run_workload("SSSP (d) 264346 vertices, DMACp 12.5%", 264346, 64, 16);
    check(bp_cyc > 0, "back-pressure happened");
    check(laps == 33044 / 6250, $sformatf("payload ring lapped %0d times", laps));
    $display("back-pressure: %0d of %0d CCM cycles (%0d.%0d%%)", bp_cyc, ccm_cyc,
             longint'(bp_cyc) * 100 / ccm_cyc, (longint'(bp_cyc) * 1000 / ccm_cyc) % 10);
    check(notifs > 0 && host_polls > 0, "results found by local polling");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
