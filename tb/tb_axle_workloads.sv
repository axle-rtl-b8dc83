// tb_axle_workloads: the paper's evaluated workloads, as far as their
// result sizes are known, streamed through axle_top at its default sizes.
//
// Each workload is one offloaded kernel whose result region the CCM fills
// with 4-byte values and the host consumes payload by payload:
//   KNN (a)/(b)/(c): 128/256/512 distances of 4 bytes (the paper's own
//                    figure: 2048 bytes for 512 rows);
//   LLM (h):         one attention output row of OPT-2.7B, 2560 values of
//                    4 bytes (hidden size from the model, not the paper);
//   SSSP (d):        264346 vertices, 4-byte updated distance per vertex
//                    (value size assumed);
//   PageRank (e):    299067 vertices, 4-byte rank per vertex.
// All run at the default streaming factor of one slot (SF1). The uthread
// stores arrive in a round-robin interleave of 16 streams, each owning a
// contiguous share of the result, so payloads complete out of offset order.
// The host takes ready tasks in random order.
// SSSP is run a second time with OoO streaming disabled, as in the paper's
// comparison of the two modes: payloads then leave strictly by offset, the
// executor stalls behind the first unfinished chunk, and the mean time at
// which payloads reach the host must be later than with OoO streaming.
// PageRank is repeated with batches of 64 slots, 25% and 100% of its result,
// the paper's larger streaming factors; a single whole-result batch must
// deliver later on average than SF1.
// For each workload: every payload arrives once with the right data, and
// the rings end empty. Cycle counts and mean delivery times are printed.
// Interface and timing: no ports; axle_top is instantiated with no
// parameter override, CCM clock period 3 and host period 2 time units
// (the 2:3 ratio of 2 GHz and 3 GHz), and the CXL link is a fixed-latency
// model (175 units for CXL.io writes, 35 for CXL.mem stores). Workload
// value sizes of 4 bytes follow the paper for KNN and are this bench's
// choice for the others; the streaming factors are the paper's.
module tb_axle_workloads;
  import axle_pkg::*;

  localparam int unsigned SB = 32, DW = SB * 8, PD = 64, MAXW = 299067;
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

  axle_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #60000000;
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

  int ccm_cyc = 0, notifs = 0;
  always @(posedge clk_ccm) ccm_cyc++;
  always @(posedge clk_host) if (rst_host_n && host_notify) notifs++;

  // host scheduler and tasks
  bit got_off [MAXCH];
  int got_cnt = 0, nch = 0, kbytes = 0;
  // delivery time of each payload, from the kernel start, and in-order stall cycles
  longint lat_sum = 0, hol_cyc = 0;
  int t_start = 0;
  longint mean_lat [string];
  always @(posedge clk_ccm) if (rst_ccm_n && ccm_hol_wait) hol_cyc++;
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
        lat_sum += longint'(ccm_cyc) - longint'(t_start);
        got_cnt++;
      end
      repeat (2) @(negedge clk_host);
      consume = 1'b1; consume_slot = m.p_slot;
    end
  end

  task automatic run_workload(string name, int nwords, int sf, int streams, bit ooo = 1'b1);
    int t0, w, n;
    n = (nwords * 4 + SB - 1) / SB;
    nch = n; kbytes = nwords * 4; got_cnt = 0;
    for (int i = 0; i < MAXCH; i++) got_off[i] = 0;
    @(negedge clk_ccm);
    start = 1'b1; result_bytes = 32'(nwords * 4); ooo_en = ooo; sf_slots = 16'(sf);
    @(negedge clk_ccm);
    start = 1'b0;
    t0 = ccm_cyc; t_start = ccm_cyc; lat_sum = 0; hol_cyc = 0;
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
    check(ooo ? hol_cyc == 0 : hol_cyc > 0, $sformatf("%s: %0d in-order stall cycles", name, hol_cyc));
    mean_lat[name] = lat_sum / longint'(n);
    $display("%s: %0d payloads, SF %0d, %s, %0d CCM cycles, mean delivery at %0d, %0d in-order stall cycles",
             name, n, sf, ooo ? "out of order" : "in order", ccm_cyc - t0, lat_sum / longint'(n), hol_cyc);
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
    run_workload("KNN (a) 2048x128", 128, 1, 16);
    run_workload("KNN (b) 1024x256", 256, 1, 16);
    run_workload("KNN (c) 512x512", 512, 1, 16);
    run_workload("LLM (h) OPT-2.7B attention row", 2560, 1, 16);
    run_workload("SSSP (d) 264346 vertices", 264346, 1, 16);
    run_workload("PageRank (e) 299067 vertices", 299067, 1, 16);
    // the same SSSP kernel with OoO streaming disabled: payloads leave by offset
    run_workload("SSSP (d) in order", 264346, 1, 16, 1'b0);
    check(mean_lat["SSSP (d) in order"] > mean_lat["SSSP (d) 264346 vertices"],
          "OoO streaming delivers SSSP payloads earlier on average than in-order streaming");
    // larger batches: 64 slots, a quarter of the result, all of it
    run_workload("PageRank (e) SF64", 299067, 64, 16);
    run_workload("PageRank (e) SF_25%", 299067, 37384 / 4, 16);
    run_workload("PageRank (e) SF_100%", 299067, 37384, 16);
    check(mean_lat["PageRank (e) SF_100%"] > mean_lat["PageRank (e) 299067 vertices"],
          "a single whole-result batch delivers PageRank payloads later on average than SF1");
    check(notifs > 0 && host_polls > 0, "results found by local polling");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
