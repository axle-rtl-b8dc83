// tb_host_dma_region: self-checking test of host_dma_region.
//
// Rings of 8 slots. Posted writes fill payload and metadata slots through
// ring positions of both laps (position p and p + 8 name the same slot),
// then the tail words are written. The testbench keeps its own copy of both
// rings and checks every slot through the two read ports, which must answer
// one cycle after the request, and checks that a tail write changes only
// its own word.
module tb_host_dma_region;
  import axle_pkg::*;
  localparam int unsigned SB = 32, CAPN = 8, DW = SB * 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic dma_valid, meta_rd_en, pay_rd_en;
  dma_kind_e dma_kind;
  ptr_t dma_ptr, p_tail, m_tail;
  logic [DW-1:0] dma_data, pay_rd_data;
  logic [SLOT_W-1:0] meta_rd_slot, pay_rd_slot;
  meta_t meta_rd_data;

  host_dma_region #(.SLOT_BYTES(SB), .CAP(CAPN)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [DW-1:0] pay_ref [CAPN];
  meta_t         meta_ref [CAPN];

  task automatic wr(dma_kind_e k, int p, logic [DW-1:0] d);
    @(negedge clk);
    dma_valid = 1'b1; dma_kind = k; dma_ptr = ptr_t'(p); dma_data = d;
    @(negedge clk);
    dma_valid = 1'b0;
  endtask

  initial begin
    dma_valid = 0; meta_rd_en = 0; pay_rd_en = 0; dma_kind = DMA_PAYLOAD; dma_ptr = 0;
    dma_data = '0; meta_rd_slot = 0; pay_rd_slot = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(p_tail == '0 && m_tail == '0, "tails reset to zero");
    for (int p = 0; p < 2 * CAPN; p++) begin
      logic [DW-1:0] d;
      meta_t m;
      for (int k = 0; k < DW / 32; k++) d[k*32 +: 32] = $urandom;
      m.data_offset = $urandom; m.data_size = 16'($urandom); m.p_slot = 16'($urandom);
      if (p < CAPN || p % 3 == 0) begin
        wr(DMA_PAYLOAD, p, d);  pay_ref[p % CAPN] = d;
        wr(DMA_META, p, DW'(m)); meta_ref[p % CAPN] = m;
      end
    end
    wr(DMA_P_TAIL, 13, '0);
    check(p_tail == ptr_t'(13) && m_tail == '0, "payload tail word written alone");
    wr(DMA_M_TAIL, 11, '0);
    check(p_tail == ptr_t'(13) && m_tail == ptr_t'(11), "metadata tail word written alone");
    for (int s = 0; s < CAPN; s++) begin
      @(negedge clk);
      meta_rd_en = 1'b1; meta_rd_slot = SLOT_W'(s);
      pay_rd_en = 1'b1;  pay_rd_slot = SLOT_W'(CAPN - 1 - s);
      @(negedge clk);
      meta_rd_en = 1'b0; pay_rd_en = 1'b0;
      check(meta_rd_data == meta_ref[s], $sformatf("metadata slot %0d", s));
      check(pay_rd_data == pay_ref[CAPN - 1 - s], $sformatf("payload slot %0d", CAPN - 1 - s));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
