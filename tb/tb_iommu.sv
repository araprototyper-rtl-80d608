// tb_iommu: IOMMU with 2 accelerators, 2 DMACs, a 16-entry TLB and a
// 2-entry miss batch. DMACs are modelled as queues that complete pages
// after random delays; the software miss handler is modelled by a process
// that reads each batch, fills it from a page-table function and releases
// it. Checks every dispatched page command (address translation, page
// cuts, buffer offsets, DMAC choice in both interleaving modes), the
// performance counters, miss batching and the busy flags.
// Page cutting, batched misses, the two interleaving modes and the two
// counters follow the paper; the handshake with the handler is this design's
// own.
module tb_iommu;
  import ara_pkg::*;
  localparam int unsigned NA = 2, ND = 2, MB = 2;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;
  always #5 clk = ~clk;
  logic acc_req_valid [NA], acc_req_ready [NA], acc_busy [NA];
  mem_req_t acc_req [NA];
  logic dma_cmd_valid [ND], dma_cmd_ready [ND], dma_done [ND];
  dma_cmd_t dma_cmd [ND];
  logic [ACCID_W-1:0] dma_done_acc [ND];
  logic intra_acc, tlb_flush, tlb_init_busy, miss_pending, fill_valid, fill_ready, miss_release;
  logic [1:0] miss_count;
  logic [VPN_W-1:0] miss_vpn [MB];
  logic [VPN_W-1:0] fill_vpn;
  logic [PPN_W-1:0] fill_ppn;
  logic pm_clear, tlb_evict;
  logic [31:0] tlb_access_cnt, tlb_miss_cnt;
  int checks = 0, failures = 0, batches = 0, full_batches = 0, filled = 0;

  iommu #(.NUM_ACC(NA), .NUM_DMAC(ND), .TLB_ENTRIES(16), .TLB_WAYS(2), .MISS_BATCH(MB)) dut (.*);

  function automatic logic [PPN_W-1:0] pt(input logic [VPN_W-1:0] v);
    return PPN_W'(v ^ 20'h5A5A5);
  endfunction

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin #3000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // ---- DMAC models ----
  int qn [ND];
  int qacc [ND][$];
  int delay [ND];
  always_comb for (int d = 0; d < ND; d++) dma_cmd_ready[d] = qacc[d].size() < 2;
  // expected command stream, per accelerator
  dma_cmd_t exp_q [NA][$];
  int       exp_d [NA][$];
  always_ff @(posedge clk) begin
    for (int d = 0; d < ND; d++) begin
      dma_done[d] <= 0;
      if (dma_cmd_valid[d] && dma_cmd_ready[d]) begin
        int a; dma_cmd_t e; int ed;
        a = int'(dma_cmd[d].acc);
        qacc[d].push_back(a);
        if (exp_q[a].size() == 0) begin failures++; $display("FAIL unexpected command"); end
        else begin
          e = exp_q[a].pop_front(); ed = exp_d[a].pop_front();
          checks++;
          if (dma_cmd[d] != e || (ed >= 0 && ed != d)) begin
            failures++;
            $display("FAIL cmd acc %0d dmac %0d (exp %0d): got %p exp %p", a, d, ed, dma_cmd[d], e);
          end
        end
      end
      if (qacc[d].size() > 0) begin
        if (delay[d] == 0) begin
          dma_done[d] <= 1; dma_done_acc[d] <= ACCID_W'(qacc[d].pop_front());
          delay[d] <= $urandom % 20;
        end else delay[d] <= delay[d] - 1;
      end
    end
  end

  // ---- software miss handler model ----
  initial begin
    fill_valid = 0; fill_vpn = 0; fill_ppn = 0; miss_release = 0;
    forever begin
      @(negedge clk);
      if (miss_pending) begin
        int n; n = int'(miss_count);
        batches++;
        if (n == MB) full_batches++;
        repeat ($urandom % 30) @(negedge clk);    // handler latency
        for (int i = 0; i < n; i++) begin
          fill_valid = 1; fill_vpn = miss_vpn[i]; fill_ppn = pt(miss_vpn[i]);
          @(posedge clk); while (!fill_ready) @(posedge clk);
          @(negedge clk); fill_valid = 0; filled++;
        end
        miss_release = 1; @(negedge clk); miss_release = 0;
      end
    end
  end

  // ---- request issue with expected page cuts ----
  int dptr_m [NA];
  task automatic request(input int a, input mem_dir_e dir, input int va, input int b, input int off, input int len);
    int v, o, l;
    @(negedge clk);
    while (!acc_req_ready[a]) @(negedge clk);
    acc_req_valid[a] = 1;
    acc_req[a].dir = dir; acc_req[a].vaddr = AW'(va); acc_req[a].buf_id = BUFID_W'(b);
    acc_req[a].buf_off = BUF_AW'(off); acc_req[a].len = LEN_W'(len);
    v = va; o = off; l = len;
    while (l > 0) begin
      int w; dma_cmd_t e;
      w = (4096 - (v % 4096)) / 4;
      if (l < w) w = l;
      e.dir = dir; e.paddr = {pt(VPN_W'(v >> 12)), 12'(v)}; e.buf_id = BUFID_W'(b);
      e.buf_off = BUF_AW'(o); e.len = LEN_W'(w); e.acc = ACCID_W'(a);
      exp_q[a].push_back(e);
      exp_d[a].push_back(intra_acc ? dptr_m[a] : a % ND);
      if (intra_acc) dptr_m[a] = (dptr_m[a] + 1) % ND;
      v += 4 * w; o += w; l -= w;
    end
    @(negedge clk); acc_req_valid[a] = 0;
  endtask

  task automatic wait_quiet();
    @(negedge clk);
    while (acc_busy[0] || acc_busy[1]) @(negedge clk);
  endtask

  initial begin
    int pages;
    for (int a = 0; a < NA; a++) begin acc_req_valid[a] = 0; acc_req[a] = '0; dptr_m[a] = 0; end
    for (int d = 0; d < ND; d++) begin delay[d] = 3; dma_done[d] = 0; dma_done_acc[d] = 0; end
    intra_acc = 1; tlb_flush = 0; pm_clear = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    wait (!tlb_init_busy);
    // ---- phase 1: intra-accelerator interleaving, cold TLB ----
    fork
      begin
        request(0, MEM_READ,  32'h0010_0100, 3, 0, 1500);   // two pages (960 + 540)
        request(0, MEM_WRITE, 32'h0010_2000, 4, 16, 1024);  // one page
        request(0, MEM_READ,  32'h0010_0800, 5, 100, 200);  // page 0x100 again
      end
      begin
        request(1, MEM_READ,  32'h0020_0FFC, 7, 0, 2);      // straddles 0x200/0x201
        request(1, MEM_READ,  32'h0020_3000, 8, 0, 3000);   // 0x203..0x205
        request(1, MEM_WRITE, 32'h0020_1000, 9, 0, 10);
      end
    join
    @(negedge clk); chk(acc_busy[0] || acc_busy[1], "busy while pages in flight");
    wait_quiet();
    chk(exp_q[0].size() == 0 && exp_q[1].size() == 0, "all phase-1 pages dispatched");
    pages = 4 + 6;
    chk(tlb_access_cnt == pages, $sformatf("access counter %0d", tlb_access_cnt));
    chk(tlb_miss_cnt == 3 + 5, $sformatf("miss counter %0d", tlb_miss_cnt));
    chk(batches >= 4 && full_batches >= 1, $sformatf("misses grouped (%0d batches, %0d full)", batches, full_batches));
    chk(filled == 8, $sformatf("fills %0d", filled));
    // ---- phase 2: inter-accelerator interleaving, warm TLB, counters cleared ----
    @(negedge clk); pm_clear = 1; @(negedge clk); pm_clear = 0;
    chk(tlb_access_cnt == 0 && tlb_miss_cnt == 0, "counters cleared");
    intra_acc = 0;
    fork
      request(0, MEM_READ, 32'h0010_1000, 1, 0, 2048);      // 0x101, 0x102
      request(1, MEM_WRITE, 32'h0020_4000, 2, 0, 1024);     // 0x204
    join
    wait_quiet();
    chk(exp_q[0].size() == 0 && exp_q[1].size() == 0, "all phase-2 pages dispatched");
    chk(tlb_access_cnt == 3 && tlb_miss_cnt == 0, "phase-2 all hits");
    for (int a = 0; a < NA; a++) chk(!acc_busy[a], "idle at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
