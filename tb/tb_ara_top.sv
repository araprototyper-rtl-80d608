// tb_ara_top: end-to-end test of the accelerator plane at its default
// configuration (5 accelerators, 37 ports, 32 x 16 KB buffers, 4 DMACs,
// 32K-entry TLB). Five vector-square accelerator models sit on the first two
// ports of each accelerator slot; one behavioural memory serves the four HP
// ports and the ACP. The CPU side is a single software thread over
// AXI4-Lite that plays buffer allocator, miss handler and performance
// monitor. Three runs of all five accelerators at once:
//   1. coherent at DRAM, intra-accelerator interleaving, cold TLB;
//   2. coherent at LLC (ACP only), inter-accelerator interleaving;
//   3. DRAM again, inputs placed so that pages collide in one TLB set
//      (LRU evictions) and one input re-used (TLB hits).
// Every output element is checked against the square of its input, the
// performance counters against the page counts, the DMAC each page went to
// against the interleaving mode, and each mechanism is
// counted; one that never happens counts as a failure.
// Configuration, page granularity, interleaving modes, coherency choice,
// miss batching and counters are the paper's; the addresses, lengths and the
// simple allocator and miss handler are this test's own.
module tb_ara_top;
  import ara_pkg::*;
  localparam int unsigned NA = NUM_ACC, NPT = TOTAL_PORTS, MW = 262144;  // 1 MB of DRAM model
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;
  always #5 clk = ~clk;

  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic s_arvalid, s_arready, s_rvalid, s_rready, miss_irq;
  logic [11:0] s_awaddr, s_araddr;
  logic [31:0] s_wdata, s_rdata;
  port_req_t     acc_port_req [NPT];
  logic [DW-1:0] acc_port_rdata [NPT];
  logic acc_req_valid [NA], acc_req_ready [NA], acc_mem_busy [NA], acc_start [NA], acc_done [NA];
  mem_req_t acc_req [NA];
  logic [31:0] acc_params [NA][MAX_PARAMS];
  axi_req_t hp_req [NUM_DMAC];
  axi_rsp_t hp_rsp [NUM_DMAC];
  axi_req_t acp_req;
  axi_rsp_t acp_rsp;
  axi_req_t mreq [NUM_DMAC + 1];
  axi_rsp_t mrsp [NUM_DMAC + 1];
  int compute_cycles [NA];

  ara_top dut (.*);

  // one physical memory behind HP0..3 (ports 0..3) and the ACP (port 4)
  always_comb begin
    for (int d = 0; d < NUM_DMAC; d++) begin mreq[d] = hp_req[d]; hp_rsp[d] = mrsp[d]; end
    mreq[NUM_DMAC] = acp_req; acp_rsp = mrsp[NUM_DMAC];
  end
  axi_mem_model #(.NP(NUM_DMAC + 1), .MEM_WORDS(MW), .STALL_PCT(15)) u_mem (.clk, .rst_n, .req(mreq), .rsp(mrsp));

  // With all five accelerators active at once (more than the crossbar's
  // guaranteed three), accelerator 4 uses its local ports 2 and 3, which
  // reach spare banks that its ports 0 and 1 share with others.
  function automatic int first_port(input int a);
    return int'(port_base(ACC_PORTS, a)) + ((a == 4) ? 2 : 0);
  endfunction

  for (genvar a = 0; a < NA; a++) begin : g_acc
    localparam int unsigned PB = port_base(ACC_PORTS, a) + ((a == 4) ? 2 : 0);
    tb_acc_model #(.MAXP(MAX_PARAMS)) u_acc (
      .clk, .rst_n, .p0_req(acc_port_req[PB]), .p0_rdata(acc_port_rdata[PB]), .p1_req(acc_port_req[PB + 1]),
      .req_valid(acc_req_valid[a]), .req_ready(acc_req_ready[a]), .req(acc_req[a]),
      .mem_busy(acc_mem_busy[a]), .start(acc_start[a]), .params(acc_params[a]), .done(acc_done[a]),
      .compute_cycles(compute_cycles[a]));
  end
  always_comb
    for (int p = 0; p < NPT; p++) begin
      bit used; used = 0;
      for (int a = 0; a < NA; a++) if (p == first_port(a) || p == first_port(a) + 1) used = 1;
      if (!used) acc_port_req[p] = '0;
    end

  int checks = 0, failures = 0;
  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin #20ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // ---- mechanism counters (probes) ----
  int n_batches = 0, n_grouped = 0, n_evict = 0, n_conflict = 0, n_cut = 0, n_inter_bad = 0, n_inter_ok = 0;
  int n_reads = 0, n_writes = 0, n_reject = 0;
  bit phase_inter = 0;
  logic [NUM_DMAC-1:0] intra_used [NA];   // DMACs each accelerator used in intra mode
  initial foreach (intra_used[a]) intra_used[a] = '0;
  always_ff @(posedge clk) if (rst_n) begin
    if (dut.u_iommu.tlb_evict) n_evict++;
    for (int d = 0; d < NUM_DMAC; d++) begin
      if (dut.dbreq[d].en && !dut.dbgnt[d]) n_conflict++;
      if (dut.dcmd_valid[d] && dut.dcmd_ready[d]) begin
        if (dut.dcmd[d].len != LEN_W'(PAGE_WORDS)) n_cut++;
        if (dut.dcmd[d].dir == MEM_READ) n_reads++; else n_writes++;
        if (phase_inter) begin
          if (int'(dut.dcmd[d].acc) % NUM_DMAC == d) n_inter_ok++; else n_inter_bad++;
        end else begin
          intra_used[dut.dcmd[d].acc][d] <= 1'b1;
        end
      end
    end
  end

  // ---- AXI4-Lite master ----
  task automatic wr(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk);
    s_awvalid = 1; s_wvalid = 1; s_awaddr = a; s_wdata = d;
    @(posedge clk); while (!s_awready) @(posedge clk);
    @(negedge clk); s_awvalid = 0; s_wvalid = 0;
    while (!s_bvalid) @(negedge clk);
    s_bready = 1; @(negedge clk); s_bready = 0;
  endtask
  task automatic rd(input logic [11:0] a, output logic [31:0] d);
    @(negedge clk);
    s_arvalid = 1; s_araddr = a;
    @(posedge clk); while (!s_arready) @(posedge clk);
    @(negedge clk); s_arvalid = 0;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata; s_rready = 1; @(negedge clk); s_rready = 0;
  endtask

  // ---- page table kept by the "OS": allocated on first touch ----
  int unsigned ptab [int unsigned];
  int unsigned next_ppn = 1;
  function automatic int unsigned ppn_of(input int unsigned vpn);
    if (!ptab.exists(vpn)) begin ptab[vpn] = next_ppn; next_ppn++; end
    return ptab[vpn];
  endfunction
  function automatic int unsigned pa_word(input int unsigned va);
    return (ppn_of(va >> 12) * 1024 + (va % 4096) / 4) % MW;
  endfunction

  // ---- miss handler: read the batch, fill it, release ----
  int n_fills = 0;
  task automatic serve_misses();
    logic [31:0] n, v;
    rd(12'h010, n);
    n_batches++;
    if (n > 1) n_grouped++;
    for (int i = 0; i < int'(n); i++) begin
      rd(12'(12'h040 + 4 * i), v);
      wr(12'h014, v);
      wr(12'h018, ppn_of(v));
      n_fills++;
    end
    wr(12'h01C, 1);
  endtask

  // ---- buffer allocator: greedy over each port's allowed set, highest
  // bank first so that shared ports take spare banks before dedicated ones ----
  bit occupied [NUM_BUF];
  int in_buf [NA], out_buf [NA];
  function automatic int pick_buf(input int p);
    for (int b = NUM_BUF - 1; b >= 0; b--)
      if (DEFAULT_CONN[p * NUM_BUF + b] && !occupied[b]) begin occupied[b] = 1; return b; end
    return -1;
  endfunction

  // ---- one run of all accelerators ----
  int unsigned va_in [NA], va_out [NA], lens [NA];
  task automatic run_all(input string tag);
    logic [31:0] st;
    bit alldone;
    for (int a = 0; a < NA; a++) begin
      for (int i = 0; i < int'(lens[a]); i++) u_mem.mem[pa_word(va_in[a] + 4 * i)] = 32'(a * 7919 + i * 3 + 1);
      for (int i = 0; i < int'(lens[a]); i++) u_mem.mem[pa_word(va_out[a] + 4 * i)] = 32'hDEAD_BEEF;
      wr(12'(12'h404 + 12'h080 * a), va_in[a]);
      wr(12'(12'h408 + 12'h080 * a), va_out[a]);
      wr(12'(12'h40C + 12'h080 * a), in_buf[a]);
      wr(12'(12'h410 + 12'h080 * a), out_buf[a]);
      wr(12'(12'h414 + 12'h080 * a), lens[a]);
    end
    for (int a = 0; a < NA; a++) wr(12'(12'h400 + 12'h080 * a), 1);
    do begin
      if (miss_irq) serve_misses();
      alldone = 1;
      for (int a = 0; a < NA; a++) begin
        rd(12'(12'h400 + 12'h080 * a), st);
        if (!st[1]) alldone = 0;
      end
    end while (!alldone);
    for (int a = 0; a < NA; a++) begin
      int bad; bad = 0;
      for (int i = 0; i < int'(lens[a]); i++) begin
        logic [31:0] x; x = 32'(a * 7919 + i * 3 + 1);
        if (u_mem.mem[pa_word(va_out[a] + 4 * i)] != x * x) bad++;
      end
      chk(bad == 0, $sformatf("%s: accelerator %0d output (%0d wrong of %0d)", tag, a, bad, lens[a]));
      chk(compute_cycles[a] == int'(lens[a]) + 1, $sformatf("%s: accelerator %0d one element per cycle", tag, a));
    end
  endtask

  function automatic int pages_of(input int unsigned va, input int unsigned len);
    return int'(((va + 4 * len - 1) >> 12) - (va >> 12)) + 1;
  endfunction

  initial begin
    logic [31:0] st, acc_n, miss_n;
    int exp_pages, hp0 [NUM_DMAC], acp0;
    s_awvalid = 0; s_wvalid = 0; s_bready = 0; s_arvalid = 0; s_rready = 0;
    s_awaddr = 0; s_araddr = 0; s_wdata = 0;
    for (int a = 0; a < NA; a++) acc_done[a] = 0;
    for (int b = 0; b < NUM_BUF; b++) occupied[b] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    do rd(12'h004, st); while (st[0]);                       // TLB clearing
    chk(!st[1], "no miss pending at start");

    // buffer allocation through the crossbar
    for (int a = 0; a < NA; a++) begin
      int pb; pb = first_port(a);
      in_buf[a] = pick_buf(pb); out_buf[a] = pick_buf(pb + 1);
      chk(in_buf[a] >= 0 && out_buf[a] >= 0, "allocation found");
      wr(12'(12'h100 + 4 * pb), 32'h8000_0000 | in_buf[a]);
      wr(12'(12'h100 + 4 * (pb + 1)), 32'h8000_0000 | out_buf[a]);
      rd(12'h004, st); chk(!st[2], "legal selection accepted");
    end
    // an occupied buffer and a buffer outside the port's set are refused
    wr(12'(12'h100 + 4 * 2), 32'h8000_0000 | in_buf[0]);
    rd(12'h004, st); if (st[2]) n_reject++;
    begin
      int pb, b; pb = int'(port_base(ACC_PORTS, 4)); b = -1;   // port 4.0, unused
      for (int k = 0; k < NUM_BUF; k++) if (!DEFAULT_CONN[pb * NUM_BUF + k] && b < 0) b = k;
      wr(12'(12'h100 + 4 * pb), 32'h8000_0000 | b);
      rd(12'h004, st); if (st[2]) n_reject++;
    end
    chk(n_reject == 2, "crossbar refused both illegal selections");

    // ---- run 1: coherent at DRAM, intra-accelerator interleaving ----
    exp_pages = 0;
    for (int a = 0; a < NA; a++) begin
      va_in[a]  = 32'h4000_0000 + a * 32'h0001_0000 + 32'h100;
      va_out[a] = 32'h5000_0000 + a * 32'h0001_0000 + 32'h40;
      lens[a]   = 1500 + 500 * a;
      exp_pages += pages_of(va_in[a], lens[a]) + pages_of(va_out[a], lens[a]);
    end
    wr(12'h000, 32'h0000_0202);                              // intra, clear counters
    run_all("run1");
    rd(12'h008, acc_n); rd(12'h00C, miss_n);
    chk(acc_n == exp_pages, $sformatf("run1 TLB accesses %0d exp %0d", acc_n, exp_pages));
    chk(miss_n == exp_pages, $sformatf("run1 TLB misses %0d exp %0d (all cold)", miss_n, exp_pages));
    for (int d = 0; d < NUM_DMAC; d++) begin
      chk(u_mem.rd_beats[d] > 0 && u_mem.wr_beats[d] > 0, $sformatf("run1 HP port %0d used", d));
      hp0[d] = u_mem.rd_beats[d] + u_mem.wr_beats[d];
    end
    chk(u_mem.rd_beats[NUM_DMAC] == 0, "run1 ACP idle");

    // ---- run 2: coherent at LLC, inter-accelerator interleaving ----
    for (int a = 0; a < NA; a++) begin
      va_in[a]  = 32'h6000_0000 + a * 32'h0001_0000;
      va_out[a] = 32'h7000_0000 + a * 32'h0001_0000 + 32'hFF0;
      lens[a]   = 1024 + 333 * a;
    end
    wr(12'h000, 32'h0000_0001);
    phase_inter = 1;
    run_all("run2");
    phase_inter = 0;
    for (int d = 0; d < NUM_DMAC; d++)
      chk(u_mem.rd_beats[d] + u_mem.wr_beats[d] == hp0[d], $sformatf("run2 HP port %0d idle", d));
    chk(u_mem.rd_beats[NUM_DMAC] > 0 && u_mem.wr_beats[NUM_DMAC] > 0, "run2 traffic through the ACP");
    acp0 = u_mem.rd_beats[NUM_DMAC];

    // ---- run 3: DRAM again; TLB set conflicts and a re-used input ----
    // VPNs 16384 pages apart share a TLB set (16384 sets, 2 ways): three
    // inputs and three outputs that collide pairwise force LRU evictions
    for (int a = 0; a < 3; a++) begin
      va_in[a]  = 32'h0805_0000 + a * 32'h0400_0000;
      va_out[a] = 32'h0907_0000 + a * 32'h0400_0000;
      lens[a]   = 2048;
    end
    // accelerators 3 and 4 read again what they read in run 2: TLB hits
    va_out[3] = 32'h5800_0000; lens[3] = 1500;
    va_out[4] = 32'h5900_0000; lens[4] = 1500;
    wr(12'h000, 32'h0000_0202);
    run_all("run3");
    rd(12'h008, acc_n); rd(12'h00C, miss_n);
    chk(acc_n > miss_n, $sformatf("run3 TLB hits (%0d accesses, %0d misses)", acc_n, miss_n));
    chk(u_mem.rd_beats[NUM_DMAC] == acp0, "run3 ACP idle");

    // ---- mechanisms ----
    chk(n_batches > 0,    $sformatf("miss batches: %0d", n_batches));
    chk(n_grouped > 0,    $sformatf("batches with several misses: %0d", n_grouped));
    chk(n_evict > 0,      $sformatf("TLB LRU evictions: %0d", n_evict));
    chk(n_conflict > 0,   $sformatf("interleaved-network conflict stalls: %0d", n_conflict));
    chk(n_cut > 0,        $sformatf("requests cut at page boundaries: %0d", n_cut));
    chk(n_reads > 0 && n_writes > 0, $sformatf("DMAC reads %0d, writes %0d", n_reads, n_writes));
    for (int a = 0; a < NA; a++)
      chk($countones(intra_used[a]) >= 2, $sformatf("intra-accelerator interleaving spread acc %0d over DMACs %b", a, intra_used[a]));
    chk(n_inter_ok > 0 && n_inter_bad == 0, $sformatf("inter-accelerator mapping %0d ok, %0d wrong", n_inter_ok, n_inter_bad));
    $display("mechanisms: batches=%0d grouped=%0d fills=%0d evictions=%0d conflicts=%0d cuts=%0d reads=%0d writes=%0d rejects=%0d",
             n_batches, n_grouped, n_fills, n_evict, n_conflict, n_cut, n_reads, n_writes, n_reject);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
