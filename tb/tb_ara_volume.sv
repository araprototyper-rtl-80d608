// tb_ara_volume: the default medical-imaging input, one volume of 128 slices
// of 128 x 128 32-bit elements (8 MB, 2048 pages), streamed through the
// accelerator plane at its default configuration. The volume is cut into
// 512 chunks of 4096 words, one 16 KB bank each; in every round the five
// vector-square accelerator models each take one chunk (read request of
// four pages, one pass of 4096 elements at one per cycle, write request of
// four pages). A CPU thread over AXI4-Lite allocates the banks, writes the
// parameters, starts the round, and serves TLB-miss batches.
// Two passes over the same volume, coherent at DRAM with intra-accelerator
// interleaving: the first starts from a cold TLB, so every one of the 4096
// pages (input and output) misses once; the second must hit on all of
// them, since 4096 pages are well inside the 32K-entry TLB. Checked: every
// output element against the square of its input, the TLB access and miss
// counters of each pass, one element per cycle in every compute pass, and
// that most miss batches carried several misses (a blocked accelerator
// probes the rest of its request, so the misses of its four pages travel
// together). The cycle count and
// the achieved words per cycle of each pass are printed.
// The input size (128 slices of 128 x 128) is the paper's default kernel
// input; the 32-bit element, the chunking and the square kernel are this
// test's own.
module tb_ara_volume;
  import ara_pkg::*;
  localparam int unsigned NA = NUM_ACC, NPT = TOTAL_PORTS;
  localparam int unsigned MW = 1 << 23;                    // 32 MB of DRAM model
  localparam int unsigned VOL_WORDS = 128 * 128 * 128;     // one volume
  localparam int unsigned CHUNK = BUF_WORDS;               // one bank
  localparam int unsigned NCHUNK = VOL_WORDS / CHUNK;
  localparam int unsigned VA_IN = 32'h1000_0000, VA_OUT = 32'h2080_0000;
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
  axi_mem_model #(.NP(NUM_DMAC + 1), .MEM_WORDS(MW), .STALL_PCT(10)) u_mem (.clk, .rst_n, .req(mreq), .rsp(mrsp));

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

  initial begin #80ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

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
  int n_fills = 0, n_batches = 0, n_grouped = 0;
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


  function automatic logic [31:0] elem(input int unsigned i);
    return 32'(i * 2654435761) ^ 32'(i >> 7);
  endfunction

  int bad_out = 0, slow = 0;
  task automatic one_pass(input int pass, output int cycles);
    logic [31:0] st;
    bit alldone;
    int t0, nact;
    t0 = cyc;
    for (int c0 = 0; c0 < int'(NCHUNK); c0 += NA) begin
      nact = (int'(NCHUNK) - c0 < int'(NA)) ? int'(NCHUNK) - c0 : int'(NA);
      for (int a = 0; a < nact; a++) begin
        wr(12'(12'h404 + 12'h080 * a), VA_IN + 4 * CHUNK * (c0 + a));
        wr(12'(12'h408 + 12'h080 * a), VA_OUT + 4 * CHUNK * (c0 + a));
        wr(12'(12'h40C + 12'h080 * a), in_buf[a]);
        wr(12'(12'h410 + 12'h080 * a), out_buf[a]);
        wr(12'(12'h414 + 12'h080 * a), CHUNK);
      end
      for (int a = 0; a < nact; a++) wr(12'(12'h400 + 12'h080 * a), 1);
      do begin
        if (miss_irq) serve_misses();
        alldone = 1;
        for (int a = 0; a < nact; a++) begin
          rd(12'(12'h400 + 12'h080 * a), st);
          if (!st[1]) alldone = 0;
        end
      end while (!alldone);
      for (int a = 0; a < nact; a++) if (compute_cycles[a] != int'(CHUNK) + 1) slow++;
    end
    cycles = cyc - t0;
  endtask

  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    logic [31:0] st, acc_n, miss_n;
    int cycles;
    s_awvalid = 0; s_wvalid = 0; s_bready = 0; s_arvalid = 0; s_rready = 0;
    s_awaddr = 0; s_araddr = 0; s_wdata = 0;
    for (int a = 0; a < NA; a++) acc_done[a] = 0;
    for (int b = 0; b < NUM_BUF; b++) occupied[b] = 0;
    for (int i = 0; i < int'(VOL_WORDS); i++) begin
      u_mem.mem[pa_word(VA_IN + 4 * i)]  = elem(i);
      u_mem.mem[pa_word(VA_OUT + 4 * i)] = 32'hDEAD_BEEF;
    end
    repeat (3) @(negedge clk); rst_n = 1;
    do rd(12'h004, st); while (st[0]);
    for (int a = 0; a < NA; a++) begin
      int pb; pb = first_port(a);
      in_buf[a] = pick_buf(pb); out_buf[a] = pick_buf(pb + 1);
      chk(in_buf[a] >= 0 && out_buf[a] >= 0, "allocation found");
      wr(12'(12'h100 + 4 * pb), 32'h8000_0000 | in_buf[a]);
      wr(12'(12'h100 + 4 * (pb + 1)), 32'h8000_0000 | out_buf[a]);
    end
    wr(12'h000, 32'h0000_0202);                              // DRAM, intra, clear counters
    for (int pass = 1; pass <= 2; pass++) begin
      int b0; b0 = n_batches;
      one_pass(pass, cycles);
      rd(12'h008, acc_n); rd(12'h00C, miss_n);
      chk(acc_n == 2 * VOL_WORDS / PAGE_WORDS, $sformatf("pass %0d TLB accesses %0d exp %0d", pass, acc_n, 2 * VOL_WORDS / PAGE_WORDS));
      chk(miss_n == ((pass == 1) ? 2 * VOL_WORDS / PAGE_WORDS : 0), $sformatf("pass %0d TLB misses %0d", pass, miss_n));
      if (pass == 1) chk(2 * n_grouped > n_batches - b0, $sformatf("pass 1: %0d of %0d batches carried several misses", n_grouped, n_batches - b0));
      else chk(n_batches == b0, "pass 2 needed no miss handling");
      bad_out = 0;
      for (int i = 0; i < int'(VOL_WORDS); i++) begin
        logic [31:0] x; x = elem(i);
        if (u_mem.mem[pa_word(VA_OUT + 4 * i)] != x * x) bad_out++;
        u_mem.mem[pa_word(VA_OUT + 4 * i)] = 32'hDEAD_BEEF;
      end
      chk(bad_out == 0, $sformatf("pass %0d: %0d of %0d output elements wrong", pass, bad_out, VOL_WORDS));
      chk(slow == 0, $sformatf("pass %0d: %0d compute passes slower than one element per cycle", pass, slow));
      $display("pass %0d: %0d cycles, %0d TLB accesses, %0d misses, %0d batches, %0.2f words/cycle",
               pass, cycles, acc_n, miss_n, n_batches - b0, real'(2 * VOL_WORDS) / real'(cycles));
      wr(12'h000, 32'h0000_0202);                            // clear counters
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
