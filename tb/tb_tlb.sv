// tb_tlb: a 16-entry 2-way TLB against a reference model: misses before
// fills, hits after, LRU victim choice, eviction pulse, refill of an
// existing tag, flush, and the two-cycle request spacing.
// LRU replacement follows the paper; associativity, timing and flush are
// this design's own.
module tb_tlb;
  import ara_pkg::*;
  localparam int unsigned ENTRIES = 16, WAYS = 2, SETS = ENTRIES / WAYS;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;
  always #5 clk = ~clk;
  logic flush, init_busy, req_valid, req_ready, req_fill, resp_valid, resp_hit, evict;
  logic [VPN_W-1:0] req_vpn;
  logic [PPN_W-1:0] req_ppn, resp_ppn;
  int checks = 0, failures = 0, evicts = 0;

  tlb #(.ENTRIES(ENTRIES), .WAYS(WAYS)) dut (.*);

  always @(posedge clk) if (evict) evicts++;

  initial begin #500000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  // reference: per set, two (valid, vpn, ppn) slots and an LRU order
  logic [VPN_W-1:0] rv [SETS][2];
  logic [PPN_W-1:0] rp [SETS][2];
  bit               rvalid [SETS][2];
  int               rlru [SETS];           // way to replace next

  task automatic op(input logic fill, input logic [VPN_W-1:0] v, input logic [PPN_W-1:0] p,
                    output logic hit, output logic [PPN_W-1:0] ppn);
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req_valid = 1; req_fill = fill; req_vpn = v; req_ppn = p;
    @(negedge clk);
    req_valid = 0;
    chk(!req_ready, "busy in the cycle after a request");
    hit = resp_hit; ppn = resp_ppn;
    if (!fill) chk(resp_valid, "lookup response one cycle later");
  endtask

  function automatic int ref_find(input logic [VPN_W-1:0] v);
    int s; s = int'(v) % SETS;
    for (int w = 0; w < 2; w++) if (rvalid[s][w] && rv[s][w] == v) return w;
    return -1;
  endfunction

  initial begin
    logic h; logic [PPN_W-1:0] pp;
    int exp_evicts;
    flush = 0; req_valid = 0; req_fill = 0; req_vpn = 0; req_ppn = 0;
    for (int s = 0; s < SETS; s++) begin rvalid[s][0] = 0; rvalid[s][1] = 0; rlru[s] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    chk(init_busy, "clearing after reset");
    wait (!init_busy);
    exp_evicts = 0;
    for (int n = 0; n < 600; n++) begin
      logic [VPN_W-1:0] v;
      int s, w;
      v = VPN_W'($urandom % 48);          // 48 pages over 8 sets: plenty of conflicts
      s = int'(v) % SETS;
      w = ref_find(v);
      op(0, v, '0, h, pp);
      chk(h == (w >= 0), "hit/miss");
      if (w >= 0) begin
        chk(pp == rp[s][w], "ppn");
        rlru[s] = 1 - w;
      end else begin
        logic [PPN_W-1:0] np;
        np = PPN_W'($urandom);
        op(1, v, np, h, pp);
        if (!rvalid[s][0]) w = 0;
        else if (!rvalid[s][1]) w = 1;
        else begin w = rlru[s]; exp_evicts++; end
        rvalid[s][w] = 1; rv[s][w] = v; rp[s][w] = np; rlru[s] = 1 - w;
      end
    end
    chk(evicts == exp_evicts && evicts > 0, "eviction count");
    // refill of a present tag overwrites in place
    begin
      logic [VPN_W-1:0] v; int s, w;
      v = rv[3][0]; s = 3;
      if (rvalid[3][0]) begin
        op(1, v, PPN_W'(20'h12345), h, pp);
        op(0, v, '0, h, pp);
        chk(h && pp == PPN_W'(20'h12345), "refill in place");
      end
    end
    // flush clears everything
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    chk(init_busy, "flush starts clearing");
    wait (!init_busy);
    for (int v = 0; v < 48; v++) begin
      op(0, VPN_W'(v), '0, h, pp);
      chk(!h, "miss after flush");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
