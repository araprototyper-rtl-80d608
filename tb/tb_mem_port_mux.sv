// tb_mem_port_mux: two DMACs (as traffic sources) behind the coherency
// mux, with separate behavioural memories for the HP ports and the ACP.
// Coherent at DRAM: each DMAC's traffic must land in the HP memory only,
// through its own port. Coherent at LLC: simultaneous reads and writes of
// both DMACs must all go through the ACP memory, interleaved burst by burst.
// The two coherency choices follow the paper; the arbitration checked for
// the ACP is this design's own.
module tb_mem_port_mux;
  import ara_pkg::*;
  localparam int unsigned ND = 2, WDS = 2048;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;
  always #5 clk = ~clk;
  logic coherent_llc, acp_busy;
  axi_req_t dreq [ND];
  axi_rsp_t drsp [ND];
  axi_req_t hreq [ND];
  axi_rsp_t hrsp [ND];
  axi_req_t areq [1];
  axi_rsp_t arsp [1];
  logic cmd_valid [ND], cmd_ready [ND], done [ND], busy [ND];
  dma_cmd_t cmd [ND];
  buf_req_t breq [ND];
  logic [DW-1:0] brdata [ND];
  logic [DW-1:0] bufm [ND][WDS];
  int checks = 0, failures = 0, acp_switches = 0;
  logic [0:0] last_r_owner;

  for (genvar d = 0; d < ND; d++) begin : g_d
    dmac u_d (.clk, .rst_n, .cmd_valid(cmd_valid[d]), .cmd_ready(cmd_ready[d]), .cmd(cmd[d]),
      .cmd_count(), .done(done[d]), .done_acc(), .busy(busy[d]), .breq(breq[d]), .bgnt(1'b1),
      .brdata(brdata[d]), .axi_req(dreq[d]), .axi_rsp(drsp[d]));
    always_ff @(posedge clk)
      if (breq[d].en) begin
        if (breq[d].we) bufm[d][breq[d].addr % WDS] <= breq[d].wdata;
        else brdata[d] <= bufm[d][breq[d].addr % WDS];
      end
  end

  mem_port_mux #(.NUM_DMAC(ND)) dut (.clk, .rst_n, .coherent_llc, .dma_req(dreq), .dma_rsp(drsp),
    .hp_req(hreq), .hp_rsp(hrsp), .acp_req(areq[0]), .acp_rsp(arsp[0]), .acp_busy);
  axi_mem_model #(.NP(ND), .MEM_WORDS(8192), .STALL_PCT(25)) u_hp  (.clk, .rst_n, .req(hreq), .rsp(hrsp));
  axi_mem_model #(.NP(1),  .MEM_WORDS(8192), .STALL_PCT(25)) u_acp (.clk, .rst_n, .req(areq), .rsp(arsp));

  // count how often the ACP read grant moves between DMACs
  always_ff @(posedge clk)
    if (areq[0].ar_valid && arsp[0].ar_ready) begin
      if (dut.r_own != last_r_owner) acp_switches++;
      last_r_owner <= dut.r_own;
    end

  initial begin #3000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic go(input int d, input mem_dir_e dir, input int paddr, input int len);
    @(negedge clk);
    while (!cmd_ready[d]) @(negedge clk);
    cmd_valid[d] = 1; cmd[d] = '0; cmd[d].dir = dir; cmd[d].paddr = AW'(paddr);
    cmd[d].len = LEN_W'(len); cmd[d].buf_off = '0;
    @(negedge clk); cmd_valid[d] = 0;
  endtask

  task automatic wait_idle();
    @(negedge clk);
    while (busy[0] || busy[1] || acp_busy) @(negedge clk);
  endtask

  initial begin
    for (int d = 0; d < ND; d++) begin cmd_valid[d] = 0; cmd[d] = '0; end
    for (int i = 0; i < 8192; i++) begin u_hp.mem[i] = 32'h1100_0000 + i; u_acp.mem[i] = 32'h2200_0000 + i; end
    for (int d = 0; d < ND; d++) for (int i = 0; i < WDS; i++) bufm[d][i] = 32'hD000_0000 + d * 65536 + i;
    last_r_owner = 0;
    coherent_llc = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    // ---- coherent at DRAM ----
    fork
      go(0, MEM_READ, 32'h0000_0000, 300);
      go(1, MEM_READ, 32'h0000_1000, 300);
    join
    wait_idle();
    for (int i = 0; i < 300; i++) begin
      chk(bufm[0][i] == 32'h1100_0000 + i, "DRAM mode read dmac0");
      chk(bufm[1][i] == 32'h1100_0000 + 1024 + i, "DRAM mode read dmac1");
    end
    chk(u_hp.rd_beats[0] == 300 && u_hp.rd_beats[1] == 300, "each DMAC on its own HP port");
    chk(u_acp.rd_beats[0] == 0, "ACP idle in DRAM mode");
    // ---- coherent at LLC ----
    @(negedge clk); coherent_llc = 1;
    fork
      go(0, MEM_READ, 32'h0000_2000, 200);
      go(1, MEM_READ, 32'h0000_3000, 200);
    join
    wait_idle();
    for (int i = 0; i < 200; i++) begin
      chk(bufm[0][i] == 32'h2200_0000 + 2048 + i, "LLC mode read dmac0");
      chk(bufm[1][i] == 32'h2200_0000 + 3072 + i, "LLC mode read dmac1");
    end
    fork
      go(0, MEM_WRITE, 32'h0000_4000, 150);
      go(1, MEM_WRITE, 32'h0000_5000, 150);
    join
    wait_idle();
    for (int i = 0; i < 150; i++) begin
      chk(u_acp.mem[4096 + i] == bufm[0][i], "LLC mode write dmac0");
      chk(u_acp.mem[5120 + i] == bufm[1][i], "LLC mode write dmac1");
      chk(u_hp.mem[4096 + i] == 32'h1100_0000 + 4096 + i, "HP memory untouched");
    end
    chk(u_hp.rd_beats[0] == 300 && u_hp.wr_beats[0] == 0, "HP idle in LLC mode");
    chk(acp_switches >= 2, $sformatf("ACP shared burst by burst (%0d switches)", acp_switches));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
