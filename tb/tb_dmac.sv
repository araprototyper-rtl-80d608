// tb_dmac: one DMAC against the behavioural DRAM and behavioural buffers.
// Moves a full page in (DRAM -> buffer), a short unaligned piece in, and a
// piece out (buffer -> DRAM), first with no back-pressure to check the
// streaming rate (one beat per cycle plus per-burst overhead), then with
// random buffer-grant stalls. Checks data, completion pulses and their
// accelerator numbers.
// Page-sized transfers follow the paper; the cycle limits checked are this
// design's own targets, since the paper gives no DMAC timing.
module tb_dmac;
  import ara_pkg::*;
  localparam int unsigned NB = 4, WDS = 4096;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;
  always #5 clk = ~clk;
  logic cmd_valid, cmd_ready, done, busy;
  dma_cmd_t cmd;
  logic [2:0] cmd_count;
  logic [ACCID_W-1:0] done_acc;
  buf_req_t breq;
  logic bgnt;
  logic [DW-1:0] brdata;
  axi_req_t axi_req [1];
  axi_rsp_t axi_rsp [1];
  logic [DW-1:0] bufm [NB][WDS];
  logic stall_en, stall;
  int checks = 0, failures = 0, dones = 0, last_acc = -1, stalls = 0;

  dmac #(.BURST(16), .CMD_DEPTH(4)) dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .cmd_count,
    .done, .done_acc, .busy, .breq, .bgnt, .brdata, .axi_req(axi_req[0]), .axi_rsp(axi_rsp[0]));
  axi_mem_model #(.NP(1), .MEM_WORDS(16384), .STALL_PCT(0)) u_mem (.clk, .rst_n, .req(axi_req), .rsp(axi_rsp));

  assign bgnt = !stall;
  always_ff @(posedge clk) begin
    stall <= stall_en && ($urandom % 3 == 0);
    if (breq.en && bgnt) begin
      if (breq.we) bufm[breq.buf_id % NB][breq.addr] <= breq.wdata;
      else brdata <= bufm[breq.buf_id % NB][breq.addr];
    end
    if (breq.en && !bgnt) stalls++;
    if (done) begin dones++; last_acc = int'(done_acc); end
  end

  initial begin #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic issue(input mem_dir_e dir, input int paddr, input int b, input int off, input int len, input int acc);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1;
    cmd.dir = dir; cmd.paddr = AW'(paddr); cmd.buf_id = BUFID_W'(b); cmd.buf_off = BUF_AW'(off);
    cmd.len = LEN_W'(len); cmd.acc = ACCID_W'(acc);
    @(negedge clk); cmd_valid = 0;
  endtask

  task automatic wait_idle(output int cycles);
    cycles = 0;
    @(negedge clk);
    while (busy) begin @(negedge clk); cycles++; end
  endtask

  initial begin
    int cyc, d0;
    cmd_valid = 0; cmd = '0; stall_en = 0;
    for (int i = 0; i < 16384; i++) u_mem.mem[i] = 32'h5000_0000 + i;
    for (int b = 0; b < NB; b++) for (int i = 0; i < WDS; i++) bufm[b][i] = 32'hBB00_0000 + b * WDS + i;
    repeat (2) @(negedge clk); rst_n = 1;
    // 1. full page, no stalls: rate check
    d0 = dones;
    issue(MEM_READ, 32'h0000_2000, 2, 0, 1024, 3);
    wait_idle(cyc);
    chk(dones == d0 + 1 && last_acc == 3, "page read completion");
    chk(cyc <= 1024 + 64 * 3 + 8, $sformatf("page read rate (%0d cycles)", cyc));
    for (int i = 0; i < 1024; i++) chk(bufm[2][i] == 32'h5000_0000 + 2048 + i, "page read data");
    // 2. page write, no stalls
    issue(MEM_WRITE, 32'h0000_8000, 1, 100, 1024, 5);
    wait_idle(cyc);
    chk(last_acc == 5, "write completion acc");
    chk(cyc <= 1024 + 64 * 4 + 8, $sformatf("page write rate (%0d cycles)", cyc));
    for (int i = 0; i < 1024; i++) chk(u_mem.mem[8192 + i] == 32'hBB00_0000 + WDS + 100 + i, "page write data");
    // 3. with grant stalls: queued unaligned commands
    stall_en = 1;
    d0 = dones;
    issue(MEM_READ, 32'h0000_0104, 0, 7, 37, 1);
    issue(MEM_WRITE, 32'h0000_A010, 3, 4000, 90, 2);
    issue(MEM_READ, 32'h0000_3ffc, 3, 0, 1, 0);
    wait_idle(cyc);
    chk(dones == d0 + 3, "three completions");
    for (int i = 0; i < 37; i++) chk(bufm[0][7 + i] == 32'h5000_0000 + 65 + i, "unaligned read data");
    for (int i = 0; i < 90; i++) chk(u_mem.mem[10244 + i] == 32'hBB00_0000 + 3 * WDS + 4000 + i, "stalled write data");
    chk(bufm[3][0] == 32'h5000_0000 + 4095, "single word read");
    chk(bufm[0][6] == 32'hBB00_0000 + 6 && bufm[0][44] == 32'hBB00_0000 + 44, "no overrun");
    chk(stalls > 0, "buffer stalls exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
