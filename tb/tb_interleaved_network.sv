// tb_interleaved_network: 3 DMACs x 4 buffers with behavioural buffer
// memories. Random DMAC traffic; checks grants (lowest DMAC wins a
// conflict), that only granted writes land, and that read data returns one
// cycle later from the right buffer.
// The paper gives the network's purpose only; the priority rule checked here
// is this design's own.
module tb_interleaved_network;
  import ara_pkg::*;
  localparam int unsigned ND = 3, NB = 4, WDS = 16;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;
  always #5 clk = ~clk;
  buf_req_t      dma_req [ND];
  logic          dma_gnt [ND];
  logic [DW-1:0] dma_rdata [ND];
  port_req_t     buf_req [NB];
  logic [DW-1:0] buf_rdata [NB];
  logic [DW-1:0] mem [NB][WDS];
  logic [DW-1:0] refm [NB][WDS];
  int checks = 0, failures = 0, conflicts = 0;

  interleaved_network #(.NUM_DMAC(ND), .NUM_BUF(NB)) dut (.*);

  // behavioural buffers (port B)
  always_ff @(posedge clk)
    for (int b = 0; b < NB; b++)
      if (buf_req[b].en) begin
        if (buf_req[b].we) mem[b][buf_req[b].addr % WDS] <= buf_req[b].wdata;
        else buf_rdata[b] <= mem[b][buf_req[b].addr % WDS];
      end

  initial begin #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    for (int b = 0; b < NB; b++) for (int i = 0; i < WDS; i++) begin mem[b][i] = 0; refm[b][i] = 0; end
    for (int d = 0; d < ND; d++) dma_req[d] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      logic [DW-1:0] exp_rd [ND];
      logic          exp_g  [ND];
      bit            taken  [NB];
      @(negedge clk);
      for (int b = 0; b < NB; b++) taken[b] = 0;
      for (int d = 0; d < ND; d++) begin
        dma_req[d].en     = ($urandom % 4) != 0;
        dma_req[d].we     = $urandom % 2;
        dma_req[d].buf_id = BUFID_W'($urandom % NB);
        dma_req[d].addr   = BUF_AW'($urandom % WDS);
        dma_req[d].wdata  = $urandom;
        exp_g[d] = dma_req[d].en && !taken[dma_req[d].buf_id];
        if (dma_req[d].en && taken[dma_req[d].buf_id]) conflicts++;
        if (exp_g[d]) taken[dma_req[d].buf_id] = 1;
      end
      #1;
      for (int d = 0; d < ND; d++) begin
        chk(dma_gnt[d] == exp_g[d], $sformatf("grant dmac %0d", d));
        if (exp_g[d] && !dma_req[d].we) exp_rd[d] = refm[dma_req[d].buf_id][dma_req[d].addr];
      end
      for (int d = 0; d < ND; d++)
        if (exp_g[d] && dma_req[d].we) refm[dma_req[d].buf_id][dma_req[d].addr] = dma_req[d].wdata;
      @(posedge clk); #1;
      for (int d = 0; d < ND; d++)
        if (exp_g[d] && !dma_req[d].we) chk(dma_rdata[d] == exp_rd[d], $sformatf("rdata dmac %0d", d));
    end
    chk(conflicts > 0, "conflicts exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
