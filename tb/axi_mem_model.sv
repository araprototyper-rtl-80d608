// axi_mem_model: behavioural DRAM behind NP simplified-AXI slave ports that
// share one word array (testbench only, not synthesizable intent).
//
// Each port serves one read burst and one write burst at a time. Read data
// and write acceptance are throttled by a pseudo-random stall (STALL_PCT
// percent of cycles), so masters see back-pressure. Word address =
// byte address / 4, modulo MEM_WORDS. Per-port beat counters let a test see
// which ports carried traffic.
// Memory latency, stall pattern and the AXI subset are this design's own
// choices; the paper's DRAM is the SoC's controller, which is not modelled
// in detail.
module axi_mem_model
  import ara_pkg::*;
#(
  parameter int unsigned NP        = 1,
  parameter int unsigned MEM_WORDS = 65536,
  parameter int unsigned STALL_PCT = 20
) (
  input  logic     clk,
  input  logic     rst_n,
  input  axi_req_t req [NP],
  output axi_rsp_t rsp [NP]
);
  logic [DW-1:0] mem [MEM_WORDS];
  logic          rd_act [NP];
  logic [AW-1:0] rd_addr [NP];
  int unsigned   rd_left [NP];
  logic          wr_act [NP];
  logic          b_pend [NP];
  logic [AW-1:0] wr_addr [NP];
  logic          stall_r [NP];
  logic          stall_w [NP];
  int unsigned   rd_beats [NP];
  int unsigned   wr_beats [NP];

  function automatic int unsigned widx(input logic [AW-1:0] a);
    return int'(a >> 2) % MEM_WORDS;
  endfunction

  always_comb
    for (int p = 0; p < NP; p++) begin
      rsp[p].ar_ready = !rd_act[p];
      rsp[p].r_valid  = rd_act[p] && !stall_r[p];
      rsp[p].r_data   = mem[widx(rd_addr[p])];
      rsp[p].r_last   = rd_act[p] && rd_left[p] == 1;
      rsp[p].aw_ready = !wr_act[p] && !b_pend[p];
      rsp[p].w_ready  = wr_act[p] && !stall_w[p];
      rsp[p].b_valid  = b_pend[p];
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NP; p++) begin
        rd_act[p] <= 0; wr_act[p] <= 0; b_pend[p] <= 0;
        rd_addr[p] <= '0; wr_addr[p] <= '0; rd_left[p] <= 0;
        stall_r[p] <= 0; stall_w[p] <= 0; rd_beats[p] <= 0; wr_beats[p] <= 0;
      end
    end else begin
      for (int p = 0; p < NP; p++) begin
        stall_r[p] <= ($urandom % 100) < STALL_PCT;
        stall_w[p] <= ($urandom % 100) < STALL_PCT;
        if (req[p].ar_valid && rsp[p].ar_ready) begin
          rd_act[p]  <= 1;
          rd_addr[p] <= req[p].ar_addr;
          rd_left[p] <= int'(req[p].ar_len) + 1;
        end
        if (rsp[p].r_valid && req[p].r_ready) begin
          rd_beats[p] <= rd_beats[p] + 1;
          rd_addr[p]  <= rd_addr[p] + 4;
          rd_left[p]  <= rd_left[p] - 1;
          if (rd_left[p] == 1) rd_act[p] <= 0;
        end
        if (req[p].aw_valid && rsp[p].aw_ready) begin
          wr_act[p]  <= 1;
          wr_addr[p] <= req[p].aw_addr;
        end
        if (req[p].w_valid && rsp[p].w_ready) begin
          wr_beats[p] <= wr_beats[p] + 1;
          mem[widx(wr_addr[p])] <= req[p].w_data;
          wr_addr[p] <= wr_addr[p] + 4;
          if (req[p].w_last) begin wr_act[p] <= 0; b_pend[p] <= 1; end
        end
        if (b_pend[p] && req[p].b_ready) b_pend[p] <= 0;
      end
    end
  end
endmodule
