// mem_port_mux: the coherency choice between the DMACs and the processor
// plane.
//
// Coherent at DRAM (coherent_llc = 0, the default of the paper's example
// specification): DMAC i drives high-performance port HP i straight to the
// DRAM controller, so the four DMACs use four ports in parallel.
// Coherent at the last-level cache (coherent_llc = 1): all DMACs share the
// single accelerator-coherent port (ACP) into the CPU's L2. Read and write
// channels are arbitrated independently, round-robin, one whole burst at a
// time: the address of the granted DMAC is forwarded, then its data beats
// (and, for writes, the response) until the burst ends. The HP ports are
// idle in this mode and the ACP is idle in the other. The mode must only be
// changed while no burst is in flight. The two modes and the port counts
// follow the paper; arbitration policy and burst locking are this design's
// choices.
module mem_port_mux
  import ara_pkg::*;
#(
  parameter int unsigned NUM_DMAC = ara_pkg::NUM_DMAC,
  localparam int unsigned DSW = (NUM_DMAC > 1) ? $clog2(NUM_DMAC) : 1
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     coherent_llc,
  input  axi_req_t dma_req [NUM_DMAC],
  output axi_rsp_t dma_rsp [NUM_DMAC],
  output axi_req_t hp_req  [NUM_DMAC],
  input  axi_rsp_t hp_rsp  [NUM_DMAC],
  output axi_req_t acp_req,
  input  axi_rsp_t acp_rsp,
  output logic     acp_busy
);
  typedef enum logic [1:0] {R_IDLE, R_ADDR, R_DATA}           rd_state_e;
  typedef enum logic [1:0] {W_IDLE, W_ADDR, W_DATA, W_RESP}   wr_state_e;
  rd_state_e rs;
  wr_state_e ws;
  logic [DSW-1:0] r_own, w_own, r_rr, w_rr;

  // round-robin pick of the next requester
  logic           r_any, w_any;
  logic [DSW-1:0] r_pick, w_pick;
  always_comb begin
    r_any = 1'b0; w_any = 1'b0; r_pick = '0; w_pick = '0;
    for (int unsigned k = 0; k < NUM_DMAC; k++) begin
      int unsigned d;
      d = (int'(r_rr) + k) % NUM_DMAC;
      if (!r_any && dma_req[d].ar_valid) begin r_any = 1'b1; r_pick = DSW'(d); end
    end
    for (int unsigned k = 0; k < NUM_DMAC; k++) begin
      int unsigned d;
      d = (int'(w_rr) + k) % NUM_DMAC;
      if (!w_any && dma_req[d].aw_valid) begin w_any = 1'b1; w_pick = DSW'(d); end
    end
  end

  always_comb begin
    acp_req = '0;
    for (int unsigned d = 0; d < NUM_DMAC; d++) begin
      hp_req[d]  = coherent_llc ? '0 : dma_req[d];
      dma_rsp[d] = coherent_llc ? '0 : hp_rsp[d];
    end
    if (coherent_llc) begin
      // read channel
      if (rs == R_ADDR) begin
        acp_req.ar_valid          = dma_req[r_own].ar_valid;
        acp_req.ar_addr           = dma_req[r_own].ar_addr;
        acp_req.ar_len            = dma_req[r_own].ar_len;
        dma_rsp[r_own].ar_ready   = acp_rsp.ar_ready;
      end
      if (rs == R_DATA) begin
        acp_req.r_ready           = dma_req[r_own].r_ready;
        dma_rsp[r_own].r_valid    = acp_rsp.r_valid;
        dma_rsp[r_own].r_data     = acp_rsp.r_data;
        dma_rsp[r_own].r_last     = acp_rsp.r_last;
      end
      // write channel
      if (ws == W_ADDR) begin
        acp_req.aw_valid          = dma_req[w_own].aw_valid;
        acp_req.aw_addr           = dma_req[w_own].aw_addr;
        acp_req.aw_len            = dma_req[w_own].aw_len;
        dma_rsp[w_own].aw_ready   = acp_rsp.aw_ready;
      end
      if (ws == W_DATA) begin
        acp_req.w_valid           = dma_req[w_own].w_valid;
        acp_req.w_data            = dma_req[w_own].w_data;
        acp_req.w_last            = dma_req[w_own].w_last;
        dma_rsp[w_own].w_ready    = acp_rsp.w_ready;
      end
      if (ws == W_RESP) begin
        acp_req.b_ready           = dma_req[w_own].b_ready;
        dma_rsp[w_own].b_valid    = acp_rsp.b_valid;
      end
    end
  end

  assign acp_busy = (rs != R_IDLE) || (ws != W_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rs <= R_IDLE; ws <= W_IDLE;
      r_own <= '0; w_own <= '0; r_rr <= '0; w_rr <= '0;
    end else begin
      unique case (rs)
        R_IDLE: if (coherent_llc && r_any) begin
          r_own <= r_pick; r_rr <= DSW'((int'(r_pick) + 1) % NUM_DMAC); rs <= R_ADDR;
        end
        R_ADDR: if (acp_rsp.ar_ready && dma_req[r_own].ar_valid) rs <= R_DATA;
        R_DATA: if (acp_rsp.r_valid && dma_req[r_own].r_ready && acp_rsp.r_last) rs <= R_IDLE;
        default: rs <= R_IDLE;
      endcase
      unique case (ws)
        W_IDLE: if (coherent_llc && w_any) begin
          w_own <= w_pick; w_rr <= DSW'((int'(w_pick) + 1) % NUM_DMAC); ws <= W_ADDR;
        end
        W_ADDR: if (acp_rsp.aw_ready && dma_req[w_own].aw_valid) ws <= W_DATA;
        W_DATA: if (acp_rsp.w_ready && dma_req[w_own].w_valid && dma_req[w_own].w_last) ws <= W_RESP;
        W_RESP: if (acp_rsp.b_valid && dma_req[w_own].b_ready) ws <= W_IDLE;
        default: ws <= W_IDLE;
      endcase
    end
  end
endmodule
