// interleaved_network: interconnect layer 2, DMACs <-> shared buffers.
//
// Every DMAC can reach every buffer (port B), so that any page of any
// accelerator port can be served by whichever DMAC the IOMMU assigns to it;
// the interleaving itself (which DMAC gets which page) is decided in the
// IOMMU. When two DMACs address the same buffer in the same cycle the lower
// numbered DMAC is granted and the other sees gnt = 0 and retries. Read data
// returns one cycle after a granted read, from the buffer that was granted.
// The paper gives this layer's purpose and shows a partial topology in its
// example; full DMAC-to-buffer reach and fixed-priority arbitration are this
// design's choices.
module interleaved_network
  import ara_pkg::*;
#(
  parameter int unsigned NUM_DMAC = ara_pkg::NUM_DMAC,
  parameter int unsigned NUM_BUF  = ara_pkg::NUM_BUF,
  localparam int unsigned BSW = (NUM_BUF > 1) ? $clog2(NUM_BUF) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // DMAC side
  input  buf_req_t      dma_req   [NUM_DMAC],
  output logic          dma_gnt   [NUM_DMAC],
  output logic [DW-1:0] dma_rdata [NUM_DMAC],
  // buffer port B
  output port_req_t     buf_req   [NUM_BUF],
  input  logic [DW-1:0] buf_rdata [NUM_BUF]
);
  logic [BSW-1:0] rd_buf [NUM_DMAC];
  logic           busy   [NUM_BUF];

  always_comb begin
    for (int unsigned b = 0; b < NUM_BUF; b++) begin
      buf_req[b] = '0;
      busy[b]    = 1'b0;
    end
    for (int unsigned d = 0; d < NUM_DMAC; d++) begin
      dma_gnt[d] = 1'b0;
      for (int unsigned b = 0; b < NUM_BUF; b++) begin
        if (dma_req[d].en && dma_req[d].buf_id == BUFID_W'(b) && !busy[b]) begin
          busy[b]          = 1'b1;
          dma_gnt[d]       = 1'b1;
          buf_req[b].en    = 1'b1;
          buf_req[b].we    = dma_req[d].we;
          buf_req[b].addr  = dma_req[d].addr;
          buf_req[b].wdata = dma_req[d].wdata;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned d = 0; d < NUM_DMAC; d++) rd_buf[d] <= '0;
    end else begin
      for (int unsigned d = 0; d < NUM_DMAC; d++)
        if (dma_gnt[d] && !dma_req[d].we) rd_buf[d] <= BSW'(dma_req[d].buf_id);
    end
  end

  always_comb
    for (int unsigned d = 0; d < NUM_DMAC; d++) dma_rdata[d] = buf_rdata[rd_buf[d]];
endmodule
