// ara_top: the accelerator plane's memory system, ready for accelerators to
// be attached.
//
// Accelerators share a pool of NUM_BUF equal buffer banks. Each accelerator
// port reaches the banks through the partial crossbar (layer 1), whose
// selections the CPU's buffer allocator writes at run time. Before computing,
// an accelerator pushes memory requests with virtual addresses into its
// request FIFO; the IOMMU cuts them into 4 KB pages, translates them in its
// TLB (misses are batched for a software handler on the CPU) and spreads
// the pages over the NUM_DMAC DMACs. The DMACs move the pages between DRAM
// and the banks through the interleaved network (layer 2), and reach memory
// either through one HP port each (coherent at DRAM) or all through the
// single ACP port into the CPU's L2 (coherent at LLC). The CPU controls
// everything over one AXI4-Lite slave (register map in ctrl_regs).
//
// The accelerators themselves, the CPU and the DRAM controller are outside:
// accelerator buffer ports, request FIFOs and start/parameter/done signals,
// the HP and ACP masters and the miss interrupt are this module's ports.
// Buffer reads return one cycle after the request; an accelerator waits for
// acc_mem_busy to fall before using prefetched data. Defaults are the
// paper's four-kernel example configuration (see ara_pkg).
module ara_top
  import ara_pkg::*;
#(
  parameter int unsigned NUM_ACC      = ara_pkg::NUM_ACC,
  parameter int unsigned NUM_PORTS    = TOTAL_PORTS,
  parameter int unsigned NUM_BUF      = ara_pkg::NUM_BUF,
  parameter int unsigned NUM_DMAC     = ara_pkg::NUM_DMAC,
  parameter int unsigned BUF_WORDS    = ara_pkg::BUF_WORDS,
  parameter int unsigned TLB_ENTRIES  = ara_pkg::TLB_ENTRIES,
  parameter int unsigned TLB_WAYS     = ara_pkg::TLB_WAYS,
  parameter int unsigned MISS_BATCH   = ara_pkg::MISS_BATCH,
  parameter int unsigned MAX_PARAMS   = ara_pkg::MAX_PARAMS,
  parameter logic [NUM_PORTS*NUM_BUF-1:0] CONN = DEFAULT_CONN,
  parameter bit          COHERENT_LLC = 1'b0,
  parameter bit          INTRA_ACC    = 1'b1
) (
  input  logic          clk,
  input  logic          rst_n,
  // AXI4-Lite control slave (from the CPU)
  input  logic          s_awvalid,
  output logic          s_awready,
  input  logic [11:0]   s_awaddr,
  input  logic          s_wvalid,
  output logic          s_wready,
  input  logic [31:0]   s_wdata,
  output logic          s_bvalid,
  input  logic          s_bready,
  input  logic          s_arvalid,
  output logic          s_arready,
  input  logic [11:0]   s_araddr,
  output logic          s_rvalid,
  input  logic          s_rready,
  output logic [31:0]   s_rdata,
  output logic          miss_irq,
  // accelerator buffer ports
  input  port_req_t     acc_port_req   [NUM_PORTS],
  output logic [DW-1:0] acc_port_rdata [NUM_PORTS],
  // accelerator memory-request FIFOs
  input  logic          acc_req_valid  [NUM_ACC],
  output logic          acc_req_ready  [NUM_ACC],
  input  mem_req_t      acc_req        [NUM_ACC],
  output logic          acc_mem_busy   [NUM_ACC],
  // accelerator control
  output logic          acc_start      [NUM_ACC],
  output logic [31:0]   acc_params     [NUM_ACC][MAX_PARAMS],
  input  logic          acc_done       [NUM_ACC],
  // physical memory ports
  output axi_req_t      hp_req         [NUM_DMAC],
  input  axi_rsp_t      hp_rsp         [NUM_DMAC],
  output axi_req_t      acp_req,
  input  axi_rsp_t      acp_rsp
);
  localparam int unsigned PSW = (NUM_PORTS > 1) ? $clog2(NUM_PORTS) : 1;
  localparam int unsigned BSW = (NUM_BUF > 1) ? $clog2(NUM_BUF) : 1;
  localparam int unsigned MCW = $clog2(MISS_BATCH + 1);

  // ---- control ----------------------------------------------------------
  logic coherent_llc, intra_acc, tlb_flush, tlb_init_busy, pm_clear;
  logic [31:0] tlb_access_cnt, tlb_miss_cnt;
  logic miss_pending, fill_valid, fill_ready, miss_release;
  logic [MCW-1:0] miss_count;
  logic [VPN_W-1:0] miss_vpn [MISS_BATCH];
  logic [VPN_W-1:0] fill_vpn;
  logic [PPN_W-1:0] fill_ppn;
  logic xbar_we, xbar_en, xbar_reject;
  logic [PSW-1:0] xbar_port;
  logic [BSW-1:0] xbar_buf;
  logic [BSW-1:0] xbar_sel    [NUM_PORTS];
  logic           xbar_sel_en [NUM_PORTS];

  assign miss_irq = miss_pending;

  ctrl_regs #(.NUM_ACC(NUM_ACC), .NUM_PORTS(NUM_PORTS), .NUM_BUF(NUM_BUF),
              .MAX_PARAMS(MAX_PARAMS), .MISS_BATCH(MISS_BATCH),
              .COHERENT_LLC(COHERENT_LLC), .INTRA_ACC(INTRA_ACC)) u_ctrl (
    .clk, .rst_n,
    .s_awvalid, .s_awready, .s_awaddr, .s_wvalid, .s_wready, .s_wdata,
    .s_bvalid, .s_bready, .s_arvalid, .s_arready, .s_araddr,
    .s_rvalid, .s_rready, .s_rdata,
    .coherent_llc, .intra_acc, .tlb_flush, .tlb_init_busy,
    .pm_clear, .tlb_access_cnt, .tlb_miss_cnt,
    .miss_pending, .miss_count, .miss_vpn,
    .fill_valid, .fill_ready, .fill_vpn, .fill_ppn, .miss_release,
    .xbar_we, .xbar_port, .xbar_buf, .xbar_en, .xbar_reject, .xbar_sel, .xbar_sel_en,
    .acc_start, .acc_params, .acc_done);

  // ---- shared buffers ---------------------------------------------------------
  port_req_t     bufa_req [NUM_BUF];
  logic [DW-1:0] bufa_rd  [NUM_BUF];
  port_req_t     bufb_req [NUM_BUF];
  logic [DW-1:0] bufb_rd  [NUM_BUF];

  for (genvar b = 0; b < NUM_BUF; b++) begin : g_buf
    shared_buffer #(.WORDS(BUF_WORDS), .DW(DW)) u_buf (
      .clk,
      .a_en(bufa_req[b].en), .a_we(bufa_req[b].we),
      .a_addr(bufa_req[b].addr[$clog2(BUF_WORDS)-1:0]), .a_wdata(bufa_req[b].wdata),
      .a_rdata(bufa_rd[b]),
      .b_en(bufb_req[b].en), .b_we(bufb_req[b].we),
      .b_addr(bufb_req[b].addr[$clog2(BUF_WORDS)-1:0]), .b_wdata(bufb_req[b].wdata),
      .b_rdata(bufb_rd[b]));
  end

  // ---- layer 1: partial crossbar ---------------------------------------------
  partial_crossbar #(.NUM_PORTS(NUM_PORTS), .NUM_BUF(NUM_BUF), .CONN(CONN)) u_xbar (
    .clk, .rst_n,
    .port_req(acc_port_req), .port_rdata(acc_port_rdata),
    .buf_req(bufa_req), .buf_rdata(bufa_rd),
    .cfg_we(xbar_we), .cfg_port(xbar_port), .cfg_buf(xbar_buf), .cfg_en(xbar_en),
    .cfg_reject(xbar_reject), .sel(xbar_sel), .sel_en(xbar_sel_en));

  // ---- IOMMU ------------------------------------------------------------------
  logic               dcmd_valid [NUM_DMAC];
  logic               dcmd_ready [NUM_DMAC];
  dma_cmd_t           dcmd       [NUM_DMAC];
  logic               ddone      [NUM_DMAC];
  logic [ACCID_W-1:0] ddone_acc  [NUM_DMAC];

  iommu #(.NUM_ACC(NUM_ACC), .NUM_DMAC(NUM_DMAC), .TLB_ENTRIES(TLB_ENTRIES),
          .TLB_WAYS(TLB_WAYS), .MISS_BATCH(MISS_BATCH)) u_iommu (
    .clk, .rst_n,
    .acc_req_valid, .acc_req_ready, .acc_req, .acc_busy(acc_mem_busy),
    .dma_cmd_valid(dcmd_valid), .dma_cmd_ready(dcmd_ready), .dma_cmd(dcmd),
    .dma_done(ddone), .dma_done_acc(ddone_acc),
    .intra_acc, .tlb_flush, .tlb_init_busy,
    .miss_pending, .miss_count, .miss_vpn,
    .fill_valid, .fill_ready, .fill_vpn, .fill_ppn, .miss_release,
    .pm_clear, .tlb_access_cnt, .tlb_miss_cnt, .tlb_evict());

  // ---- DMACs and layer 2: interleaved network ---------------------------------
  buf_req_t      dbreq [NUM_DMAC];
  logic          dbgnt [NUM_DMAC];
  logic [DW-1:0] dbrd  [NUM_DMAC];
  axi_req_t      daxi_req [NUM_DMAC];
  axi_rsp_t      daxi_rsp [NUM_DMAC];

  for (genvar d = 0; d < NUM_DMAC; d++) begin : g_dmac
    dmac #(.BURST(BURST_LEN)) u_dmac (
      .clk, .rst_n,
      .cmd_valid(dcmd_valid[d]), .cmd_ready(dcmd_ready[d]), .cmd(dcmd[d]), .cmd_count(),
      .done(ddone[d]), .done_acc(ddone_acc[d]), .busy(),
      .breq(dbreq[d]), .bgnt(dbgnt[d]), .brdata(dbrd[d]),
      .axi_req(daxi_req[d]), .axi_rsp(daxi_rsp[d]));
  end

  interleaved_network #(.NUM_DMAC(NUM_DMAC), .NUM_BUF(NUM_BUF)) u_net (
    .clk, .rst_n,
    .dma_req(dbreq), .dma_gnt(dbgnt), .dma_rdata(dbrd),
    .buf_req(bufb_req), .buf_rdata(bufb_rd));

  // ---- coherency choice ----------------------------------------------------------
  mem_port_mux #(.NUM_DMAC(NUM_DMAC)) u_mp (
    .clk, .rst_n, .coherent_llc,
    .dma_req(daxi_req), .dma_rsp(daxi_rsp),
    .hp_req, .hp_rsp, .acp_req, .acp_rsp, .acp_busy());
endmodule
