// ctrl_regs: AXI4-Lite register file through which the CPU drives the
// accelerator plane.
//
// It carries everything the system software stack exchanges with the
// hardware: accelerator parameters and start/done (send_param/check_done),
// the crossbar selections written by the dynamic buffer allocator, the TLB
// miss batch read and filled by the miss handler, the performance counters
// read and reset by the performance monitor, and the two mode bits.
// Byte addresses (all registers 32 bit):
//   0x000 CTRL        RW  [0] coherent at LLC  [1] intra-accelerator interleave
//                     W1  [8] flush TLB        [9] clear performance counters
//   0x004 STATUS      RO  [0] TLB clearing  [1] miss batch pending
//                         [2] last crossbar write rejected
//   0x008 TLB_ACCESS  RO    0x00C TLB_MISS  RO    0x010 MISS_COUNT RO
//   0x014 FILL_VPN    RW    0x018 FILL_PPN  W  (writing it issues one fill)
//   0x01C RELEASE     W   (ends the miss batch)
//   0x040 + 4*i       RO  MISS_VPN[i]
//   0x100 + 4*p       RW  crossbar port p: [7:0] buffer id, [31] enable
//   0x400 + 0x80*a    accelerator a: W [0] start; R [0] running [1] done
//   0x404 + 0x80*a + 4*k  RW parameter k of accelerator a
// A write is taken when AW and W are both valid; B follows one cycle later.
// A read returns R one cycle after AR. While a fill is waiting for the TLB,
// new writes are held off. Mode bits reset to the COHERENT_LLC and INTRA_ACC
// parameters. The paper states that parameters reach the accelerators over
// AXI-Lite and lists the software services; this register map is this
// design's own.
module ctrl_regs
  import ara_pkg::*;
#(
  parameter int unsigned NUM_ACC      = ara_pkg::NUM_ACC,
  parameter int unsigned NUM_PORTS    = TOTAL_PORTS,
  parameter int unsigned NUM_BUF      = ara_pkg::NUM_BUF,
  parameter int unsigned MAX_PARAMS   = ara_pkg::MAX_PARAMS,
  parameter int unsigned MISS_BATCH   = ara_pkg::MISS_BATCH,
  parameter bit          COHERENT_LLC = 1'b0,
  parameter bit          INTRA_ACC    = 1'b1,
  localparam int unsigned PSW = (NUM_PORTS > 1) ? $clog2(NUM_PORTS) : 1,
  localparam int unsigned BSW = (NUM_BUF > 1) ? $clog2(NUM_BUF) : 1,
  localparam int unsigned MCW = $clog2(MISS_BATCH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  // AXI4-Lite slave
  input  logic             s_awvalid,
  output logic             s_awready,
  input  logic [11:0]      s_awaddr,
  input  logic             s_wvalid,
  output logic             s_wready,
  input  logic [31:0]      s_wdata,
  output logic             s_bvalid,
  input  logic             s_bready,
  input  logic             s_arvalid,
  output logic             s_arready,
  input  logic [11:0]      s_araddr,
  output logic             s_rvalid,
  input  logic             s_rready,
  output logic [31:0]      s_rdata,
  // modes
  output logic             coherent_llc,
  output logic             intra_acc,
  output logic             tlb_flush,
  input  logic             tlb_init_busy,
  // performance counters
  output logic             pm_clear,
  input  logic [31:0]      tlb_access_cnt,
  input  logic [31:0]      tlb_miss_cnt,
  // TLB miss batch
  input  logic             miss_pending,
  input  logic [MCW-1:0]   miss_count,
  input  logic [VPN_W-1:0] miss_vpn [MISS_BATCH],
  output logic             fill_valid,
  input  logic             fill_ready,
  output logic [VPN_W-1:0] fill_vpn,
  output logic [PPN_W-1:0] fill_ppn,
  output logic             miss_release,
  // crossbar configuration
  output logic             xbar_we,
  output logic [PSW-1:0]   xbar_port,
  output logic [BSW-1:0]   xbar_buf,
  output logic             xbar_en,
  input  logic             xbar_reject,
  input  logic [BSW-1:0]   xbar_sel    [NUM_PORTS],
  input  logic             xbar_sel_en [NUM_PORTS],
  // accelerator control
  output logic             acc_start  [NUM_ACC],
  output logic [31:0]      acc_params [NUM_ACC][MAX_PARAMS],
  input  logic             acc_done   [NUM_ACC]
);
  logic          running [NUM_ACC];
  logic          done_st [NUM_ACC];
  logic          rejected;
  logic          wr;
  logic [11:0]   wa;

  assign s_awready = s_awvalid && s_wvalid && !s_bvalid && !fill_valid;
  assign s_wready  = s_awready;
  assign wr        = s_awready;
  assign wa        = s_awaddr;
  assign s_arready = !s_rvalid;

  // ---- writes --------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_bvalid     <= 1'b0;
      coherent_llc <= COHERENT_LLC;
      intra_acc    <= INTRA_ACC;
      tlb_flush    <= 1'b0;
      pm_clear     <= 1'b0;
      fill_valid   <= 1'b0;
      fill_vpn     <= '0;
      fill_ppn     <= '0;
      miss_release <= 1'b0;
      xbar_we      <= 1'b0;
      xbar_port    <= '0;
      xbar_buf     <= '0;
      xbar_en      <= 1'b0;
      rejected     <= 1'b0;
      for (int unsigned a = 0; a < NUM_ACC; a++) begin
        acc_start[a] <= 1'b0;
        running[a]   <= 1'b0;
        done_st[a]   <= 1'b0;
        for (int unsigned k = 0; k < MAX_PARAMS; k++) acc_params[a][k] <= '0;
      end
    end else begin
      tlb_flush    <= 1'b0;
      pm_clear     <= 1'b0;
      miss_release <= 1'b0;
      xbar_we      <= 1'b0;
      for (int unsigned a = 0; a < NUM_ACC; a++) acc_start[a] <= 1'b0;
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (fill_valid && fill_ready) fill_valid <= 1'b0;
      if (xbar_reject) rejected <= 1'b1;
      for (int unsigned a = 0; a < NUM_ACC; a++)
        if (acc_done[a]) begin running[a] <= 1'b0; done_st[a] <= 1'b1; end

      if (wr) begin
        s_bvalid <= 1'b1;
        if (wa == 12'h000) begin
          coherent_llc <= s_wdata[0];
          intra_acc    <= s_wdata[1];
          tlb_flush    <= s_wdata[8];
          pm_clear     <= s_wdata[9];
        end
        if (wa == 12'h014) fill_vpn <= s_wdata[VPN_W-1:0];
        if (wa == 12'h018) begin fill_ppn <= s_wdata[PPN_W-1:0]; fill_valid <= 1'b1; end
        if (wa == 12'h01C) miss_release <= 1'b1;
        if (wa[11:8] >= 4'h1 && wa[11:8] <= 4'h3 && int'(wa[9:2]) - 64 < int'(NUM_PORTS)
            && int'(wa[9:2]) >= 64) begin
          xbar_we   <= 1'b1;
          xbar_port <= PSW'(int'(wa[9:2]) - 64);
          xbar_buf  <= BSW'(s_wdata[7:0]);
          xbar_en   <= s_wdata[31];
          rejected  <= 1'b0;
        end
        for (int unsigned a = 0; a < NUM_ACC; a++) begin
          if (wa == 12'(12'h400 + 12'h080 * a) && s_wdata[0]) begin
            acc_start[a] <= 1'b1;
            running[a]   <= 1'b1;
            done_st[a]   <= 1'b0;
          end
          for (int unsigned k = 0; k < MAX_PARAMS; k++)
            if (32'(wa) == 32'h404 + 32'h080 * a + 4 * k) acc_params[a][k] <= s_wdata;
        end
      end
    end
  end

  // ---- reads ---------------------------------------------------------------
  logic [31:0] rd;
  always_comb begin
    logic [11:0] ra;
    ra = s_araddr;
    rd = '0;
    unique case (ra)
      12'h000: rd = {30'd0, intra_acc, coherent_llc};
      12'h004: rd = {29'd0, rejected, miss_pending, tlb_init_busy};
      12'h008: rd = tlb_access_cnt;
      12'h00C: rd = tlb_miss_cnt;
      12'h010: rd = 32'(miss_count);
      12'h014: rd = 32'(fill_vpn);
      default: ;
    endcase
    for (int unsigned i = 0; i < MISS_BATCH; i++)
      if (ra == 12'(12'h040 + 4 * i)) rd = 32'(miss_vpn[i]);
    for (int unsigned p = 0; p < NUM_PORTS; p++)
      if (ra == 12'(12'h100 + 4 * p)) rd = {xbar_sel_en[p], 23'd0, 8'(xbar_sel[p])};
    for (int unsigned a = 0; a < NUM_ACC; a++) begin
      if (ra == 12'(12'h400 + 12'h080 * a)) rd = {30'd0, done_st[a], running[a]};
      for (int unsigned k = 0; k < MAX_PARAMS; k++)
        if (32'(ra) == 32'h404 + 32'h080 * a + 4 * k) rd = acc_params[a][k];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
    end else begin
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        s_rdata  <= rd;
      end
    end
  end
endmodule
