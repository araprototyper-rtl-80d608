// iommu: address translation and DMAC dispatch for the accelerator plane.
//
// Each accelerator talks to the IOMMU through its own request FIFO (the
// paper's IOMMU_FIFO). A request names a direction, a virtual address, a
// shared-buffer id, a word offset in that buffer and a length in words. The
// IOMMU walks the active requests round-robin and cuts each one at 4 KB page
// boundaries. For every page it looks the VPN up in the TLB (two cycles per
// page: lookup, result); on a hit it pushes one command, with the physical
// address, to a DMAC:
//   intra_acc = 1  consecutive pages of one accelerator rotate over all DMACs
//                  (interleaving within an accelerator),
//   intra_acc = 0  all pages of accelerator a go to DMAC a mod NUM_DMAC
//                  (interleaving between accelerators).
// On a miss the accelerator is parked and its VPN is recorded in a miss
// list. While parked, it probes the following pages of the same request
// (lookups only, nothing is dispatched) and adds those that miss too, so
// the misses of one streaming request travel in one batch. The list is handed to the software miss handler as one batch (the
// paper's grouping of TLB misses) when it is full or when no accelerator can
// make progress without it: miss_pending rises, the handler reads
// miss_vpn[0..miss_count-1], writes translations with fill_* and finally
// pulses miss_release, which clears the list and lets the parked
// accelerators retry. Fills share the TLB port with lookups and win.
// The two performance counters count each page translation once (retries
// after a miss are not counted again, probes are not accesses) and each
// page that missed, whether found by its lookup or by a probe.
// acc_busy[a] stays high while accelerator a has requests queued, a request
// being cut or pages in flight in the DMACs; an accelerator waits for it to
// fall before computing on prefetched data or after a write-back.
// The request fields, the batch rule, the look-ahead probes and the
// handshake with the handler are this design's choices; translation at page granularity, batching, the
// counters and the two interleaving strategies follow the paper.
module iommu
  import ara_pkg::*;
#(
  parameter int unsigned NUM_ACC     = ara_pkg::NUM_ACC,
  parameter int unsigned NUM_DMAC    = ara_pkg::NUM_DMAC,
  parameter int unsigned TLB_ENTRIES = ara_pkg::TLB_ENTRIES,
  parameter int unsigned TLB_WAYS    = ara_pkg::TLB_WAYS,
  parameter int unsigned MISS_BATCH  = ara_pkg::MISS_BATCH,
  parameter int unsigned REQ_DEPTH   = 4,
  localparam int unsigned DSW = (NUM_DMAC > 1) ? $clog2(NUM_DMAC) : 1,
  localparam int unsigned ASW = (NUM_ACC > 1) ? $clog2(NUM_ACC) : 1,
  localparam int unsigned MCW = $clog2(MISS_BATCH + 1),
  localparam int unsigned OW  = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  // accelerator request FIFOs
  input  logic               acc_req_valid [NUM_ACC],
  output logic               acc_req_ready [NUM_ACC],
  input  mem_req_t           acc_req       [NUM_ACC],
  output logic               acc_busy      [NUM_ACC],
  // DMAC command and completion
  output logic               dma_cmd_valid [NUM_DMAC],
  input  logic               dma_cmd_ready [NUM_DMAC],
  output dma_cmd_t           dma_cmd       [NUM_DMAC],
  input  logic               dma_done      [NUM_DMAC],
  input  logic [ACCID_W-1:0] dma_done_acc  [NUM_DMAC],
  // static configuration
  input  logic               intra_acc,
  input  logic               tlb_flush,
  output logic               tlb_init_busy,
  // miss batch to / fills from the software handler
  output logic               miss_pending,
  output logic [MCW-1:0]     miss_count,
  output logic [VPN_W-1:0]   miss_vpn      [MISS_BATCH],
  input  logic               fill_valid,
  output logic               fill_ready,
  input  logic [VPN_W-1:0]   fill_vpn,
  input  logic [PPN_W-1:0]   fill_ppn,
  input  logic               miss_release,
  // performance counters
  input  logic               pm_clear,
  output logic [31:0]        tlb_access_cnt,
  output logic [31:0]        tlb_miss_cnt,
  output logic               tlb_evict
);
  localparam int unsigned PCW = LEN_W + 3 - PAGE_OFF_W;   // pages in one request, plus one

  // ---- request FIFOs -------------------------------------------------------
  logic     q_valid [NUM_ACC];
  logic     q_pop   [NUM_ACC];
  mem_req_t q_head  [NUM_ACC];

  for (genvar a = 0; a < NUM_ACC; a++) begin : g_fifo
    sync_fifo #(.T(mem_req_t), .DEPTH(REQ_DEPTH)) u_q (
      .clk, .rst_n,
      .in_valid(acc_req_valid[a]), .in_ready(acc_req_ready[a]), .in_data(acc_req[a]),
      .out_valid(q_valid[a]), .out_ready(q_pop[a]), .out_data(q_head[a]), .count());
  end

  // ---- per-accelerator state ----------------------------------------------
  mem_req_t      cur      [NUM_ACC];
  logic          active   [NUM_ACC];
  logic          blocked  [NUM_ACC];
  logic          retry    [NUM_ACC];
  logic [OW-1:0] outst    [NUM_ACC];
  logic [DSW-1:0] dptr    [NUM_ACC];
  logic [PCW-1:0] pcnt    [NUM_ACC];   // pages probed ahead while blocked

  typedef enum logic {S_IDLE, S_RESP} state_e;
  state_e state;
  logic [ASW-1:0] sel, rr;
  logic           s_probe;             // the lookup in flight is a probe
  logic [VPN_W-1:0] s_vpn;             // its VPN

  // ---- TLB ----------------------------------------------------------------
  logic             t_req_valid, t_req_ready, t_req_fill;
  logic [VPN_W-1:0] t_req_vpn;
  logic [PPN_W-1:0] t_req_ppn;
  logic             t_resp_valid, t_resp_hit;
  logic [PPN_W-1:0] t_resp_ppn;

  tlb #(.ENTRIES(TLB_ENTRIES), .WAYS(TLB_WAYS)) u_tlb (
    .clk, .rst_n, .flush(tlb_flush), .init_busy(tlb_init_busy),
    .req_valid(t_req_valid), .req_ready(t_req_ready), .req_fill(t_req_fill),
    .req_vpn(t_req_vpn), .req_ppn(t_req_ppn),
    .resp_valid(t_resp_valid), .resp_hit(t_resp_hit), .resp_ppn(t_resp_ppn),
    .evict(tlb_evict));

  // ---- scheduling ----------------------------------------------------------
  function automatic logic [DSW-1:0] dmac_of(input int unsigned a, input logic [DSW-1:0] ptr, input logic intra);
    return intra ? ptr : DSW'(a % NUM_DMAC);
  endfunction

  // look-ahead: a blocked accelerator probes the following pages of its
  // request, so that their misses join the same batch
  logic [VPN_W-1:0] probe_vpn [NUM_ACC];
  logic             probe_ok  [NUM_ACC];
  always_comb
    for (int unsigned a = 0; a < NUM_ACC; a++) begin
      logic [AW-1:0] last_byte;
      last_byte    = cur[a].vaddr + AW'({cur[a].len, 2'b00}) - AW'(1);
      probe_vpn[a] = cur[a].vaddr[AW-1:PAGE_OFF_W] + VPN_W'(pcnt[a]) + VPN_W'(1);
      probe_ok[a]  = active[a] && blocked[a] && !miss_pending && miss_count < MCW'(MISS_BATCH) &&
                     probe_vpn[a] <= last_byte[AW-1:PAGE_OFF_W] &&
                     probe_vpn[a] > cur[a].vaddr[AW-1:PAGE_OFF_W];
    end

  logic           elig [NUM_ACC];
  logic           any_elig, any_progress;
  logic [ASW-1:0] pick;
  always_comb begin
    any_progress = 1'b0;
    for (int unsigned a = 0; a < NUM_ACC; a++) begin
      elig[a] = (active[a] && !blocked[a] && dma_cmd_ready[dmac_of(a, dptr[a], intra_acc)]) || probe_ok[a];
      if ((active[a] && !blocked[a]) || (!active[a] && q_valid[a]) || probe_ok[a]) any_progress = 1'b1;
    end
    any_elig = 1'b0;
    pick     = '0;
    for (int unsigned k = 0; k < NUM_ACC; k++) begin
      int unsigned a;
      a = (int'(rr) + k) % NUM_ACC;
      if (!any_elig && elig[a]) begin any_elig = 1'b1; pick = ASW'(a); end
    end
  end

  logic do_fill, do_lookup;
  assign do_fill    = (state == S_IDLE) && fill_valid && t_req_ready;
  assign do_lookup  = (state == S_IDLE) && !fill_valid && any_elig && t_req_ready;
  assign fill_ready = do_fill;
  assign t_req_valid = do_fill || do_lookup;
  assign t_req_fill  = do_fill;
  assign t_req_vpn   = do_fill ? fill_vpn : (blocked[pick] ? probe_vpn[pick] : cur[pick].vaddr[AW-1:PAGE_OFF_W]);
  assign t_req_ppn   = fill_ppn;

  // ---- page cut for the selected accelerator -------------------------------
  logic [LEN_W-1:0] page_left, words;
  logic [DSW-1:0]   dsel;
  assign page_left = LEN_W'((PAGE_BYTES - int'(cur[sel].vaddr[PAGE_OFF_W-1:0])) / (DW / 8));
  assign words     = (cur[sel].len < page_left) ? cur[sel].len : page_left;
  assign dsel      = dmac_of(int'(sel), dptr[sel], intra_acc);

  logic resp_hit_now, resp_miss_now;
  logic probe_miss_now;
  assign resp_hit_now   = (state == S_RESP) && t_resp_valid && !s_probe && t_resp_hit;
  assign resp_miss_now  = (state == S_RESP) && t_resp_valid && !s_probe && !t_resp_hit;
  assign probe_miss_now = (state == S_RESP) && t_resp_valid && s_probe && !t_resp_hit;

  always_comb begin
    for (int unsigned d = 0; d < NUM_DMAC; d++) begin
      dma_cmd_valid[d]   = resp_hit_now && dsel == DSW'(d);
      dma_cmd[d].dir     = cur[sel].dir;
      dma_cmd[d].paddr   = {t_resp_ppn, cur[sel].vaddr[PAGE_OFF_W-1:0]};
      dma_cmd[d].buf_id  = cur[sel].buf_id;
      dma_cmd[d].buf_off = cur[sel].buf_off;
      dma_cmd[d].len     = words;
      dma_cmd[d].acc     = ACCID_W'(sel);
    end
  end

  // ---- miss list -------------------------------------------------------------
  logic in_list;
  always_comb begin
    in_list = 1'b0;
    for (int unsigned i = 0; i < MISS_BATCH; i++)
      if (MCW'(i) < miss_count && miss_vpn[i] == s_vpn) in_list = 1'b1;
  end

  // ---- counters --------------------------------------------------------------
  perf_counters #(.W(32)) u_pc (
    .clk, .rst_n, .clear(pm_clear),
    .access_inc((resp_hit_now || resp_miss_now) && !retry[sel]),
    .miss_inc((resp_miss_now && !retry[sel]) || (probe_miss_now && !in_list)),
    .access_cnt(tlb_access_cnt), .miss_cnt(tlb_miss_cnt));

  // ---- sequential -------------------------------------------------------------
  always_comb
    for (int unsigned a = 0; a < NUM_ACC; a++) begin
      q_pop[a]    = !active[a] && q_valid[a];
      acc_busy[a] = q_valid[a] || active[a] || (outst[a] != '0);
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      sel          <= '0;
      s_probe      <= 1'b0;
      s_vpn        <= '0;
      rr           <= '0;
      miss_pending <= 1'b0;
      miss_count   <= '0;
      for (int unsigned i = 0; i < MISS_BATCH; i++) miss_vpn[i] <= '0;
      for (int unsigned a = 0; a < NUM_ACC; a++) begin
        cur[a] <= '0; active[a] <= 1'b0; blocked[a] <= 1'b0;
        retry[a] <= 1'b0; outst[a] <= '0; dptr[a] <= '0; pcnt[a] <= '0;
      end
    end else begin
      // load new requests
      for (int unsigned a = 0; a < NUM_ACC; a++)
        if (q_pop[a]) begin cur[a] <= q_head[a]; active[a] <= 1'b1; end

      // outstanding pages: +1 on dispatch, -1 per DMAC completion
      for (int unsigned a = 0; a < NUM_ACC; a++) begin
        logic [OW-1:0] dec;
        dec = '0;
        for (int unsigned d = 0; d < NUM_DMAC; d++)
          if (dma_done[d] && dma_done_acc[d] == ACCID_W'(a)) dec = dec + 1'b1;
        outst[a] <= outst[a] - dec + OW'(resp_hit_now && sel == ASW'(a));
      end

      unique case (state)
        S_IDLE: if (do_lookup) begin
          sel     <= pick;
          s_probe <= blocked[pick];
          s_vpn   <= t_req_vpn;
          rr    <= ASW'((int'(pick) + 1) % NUM_ACC);
          state <= S_RESP;
        end
        S_RESP: if (t_resp_valid) begin
          state <= S_IDLE;
          if (s_probe) begin
            pcnt[sel] <= pcnt[sel] + 1'b1;
            if (!t_resp_hit && !in_list && miss_count < MCW'(MISS_BATCH)) begin
              miss_vpn[$clog2(MISS_BATCH)'(miss_count)] <= s_vpn;
              miss_count <= miss_count + 1'b1;
            end
          end else if (t_resp_hit) begin
            retry[sel]        <= 1'b0;
            cur[sel].vaddr    <= cur[sel].vaddr + AW'({words, 2'b00});
            cur[sel].buf_off  <= cur[sel].buf_off + BUF_AW'(words);
            cur[sel].len      <= cur[sel].len - words;
            if (cur[sel].len == words) active[sel] <= 1'b0;
            if (intra_acc) dptr[sel] <= DSW'((int'(dptr[sel]) + 1) % NUM_DMAC);
          end else begin
            blocked[sel] <= 1'b1;
            if (!miss_pending && !in_list && miss_count < MCW'(MISS_BATCH)) begin
              miss_vpn[$clog2(MISS_BATCH)'(miss_count)] <= cur[sel].vaddr[AW-1:PAGE_OFF_W];
              miss_count           <= miss_count + 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase

      // hand the batch over when it is full or nothing else can move
      if (!miss_pending && miss_count != '0 && state == S_IDLE &&
          (miss_count == MCW'(MISS_BATCH) || !any_progress))
        miss_pending <= 1'b1;

      if (miss_release) begin
        miss_pending <= 1'b0;
        miss_count   <= '0;
        for (int unsigned a = 0; a < NUM_ACC; a++)
          if (blocked[a]) begin blocked[a] <= 1'b0; retry[a] <= 1'b1; pcnt[a] <= '0; end
      end
    end
  end

  // a dispatched page always finds room in its DMAC queue
  a_dma_room: assert property (@(posedge clk) disable iff (!rst_n)
    resp_hit_now |-> dma_cmd_ready[dsel]);
endmodule
