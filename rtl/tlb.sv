// tlb: the IOMMU's dedicated translation look-aside buffer.
//
// ENTRIES translations (virtual page number -> physical page number) held as
// a WAYS-way set-associative array in block RAM, with least-recently-used
// replacement (the paper's evict="LRU"). With the default two ways the LRU
// state is one bit per set, which is exact LRU. The set index is the low
// bits of the VPN, the tag the rest.
//
// Interface: one request at a time on req_* (a lookup, or a fill when
// req_fill = 1), accepted when req_ready. The RAMs are read on acceptance and
// the result is available in the next cycle: for a lookup resp_valid,
// resp_hit and resp_ppn; a hit makes the other way the LRU one. A fill
// overwrites a way with the same tag, else an invalid way, else the LRU way
// (evict pulses when a valid translation is replaced). req_ready is low in
// the cycle after an accepted request and while the valid bits are being
// cleared, which takes one cycle per set after reset or a flush pulse.
// Capacity and LRU follow the paper; associativity, timing and flush are
// this design's choices.
module tlb
  import ara_pkg::*;
#(
  parameter int unsigned ENTRIES = TLB_ENTRIES,
  parameter int unsigned WAYS    = TLB_WAYS,
  localparam int unsigned SETS   = ENTRIES / WAYS,
  localparam int unsigned IDX_W  = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int unsigned TAG_W  = VPN_W - IDX_W,
  localparam int unsigned EW     = 1 + TAG_W + PPN_W,
  localparam int unsigned WW     = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             flush,
  output logic             init_busy,
  input  logic             req_valid,
  output logic             req_ready,
  input  logic             req_fill,
  input  logic [VPN_W-1:0] req_vpn,
  input  logic [PPN_W-1:0] req_ppn,
  output logic             resp_valid,
  output logic             resp_hit,
  output logic [PPN_W-1:0] resp_ppn,
  output logic             evict
);
  typedef struct packed {
    logic             valid;
    logic [TAG_W-1:0] tag;
    logic [PPN_W-1:0] ppn;
  } entry_t;

  logic [WAYS*EW-1:0] set_mem [SETS];
  logic [WW-1:0]      lru_mem [SETS];     // way to replace next

  logic [WAYS*EW-1:0] rd_set;
  logic [WW-1:0]      rd_lru;
  logic               s1_valid, s1_fill;
  logic [VPN_W-1:0]   s1_vpn;
  logic [PPN_W-1:0]   s1_ppn;
  logic [IDX_W-1:0]   init_idx;

  logic accept;
  assign req_ready = !s1_valid && !init_busy;
  assign accept    = req_valid && req_ready;

  function automatic logic [IDX_W-1:0] idx_of(input logic [VPN_W-1:0] v);
    return v[IDX_W-1:0];
  endfunction
  function automatic logic [TAG_W-1:0] tag_of(input logic [VPN_W-1:0] v);
    return v[VPN_W-1:IDX_W];
  endfunction

  // ---- stage 1: compare / choose way ---------------------------------------
  entry_t ways [WAYS];
  logic              hit;
  logic [WW-1:0]     hit_way, fill_way;
  logic              have_match, have_free;
  logic [WW-1:0]     free_way;
  always_comb begin
    hit = 1'b0; hit_way = '0; have_match = 1'b0; have_free = 1'b0; free_way = '0;
    for (int unsigned w = 0; w < WAYS; w++) begin
      ways[w] = entry_t'(rd_set[w*EW +: EW]);
      if (ways[w].valid && ways[w].tag == tag_of(s1_vpn)) begin
        hit = 1'b1; hit_way = WW'(w); have_match = 1'b1;
      end
    end
    for (int w = int'(WAYS) - 1; w >= 0; w--)
      if (!ways[w].valid) begin have_free = 1'b1; free_way = WW'(w); end
    fill_way = have_match ? hit_way : (have_free ? free_way : rd_lru);
  end

  assign resp_valid = s1_valid && !s1_fill;
  assign resp_hit   = hit;
  assign resp_ppn   = ways[hit_way].ppn;
  assign evict      = s1_valid && s1_fill && !have_match && !have_free;

  function automatic logic [WW-1:0] next_lru(input logic [WW-1:0] used, input logic [WW-1:0] old);
    // two ways: the other way; more ways: round the used way forward
    if (WAYS == 2) return ~used;
    return (old == used) ? WW'((int'(used) + 1) % int'(WAYS)) : old;
  endfunction

  logic [WAYS*EW-1:0] new_set;
  always_comb begin
    new_set = rd_set;
    new_set[fill_way*EW +: EW] = {1'b1, tag_of(s1_vpn), s1_ppn};
  end

  always_ff @(posedge clk) begin
    if (init_busy) begin
      set_mem[init_idx] <= '0;
      lru_mem[init_idx] <= '0;
    end else if (s1_valid && s1_fill) begin
      set_mem[idx_of(s1_vpn)] <= new_set;
      lru_mem[idx_of(s1_vpn)] <= next_lru(fill_way, rd_lru);
    end else if (s1_valid && hit) begin
      lru_mem[idx_of(s1_vpn)] <= next_lru(hit_way, rd_lru);
    end
    if (accept) begin
      rd_set <= set_mem[idx_of(req_vpn)];
      rd_lru <= lru_mem[idx_of(req_vpn)];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid  <= 1'b0;
      s1_fill   <= 1'b0;
      s1_vpn    <= '0;
      s1_ppn    <= '0;
      init_busy <= 1'b1;
      init_idx  <= '0;
    end else begin
      s1_valid <= accept;
      if (accept) begin
        s1_fill <= req_fill;
        s1_vpn  <= req_vpn;
        s1_ppn  <= req_ppn;
      end
      if (flush) begin
        init_busy <= 1'b1;
        init_idx  <= '0;
      end else if (init_busy) begin
        init_idx <= init_idx + 1'b1;
        if (init_idx == IDX_W'(SETS - 1)) init_busy <= 1'b0;
      end
    end
  end
endmodule
