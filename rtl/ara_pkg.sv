// ara_pkg: configuration, types and the default crossbar topology of the
// accelerator-plane memory system.
//
// The default configuration is the paper's four-kernel medical-imaging
// example: two gradient accelerators with 6 buffer ports each, one
// segmentation (8 ports), one rician (12 ports) and one gaussian (5 ports);
// 32 shared buffers of 16 KB; 4 DMACs; crossbar connectivity 3; 4 KB pages;
// a 32K-entry TLB. Element width (32 bit), address widths, request format and
// burst length are this design's own choices.
//
// partial_crossbar_conn() builds the partial-crossbar topology from the key
// idea the paper states for its optimizer: the CONNECTIVITY accelerators with
// the largest port demand get one dedicated bank per port; every port of the
// other accelerators is wired to CONNECTIVITY banks. Which banks those are
// (one spare bank, then the same port offset inside the dedicated blocks of
// the primary accelerators, smallest first) is this design's own
// construction, not the paper's optimizer.
package ara_pkg;

  // ---- configuration (defaults) ------------------------------------------
  localparam int unsigned NUM_ACC      = 5;
  localparam int unsigned MAX_ACC      = 8;
  localparam int unsigned ACC_PORTS [NUM_ACC] = '{6, 6, 8, 12, 5};
  localparam int unsigned ACC_PARAMS[NUM_ACC] = '{5, 5, 13, 7, 7};
  localparam int unsigned TOTAL_PORTS  = 37;
  localparam int unsigned NUM_BUF      = 32;
  localparam int unsigned NUM_DMAC     = 4;
  localparam int unsigned CONNECTIVITY = 3;
  localparam int unsigned BUF_BYTES    = 16384;
  localparam int unsigned DW           = 32;               // buffer element / bus data width
  localparam int unsigned BUF_WORDS    = BUF_BYTES / (DW / 8);
  localparam int unsigned BUF_AW       = $clog2(BUF_WORDS);
  localparam int unsigned PAGE_BYTES   = 4096;
  localparam int unsigned PAGE_WORDS   = PAGE_BYTES / (DW / 8);
  localparam int unsigned AW           = 32;               // virtual and physical address width
  localparam int unsigned PAGE_OFF_W   = $clog2(PAGE_BYTES);
  localparam int unsigned VPN_W        = AW - PAGE_OFF_W;
  localparam int unsigned PPN_W        = AW - PAGE_OFF_W;
  localparam int unsigned TLB_ENTRIES  = 32768;
  localparam int unsigned TLB_WAYS     = 2;
  localparam int unsigned MISS_BATCH   = 8;
  localparam int unsigned MAX_PARAMS   = 13;
  localparam int unsigned BURST_LEN    = 16;               // beats per AXI burst
  localparam int unsigned LEN_W        = 16;               // request length field (words)
  localparam int unsigned BUFID_W      = 8;
  localparam int unsigned ACCID_W      = 3;

  // ---- accelerator -> IOMMU memory request (one IOMMU_FIFO entry) ----------
  typedef enum logic {MEM_READ = 1'b0, MEM_WRITE = 1'b1} mem_dir_e;

  typedef struct packed {
    mem_dir_e              dir;      // READ: DRAM -> buffer, WRITE: buffer -> DRAM
    logic [AW-1:0]         vaddr;    // virtual byte address, word aligned
    logic [BUFID_W-1:0]    buf_id;   // global shared-buffer id
    logic [BUF_AW-1:0]     buf_off;  // first word inside the buffer
    logic [LEN_W-1:0]      len;      // length in words, >= 1
  } mem_req_t;

  // ---- IOMMU -> DMAC command: one page or less ----------------------------
  typedef struct packed {
    mem_dir_e              dir;
    logic [AW-1:0]         paddr;
    logic [BUFID_W-1:0]    buf_id;
    logic [BUF_AW-1:0]     buf_off;
    logic [LEN_W-1:0]      len;      // 1 .. PAGE_WORDS
    logic [ACCID_W-1:0]    acc;
  } dma_cmd_t;

  // ---- simplified AXI4 burst master port (INCR bursts, one ID) ------------
  typedef struct packed {
    logic          aw_valid;
    logic [AW-1:0] aw_addr;
    logic [7:0]    aw_len;     // beats - 1
    logic          w_valid;
    logic [DW-1:0] w_data;
    logic          w_last;
    logic          b_ready;
    logic          ar_valid;
    logic [AW-1:0] ar_addr;
    logic [7:0]    ar_len;
    logic          r_ready;
  } axi_req_t;

  typedef struct packed {
    logic          aw_ready;
    logic          w_ready;
    logic          b_valid;
    logic          ar_ready;
    logic          r_valid;
    logic [DW-1:0] r_data;
    logic          r_last;
  } axi_rsp_t;

  // ---- DMAC-side buffer access (through the interleaved network) -----------
  typedef struct packed {
    logic               en;
    logic               we;
    logic [BUFID_W-1:0] buf_id;
    logic [BUF_AW-1:0]  addr;
    logic [DW-1:0]      wdata;
  } buf_req_t;

  // ---- accelerator-side buffer access (through the partial crossbar) -------
  typedef struct packed {
    logic               en;
    logic               we;
    logic [BUF_AW-1:0]  addr;
    logic [DW-1:0]      wdata;
  } port_req_t;

  // ---- TLB miss batch / fill handshake with the software handler -----------
  typedef struct packed {
    logic             valid;
    logic [VPN_W-1:0] vpn;
    logic [PPN_W-1:0] ppn;
  } tlb_fill_t;

  // ---- helpers -------------------------------------------------------------
  function automatic int unsigned port_base(input int unsigned acc_ports[NUM_ACC], input int unsigned a);
    int unsigned s = 0;
    for (int unsigned i = 0; i < a; i++) s += acc_ports[i];
    return s;
  endfunction

  // Partial-crossbar topology: bit [p*NB + b] set when port p may use bank b.
  // Sizes are passed explicitly so testbenches can build smaller ones.
  function automatic logic [TOTAL_PORTS*NUM_BUF-1:0] partial_crossbar_conn(
      input int unsigned acc_ports[NUM_ACC], input int unsigned nbuf, input int unsigned conn);
    logic [TOTAL_PORTS*NUM_BUF-1:0] m = '0;
    int unsigned order[NUM_ACC];
    int unsigned blk_base[NUM_ACC];
    bit          primary[NUM_ACC];
    int unsigned nprim, next_bank, spare0, nspare, t, p, b, got;
    for (int unsigned i = 0; i < NUM_ACC; i++) begin order[i] = i; primary[i] = 0; blk_base[i] = 0; end
    // stable sort by demand, largest first
    for (int unsigned i = 0; i < NUM_ACC; i++)
      for (int unsigned j = 0; j + 1 < NUM_ACC - i; j++)
        if (acc_ports[order[j+1]] > acc_ports[order[j]]) begin
          t = order[j]; order[j] = order[j+1]; order[j+1] = t;
        end
    nprim = (conn < NUM_ACC) ? conn : NUM_ACC;
    // primaries: dedicated banks, one per port, largest demand at bank 0
    next_bank = 0;
    for (int unsigned k = 0; k < nprim; k++) begin
      primary[order[k]] = 1;
      blk_base[order[k]] = next_bank;
      for (int unsigned j = 0; j < acc_ports[order[k]]; j++) begin
        p = port_base(acc_ports, order[k]) + j;
        if (next_bank < nbuf) m[p*NUM_BUF + next_bank] = 1'b1;
        next_bank++;
      end
    end
    spare0 = next_bank;
    nspare = (nbuf > spare0) ? nbuf - spare0 : 0;
    // others: `conn` banks per port: a spare bank first, then the same offset
    // in the primary blocks, smallest primary first
    for (int unsigned a = 0; a < NUM_ACC; a++) begin
      if (!primary[a]) begin
        for (int unsigned j = 0; j < acc_ports[a]; j++) begin
          p = port_base(acc_ports, a) + j;
          got = 0;
          if (nspare > 0) begin
            m[p*NUM_BUF + spare0 + (j % nspare)] = 1'b1;
            got++;
          end
          for (int k = int'(nprim) - 1; k >= 0; k--) begin
            if (got < conn && j < acc_ports[order[k]]) begin
              b = blk_base[order[k]] + j;
              if (b < nbuf && !m[p*NUM_BUF + b]) begin
                m[p*NUM_BUF + b] = 1'b1;
                got++;
              end
            end
          end
        end
      end
    end
    return m;
  endfunction

  localparam logic [TOTAL_PORTS*NUM_BUF-1:0] DEFAULT_CONN =
      partial_crossbar_conn(ACC_PORTS, NUM_BUF, CONNECTIVITY);

endpackage
