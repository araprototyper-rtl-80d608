// tb_ctrl_regs: AXI4-Lite register file with 2 accelerators, 4 crossbar
// ports, 3 parameters and a 2-entry miss batch. Checks reset values, every
// register's read/write effect, one-cycle command pulses, the fill
// handshake (writes held off while a fill waits) and start/done status.
// Parameters over AXI-Lite follow the paper; the register map under test is
// this design's own.
module tb_ctrl_regs;
  import ara_pkg::*;
  localparam int unsigned NA = 2, NP = 4, NB = 8, MP = 3, MB = 2;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;
  always #5 clk = ~clk;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic s_arvalid, s_arready, s_rvalid, s_rready;
  logic [11:0] s_awaddr, s_araddr;
  logic [31:0] s_wdata, s_rdata;
  logic coherent_llc, intra_acc, tlb_flush, tlb_init_busy, pm_clear;
  logic [31:0] tlb_access_cnt, tlb_miss_cnt;
  logic miss_pending, fill_valid, fill_ready, miss_release;
  logic [1:0] miss_count;
  logic [VPN_W-1:0] miss_vpn [MB];
  logic [VPN_W-1:0] fill_vpn;
  logic [PPN_W-1:0] fill_ppn;
  logic xbar_we, xbar_en, xbar_reject;
  logic [1:0] xbar_port;
  logic [2:0] xbar_buf;
  logic [2:0] xbar_sel [NP];
  logic       xbar_sel_en [NP];
  logic acc_start [NA], acc_done [NA];
  logic [31:0] acc_params [NA][MP];
  int checks = 0, failures = 0;
  int flush_pulses = 0, clear_pulses = 0, release_pulses = 0, xbar_pulses = 0, start_pulses = 0;

  ctrl_regs #(.NUM_ACC(NA), .NUM_PORTS(NP), .NUM_BUF(NB), .MAX_PARAMS(MP), .MISS_BATCH(MB),
              .COHERENT_LLC(1'b0), .INTRA_ACC(1'b1)) dut (.*);

  always_ff @(posedge clk) begin
    if (tlb_flush) flush_pulses++;
    if (pm_clear) clear_pulses++;
    if (miss_release) release_pulses++;
    if (xbar_we) xbar_pulses++;
    if (acc_start[1]) start_pulses++;
  end

  initial begin #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk);
    s_awvalid = 1; s_wvalid = 1; s_awaddr = a; s_wdata = d;
    @(posedge clk);
    while (!s_awready) @(posedge clk);
    @(negedge clk); s_awvalid = 0; s_wvalid = 0;
    while (!s_bvalid) @(negedge clk);
    s_bready = 1; @(negedge clk); s_bready = 0;
  endtask

  task automatic rd(input logic [11:0] a, output logic [31:0] d);
    @(negedge clk);
    s_arvalid = 1; s_araddr = a;
    @(posedge clk);
    while (!s_arready) @(posedge clk);
    @(negedge clk); s_arvalid = 0;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata; s_rready = 1; @(negedge clk); s_rready = 0;
  endtask

  initial begin
    logic [31:0] v;
    s_awvalid = 0; s_wvalid = 0; s_bready = 0; s_arvalid = 0; s_rready = 0;
    s_awaddr = 0; s_araddr = 0; s_wdata = 0;
    tlb_init_busy = 1; tlb_access_cnt = 32'd1234; tlb_miss_cnt = 32'd56;
    miss_pending = 0; miss_count = 0; miss_vpn[0] = 20'hABCDE; miss_vpn[1] = 20'h12345;
    fill_ready = 0; xbar_reject = 0;
    for (int p = 0; p < NP; p++) begin xbar_sel[p] = 3'(p + 1); xbar_sel_en[p] = p[0]; end
    for (int a = 0; a < NA; a++) acc_done[a] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    rd(12'h000, v); chk(v == 32'h2, "CTRL reset: intra=1, llc=0");
    rd(12'h004, v); chk(v == 32'h1, "STATUS: TLB clearing");
    wr(12'h000, 32'h301);                           // llc=1, intra=0, flush, clear
    chk(coherent_llc && !intra_acc, "mode bits");
    chk(flush_pulses == 1 && clear_pulses == 1, $sformatf("flush and clear pulse once %0d %0d", flush_pulses, clear_pulses));
    rd(12'h008, v); chk(v == 1234, "TLB_ACCESS");
    rd(12'h00C, v); chk(v == 56, "TLB_MISS");
    miss_pending = 1; miss_count = 2; tlb_init_busy = 0;
    rd(12'h004, v); chk(v == 32'h2, "STATUS: miss pending");
    rd(12'h010, v); chk(v == 2, "MISS_COUNT");
    rd(12'h040, v); chk(v == 32'hABCDE, "MISS_VPN0");
    rd(12'h044, v); chk(v == 32'h12345, "MISS_VPN1");
    // fill handshake
    wr(12'h014, 32'hABCDE);
    wr(12'h018, 32'h00777);
    chk(fill_valid && fill_vpn == 20'hABCDE && fill_ppn == 20'h00777, "fill presented");
    fork
      wr(12'h01C, 32'h1);                           // must wait for the fill
      begin repeat (5) @(negedge clk); chk(release_pulses == 0, "write held during fill");
            fill_ready = 1; @(negedge clk); fill_ready = 0; end
    join
    chk(!fill_valid && release_pulses == 1, "fill taken, release pulsed");
    // crossbar
    wr(12'h108, 32'h8000_0005);
    chk(xbar_pulses == 1, "crossbar write pulse");
    rd(12'h104, v); chk(v == 32'h8000_0002, "crossbar readback port 1");
    rd(12'h108, v); chk(v == 32'h0000_0003, "crossbar readback port 2");
    @(negedge clk); xbar_reject = 1; @(negedge clk); xbar_reject = 0;
    rd(12'h004, v); chk(v[2], "reject flag");
    wr(12'h100, 32'h8000_0001);
    rd(12'h004, v); chk(!v[2], "reject flag clears on next crossbar write");
    wr(12'h110, 32'h8000_0001);                     // port 4 does not exist
    chk(xbar_pulses == 2, "no pulse for absent port");
    // accelerators
    wr(12'h484, 32'hCAFE_0001); wr(12'h48C, 32'hCAFE_0003); wr(12'h404, 32'h1111_1111);
    chk(acc_params[1][0] == 32'hCAFE_0001 && acc_params[1][2] == 32'hCAFE_0003 &&
        acc_params[0][0] == 32'h1111_1111 && acc_params[1][1] == 0, "parameters");
    rd(12'h48C, v); chk(v == 32'hCAFE_0003, "parameter readback");
    wr(12'h480, 32'h1);
    chk(start_pulses == 1, "start pulse");
    rd(12'h480, v); chk(v == 32'h1, "running");
    @(negedge clk); acc_done[1] = 1; @(negedge clk); acc_done[1] = 0;
    rd(12'h480, v); chk(v == 32'h2, "done");
    rd(12'h400, v); chk(v == 32'h0, "other accelerator idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
