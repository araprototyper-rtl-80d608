// tb_partial_crossbar: a 4-port x 6-buffer crossbar with a hand-written
// topology. Checks selection accept/reject rules, routing of requests to
// the owning buffer only, routing of read data back, and release.
// Dedicated, arbitration-free paths follow the paper; the selection and
// reject rules are this design's own.
module tb_partial_crossbar;
  import ara_pkg::*;
  localparam int unsigned NP = 4, NB = 6;
  // port 0: {0,1}; port 1: {1,2}; port 2: {2,3,4}; port 3: {5}
  localparam logic [NP*NB-1:0] CONN = {6'b100000, 6'b011100, 6'b000110, 6'b000011};
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;
  always #5 clk = ~clk;
  port_req_t     port_req [NP];
  logic [DW-1:0] port_rdata [NP];
  port_req_t     buf_req [NB];
  logic [DW-1:0] buf_rdata [NB];
  logic cfg_we, cfg_en, cfg_reject;
  logic [1:0] cfg_port;
  logic [2:0] cfg_buf;
  logic [2:0] sel [NP];
  logic       sel_en [NP];
  int checks = 0, failures = 0;

  partial_crossbar #(.NUM_PORTS(NP), .NUM_BUF(NB), .CONN(CONN)) dut (.*);

  initial begin #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic cfg(input int p, input int b, input logic en, input logic exp_reject);
    @(negedge clk);
    cfg_we = 1; cfg_port = 2'(p); cfg_buf = 3'(b); cfg_en = en;
    @(negedge clk); cfg_we = 0;
    chk(cfg_reject == exp_reject, $sformatf("reject flag port %0d buf %0d", p, b));
  endtask

  int owner [NB];
  task automatic check_routing();
    for (int b = 0; b < NB; b++) begin
      owner[b] = -1;
      for (int p = 0; p < NP; p++) if (sel_en[p] && sel[p] == 3'(b)) owner[b] = p;
    end
    for (int p = 0; p < NP; p++) begin
      port_req[p].en = 1; port_req[p].we = p[0]; port_req[p].addr = BUF_AW'(100 + p);
      port_req[p].wdata = 32'hC0DE_0000 + p;
    end
    for (int b = 0; b < NB; b++) buf_rdata[b] = 32'hB000_0000 + b;
    #1;
    for (int b = 0; b < NB; b++) begin
      if (owner[b] < 0) chk(!buf_req[b].en, $sformatf("buffer %0d idle", b));
      else chk(buf_req[b].en && buf_req[b].addr == BUF_AW'(100 + owner[b]) &&
               buf_req[b].wdata == 32'hC0DE_0000 + owner[b] && buf_req[b].we == owner[b][0],
               $sformatf("buffer %0d driven by port %0d", b, owner[b]));
    end
    for (int p = 0; p < NP; p++)
      if (sel_en[p]) chk(port_rdata[p] == 32'hB000_0000 + sel[p], $sformatf("rdata port %0d", p));
  endtask

  initial begin
    cfg_we = 0; cfg_en = 0; cfg_port = 0; cfg_buf = 0;
    for (int p = 0; p < NP; p++) port_req[p] = '0;
    for (int b = 0; b < NB; b++) buf_rdata[b] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    check_routing();                       // nothing selected: all idle
    cfg(0, 1, 1, 0);                       // allowed
    cfg(1, 1, 1, 1);                       // taken by port 0
    cfg(1, 0, 1, 1);                       // not in port 1's subset
    cfg(1, 2, 1, 0);
    cfg(2, 2, 1, 1);                       // taken by port 1
    cfg(2, 4, 1, 0);
    cfg(3, 5, 1, 0);
    check_routing();
    chk(sel[0] == 1 && sel[1] == 2 && sel[2] == 4 && sel[3] == 5, "selections");
    cfg(0, 1, 0, 0);                       // release port 0
    cfg(1, 1, 1, 0);                       // now buffer 1 is free for port 1
    check_routing();
    chk(!sel_en[0] && sel[1] == 1, "release and reassign");
    cfg(0, 0, 1, 0);
    cfg(2, 3, 1, 0);                       // re-select own port to another buffer
    check_routing();
    chk(sel[2] == 3, "reselect");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
