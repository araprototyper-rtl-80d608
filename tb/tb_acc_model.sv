// tb_acc_model: behavioural accelerator following the integration template
// of the vector-square example (testbench only). Parameters from the CPU:
// p[0] input virtual address, p[1] output virtual address, p[2] input
// buffer id, p[3] output buffer id, p[4] length in words. On start it
// pushes a READ request, waits until the memory system is idle, squares
// every element (32-bit integer product here) reading port 0 and writing
// port 1 in one pipelined pass of one element per cycle, pushes a WRITE
// request, waits again and pulses done. compute_cycles records the length
// of the compute pass.
// The request/compute/write-back sequence follows the paper's accelerator
// integration template and its vector-square example; the port use and the
// timing are this model's own.
module tb_acc_model
  import ara_pkg::*;
#(
  parameter int unsigned MAXP = 13
) (
  input  logic          clk,
  input  logic          rst_n,
  output port_req_t     p0_req,
  input  logic [DW-1:0] p0_rdata,
  output port_req_t     p1_req,
  output logic          req_valid,
  input  logic          req_ready,
  output mem_req_t      req,
  input  logic          mem_busy,
  input  logic          start,
  input  logic [31:0]   params [MAXP],
  output logic          done,
  output int            compute_cycles
);
  initial begin
    p0_req = '0; p1_req = '0; req_valid = 0; req = '0; done = 0; compute_cycles = 0;
    forever begin
      int len, c0;
      @(posedge clk);
      if (start) begin
        len = int'(params[4]);
        // memory_request0(READ, ...)
        @(negedge clk);
        req_valid = 1; req.dir = MEM_READ; req.vaddr = params[0];
        req.buf_id = BUFID_W'(params[2]); req.buf_off = '0; req.len = LEN_W'(len);
        @(posedge clk); while (!req_ready) @(posedge clk);
        @(negedge clk); req_valid = 0;
        @(negedge clk); while (mem_busy) @(negedge clk);
        // kernel: port1[i] = port0[i] * port0[i], II = 1
        c0 = 0;
        for (int i = 0; i <= len; i++) begin
          p0_req.en = (i < len); p0_req.we = 0; p0_req.addr = BUF_AW'(i);
          p1_req.en = (i > 0);   p1_req.we = 1; p1_req.addr = BUF_AW'(i - 1);
          p1_req.wdata = p0_rdata * p0_rdata;
          @(negedge clk); c0++;
        end
        p0_req = '0; p1_req = '0;
        compute_cycles = c0;
        // memory_request1(WRITE, ...)
        req_valid = 1; req.dir = MEM_WRITE; req.vaddr = params[1];
        req.buf_id = BUFID_W'(params[3]); req.buf_off = '0; req.len = LEN_W'(len);
        @(posedge clk); while (!req_ready) @(posedge clk);
        @(negedge clk); req_valid = 0;
        @(negedge clk); while (mem_busy) @(negedge clk);
        done = 1; @(negedge clk); done = 0;
      end
    end
  end
endmodule
