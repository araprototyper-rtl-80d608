// shared_buffer: one bank of the homogeneous shared-buffer pool.
//
// A WORDS x DW dual-port memory (16 KB of 32-bit elements by default, the
// paper's default buffer size). Port A faces the accelerators through the
// partial crossbar, port B faces the DMACs through the interleaved network,
// so an accelerator can read or write one element per cycle (II = 1) while a
// DMAC streams a page in or out. Both ports are synchronous: a read issued in
// cycle t returns data in cycle t+1. A write returns nothing (read data of a
// write cycle keeps its old value). If both ports write the same word in the
// same cycle, port B (DMAC) wins. Dual porting and the element width are this
// design's choices; the paper gives only the bank's size and role.
module shared_buffer #(
  parameter int unsigned WORDS = ara_pkg::BUF_WORDS,
  parameter int unsigned DW    = ara_pkg::DW,
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic          clk,
  // port A: accelerator side
  input  logic          a_en,
  input  logic          a_we,
  input  logic [AW-1:0] a_addr,
  input  logic [DW-1:0] a_wdata,
  output logic [DW-1:0] a_rdata,
  // port B: DMAC side
  input  logic          b_en,
  input  logic          b_we,
  input  logic [AW-1:0] b_addr,
  input  logic [DW-1:0] b_wdata,
  output logic [DW-1:0] b_rdata
);
  logic [DW-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (a_en && a_we) mem[a_addr] <= a_wdata;
    if (b_en && b_we) mem[b_addr] <= b_wdata;
  end

  always_ff @(posedge clk) begin
    if (a_en && !a_we) a_rdata <= mem[a_addr];
    if (b_en && !b_we) b_rdata <= mem[b_addr];
  end
endmodule
