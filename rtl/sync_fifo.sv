// sync_fifo: single-clock first-in first-out queue used for the accelerator
// request FIFOs (IOMMU_FIFO) and the DMAC command queues.
//
// DEPTH entries of type T. Push when in_valid && in_ready; pop when
// out_valid && out_ready. out_data shows the oldest entry in the same cycle
// it is valid (first-word fall-through). A full FIFO deasserts in_ready; a
// push and a pop may happen in the same cycle. count gives the occupancy.
// The paper names the accelerators' request FIFO but does not describe it;
// this queue, its depth and its fall-through timing are this design's own.
module sync_fifo #(
  parameter type         T     = logic [31:0],
  parameter int unsigned DEPTH = 4,
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  T              in_data,
  output logic          out_valid,
  input  logic          out_ready,
  output T              out_data,
  output logic [CW-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  T mem [DEPTH];
  logic [PW-1:0] rd_ptr, wr_ptr;
  logic push, pop;

  assign in_ready  = (count != CW'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= inc(wr_ptr);
      if (pop)  rd_ptr <= inc(rd_ptr);
      count <= count + CW'(push) - CW'(pop);
    end
  end

  always_ff @(posedge clk) if (push) mem[wr_ptr] <= in_data;
endmodule
