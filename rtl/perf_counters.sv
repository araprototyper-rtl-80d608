// perf_counters: the IOMMU's two performance counters.
//
// Counts TLB accesses (one per page translation) and TLB misses (translations
// that missed on their first lookup). Both are W-bit counters that saturate
// at their maximum rather than wrap, and both return to zero on clear, the
// performance monitor's reset command. Increments in the cycle of clear are
// dropped. Counting rules follow the paper's description of the two
// counters; saturation and the clear timing are this design's choices.
module perf_counters #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         access_inc,
  input  logic         miss_inc,
  output logic [W-1:0] access_cnt,
  output logic [W-1:0] miss_cnt
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      access_cnt <= '0;
      miss_cnt   <= '0;
    end else if (clear) begin
      access_cnt <= '0;
      miss_cnt   <= '0;
    end else begin
      if (access_inc && access_cnt != '1) access_cnt <= access_cnt + 1'b1;
      if (miss_inc   && miss_cnt   != '1) miss_cnt   <= miss_cnt + 1'b1;
    end
  end
endmodule
