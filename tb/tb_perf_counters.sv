// tb_perf_counters: random increments against reference counts, clear, and
// saturation of a narrow counter.
// The two counters and their reset follow the paper; saturation is this
// design's own rule.
module tb_perf_counters;
  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;
  always #5 clk = ~clk;
  logic clear, access_inc, miss_inc;
  logic [7:0] access_cnt, miss_cnt;
  int checks = 0, failures = 0;
  int ea, em;

  perf_counters #(.W(8)) dut (.*);

  initial begin #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    clear = 0; access_inc = 0; miss_inc = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    ea = 0; em = 0;
    for (int n = 0; n < 150; n++) begin
      @(negedge clk);
      access_inc = $urandom % 2; miss_inc = access_inc && ($urandom % 3 == 0);
      if (access_inc) ea++;
      if (miss_inc) em++;
    end
    @(negedge clk); access_inc = 0; miss_inc = 0;
    #1 chk(access_cnt, ea, "access"); chk(miss_cnt, em, "miss");
    clear = 1; @(negedge clk); clear = 0;
    chk(access_cnt, 0, "cleared access"); chk(miss_cnt, 0, "cleared miss");
    // saturation at 255
    access_inc = 1; repeat (300) @(negedge clk); access_inc = 0;
    chk(access_cnt, 255, "saturated"); chk(miss_cnt, 0, "miss unchanged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
