// tb_shared_buffer: random traffic on both ports of a small buffer bank,
// checked against a reference array; also checks the one-cycle read latency
// and that port B wins a same-address write collision.
// The bank size follows the paper; dual porting and the collision rule are
// this design's own.
module tb_shared_buffer;
  localparam int unsigned WORDS = 64;
  localparam int unsigned AWD = $clog2(WORDS);
  logic clk = 0;
  always #5 clk = ~clk;
  logic a_en, a_we, b_en, b_we;
  logic [AWD-1:0] a_addr, b_addr;
  logic [31:0] a_wdata, b_wdata, a_rdata, b_rdata;
  logic [31:0] ref_mem [WORDS];
  int checks = 0, failures = 0;

  shared_buffer #(.WORDS(WORDS), .DW(32)) dut (.*);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %h exp %h", what, got, exp); end
  endtask

  initial begin
    a_en = 0; a_we = 0; b_en = 0; b_we = 0; a_addr = 0; b_addr = 0; a_wdata = 0; b_wdata = 0;
    // initialise through both ports
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk);
      a_en = 1; a_we = 1; a_addr = AWD'(i); a_wdata = 32'hA000_0000 + i; ref_mem[i] = a_wdata;
      b_en = 0;
    end
    @(negedge clk); a_en = 0;
    // collision: both write word 5, port B wins
    @(negedge clk);
    a_en = 1; a_we = 1; a_addr = 5; a_wdata = 32'h1111_1111;
    b_en = 1; b_we = 1; b_addr = 5; b_wdata = 32'h2222_2222; ref_mem[5] = 32'h2222_2222;
    @(negedge clk); a_en = 0; b_en = 0;
    // random mixed traffic
    for (int n = 0; n < 2000; n++) begin
      logic [AWD-1:0] ra, rb;
      logic wa, wb;
      @(negedge clk);
      ra = AWD'($urandom); rb = AWD'($urandom);
      wa = $urandom % 2; wb = $urandom % 2;
      if (ra == rb) wb = 0;
      a_en = 1; a_we = wa; a_addr = ra; a_wdata = $urandom;
      b_en = 1; b_we = wb; b_addr = rb; b_wdata = $urandom;
      begin
        logic [31:0] ea, eb;
        ea = ref_mem[ra]; eb = ref_mem[rb];
        if (wa) ref_mem[ra] = a_wdata;
        if (wb) ref_mem[rb] = b_wdata;
        @(posedge clk); #1;
        if (!wa) chk(a_rdata, ea, "port A read");
        if (!wb) chk(b_rdata, eb, "port B read");
      end
    end
    @(negedge clk); a_en = 0; b_en = 0;
    // full readback through port B, exactly one cycle latency
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk); b_en = 1; b_we = 0; b_addr = AWD'(i);
      @(posedge clk); #1; chk(b_rdata, ref_mem[i], "readback");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
