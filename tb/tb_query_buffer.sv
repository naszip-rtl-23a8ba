// tb_query_buffer: self-checking test of the query buffer of one VPE path.
// The whole buffer is written with random FP32 words; then random sessions
// start the wrapped counter at a random base and advance it on random cycles.
// Every cycle the output must equal the reference copy at the expected index,
// which shows one element per advance and the wrap at the buffer end.
module tb_query_buffer;
  import naszip_pkg::*;
  localparam int DEPTH = 512;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, start = 0, next = 0;
  logic [8:0] wr_addr = 0, base = 0;
  fp32_t wr_data = 0, out;
  fp32_t ref_mem [DEPTH];
  int checks = 0, failures = 0;
  int idx;

  query_buffer #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 9'(i); wr_data = $urandom; ref_mem[i] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int s = 0; s < 40; s++) begin
      start = 1; base = 9'($urandom_range(0, DEPTH - 1)); idx = base;
      @(negedge clk); start = 0;
      for (int c = 0; c < 60; c++) begin
        check(out === ref_mem[idx], $sformatf("session %0d cycle %0d idx %0d got %h exp %h", s, c, idx, out, ref_mem[idx]));
        next = ($urandom_range(0, 2) != 0);
        @(negedge clk);
        if (next) idx = (idx + 1) % DEPTH;
        next = 0;
      end
    end
    // a write while reading: new data visible at the counter's position
    start = 1; base = 9'd511; @(negedge clk); start = 0;
    wr_en = 1; wr_addr = 9'd511; wr_data = 32'h3F80_0000; @(negedge clk); wr_en = 0;
    check(out === 32'h3F80_0000, "write then read");
    next = 1; @(negedge clk); next = 0;
    check(out === ref_mem[0], "wrap from 511 to 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
