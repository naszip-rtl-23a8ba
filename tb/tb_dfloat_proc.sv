// tb_dfloat_proc: self-checking test of the Dfloat decoder of one VPE path.
// Random 128-bit bursts are packed with n-bit elements (n = 12, 14, 16, 18,
// 21 and 32; an element is the top n bits of a random FP32 value) and fed as
// 16 byte beats. The testbench checks every decoded element against the
// zero-padded value, that the first element follows the 16th beat by one
// cycle and that elements then come one per cycle, and that done follows the
// last element. Partly filled bursts (fewer elements than fit) are included.
module tb_dfloat_proc;
  import naszip_pkg::*;
  logic clk = 0, rst_n = 0;
  logic beat_valid = 0;
  logic [7:0] beat_data = 0;
  logic [5:0] width = 16;
  logic [3:0] count = 0;
  logic elem_valid, done;
  fp32_t elem_fp32;
  int checks = 0, failures = 0;

  dfloat_proc dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  int widths [6] = '{12, 14, 16, 18, 21, 32};

  initial begin
    logic [127:0] burst;
    logic [31:0]  vals [16];
    int w, n;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int trial = 0; trial < 300; trial++) begin
      w = widths[trial % 6];
      n = 128 / w;
      if (trial % 5 == 4) n = $urandom_range(0, n);
      burst = '0;
      for (int j = 0; j < n; j++) begin
        vals[j] = {$urandom_range(0,1) == 1, 8'($urandom_range(1, 254)), 23'($urandom)};
        vals[j] = vals[j] & ~((32'd1 << (32 - w)) - 1) ;
        if (w == 32) vals[j] = {$urandom_range(0,1) == 1, 8'($urandom_range(1, 254)), 23'($urandom)};
        burst[j*w +: 32] = 32'(vals[j] >> (32 - w));
      end
      for (int b = n * w; b < 128; b++) burst[b] = 1;   // junk after the last element
      for (int t = 0; t < 16; t++) begin
        @(negedge clk);
        beat_valid = 1; beat_data = burst[8*t +: 8];
        width = 6'(w); count = 4'(n);
        if ($urandom_range(0, 3) == 0 && t < 15) begin      // gap between beats
          @(negedge clk); beat_valid = 0;
        end
      end
      @(negedge clk);
      beat_valid = 0;
      // first element one cycle after the 16th beat, then one per cycle
      for (int j = 0; j < n; j++) begin
        check(elem_valid === 1'b1, $sformatf("elem_valid trial %0d j %0d", trial, j));
        check(elem_fp32 === vals[j], $sformatf("trial %0d w %0d j %0d got %h exp %h", trial, w, j, elem_fp32, vals[j]));
        @(negedge clk);
      end
      check(done === 1'b1 && elem_valid === 1'b0, $sformatf("done trial %0d", trial));
      @(negedge clk);
      check(done === 1'b0, "done is one pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
