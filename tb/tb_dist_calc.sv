// tb_dist_calc: self-checking test of the per-element distance term.
// Random FP32 pairs (q, d) over several magnitudes are applied in L2 and IP
// mode; the registered term must equal (q-d)^2, or -(q*d), computed in double
// precision by the testbench, to a relative 1e-4 (the FP32 result has two
// roundings). It also checks the one-cycle latency of out_valid and that an
// idle cycle gives a zero term.
module tb_dist_calc;
  import naszip_pkg::*;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_valid;
  dist_mode_e mode = MODE_L2;
  fp32_t q = 0, d = 0, term;
  int checks = 0, failures = 0;

  dist_calc dut (.*);

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

  function automatic real rnd(input int scale);
    real x;
    x = real'($urandom_range(0, 2000000)) / 1000000.0 - 1.0;
    return x * (10.0 ** scale);
  endfunction

  initial begin
    real qr, dr, expv;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      mode = (i % 2) ? MODE_IP : MODE_L2;
      qr = f2r(r2f(rnd($urandom_range(0, 4) - 2)));
      dr = (i % 7 == 0) ? qr : f2r(r2f(rnd($urandom_range(0, 4) - 2)));
      q = r2f(qr); d = r2f(dr);
      in_valid = 1;
      expv = (mode == MODE_L2) ? (qr - dr) * (qr - dr) : -(qr * dr);
      @(negedge clk);
      in_valid = 0;
      check(out_valid === 1'b1, "out_valid one cycle after in_valid");
      check(close(f2r(term), expv), $sformatf("%s q=%h d=%h got %h (%g) exp %g",
            mode.name(), q, d, term, f2r(term), expv));
      if (i % 50 == 0) begin
        @(negedge clk);
        check(out_valid === 1'b0 && term === 32'd0, "idle cycle gives zero term");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
