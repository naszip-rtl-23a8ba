// tb_fee_module: self-checking test of the early-exit decision.
// Random alpha/beta factors are written for all steps; random partial
// distances, thresholds and steps are then applied. The exit flag must be
// thr < factor[step] * acc, evaluated in double precision by the testbench
// (cases within 1e-5 of the boundary are skipped), with factor 1.0 on the
// last step, and must appear one cycle after in_valid.
module tb_fee_module;
  import naszip_pkg::*;
  import tb_fp_pkg::*;
  localparam int STEPS = 128;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, in_valid = 0, last = 0, out_valid, exit_o;
  logic [6:0] wr_step = 0, step = 0;
  fp32_t wr_factor = 0, acc = 0, thr = 0;
  real factors [STEPS];
  int checks = 0, failures = 0, n_exit = 0, n_cont = 0;

  fee_module dut (.*);

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
    real a, t, f, est;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < STEPS; k++) begin
      // alpha_k / beta_k: alpha falls from ~D/k towards 1, beta > 1
      f = f2r(r2f(1.0 + 20.0 / real'(k + 1) * real'($urandom_range(50, 100)) / 100.0));
      factors[k] = f;
      wr_en = 1; wr_step = 7'(k); wr_factor = r2f(f);
      @(negedge clk);
    end
    wr_en = 0;
    for (int i = 0; i < 5000; i++) begin
      a = f2r(r2f(real'($urandom_range(0, 100000)) / 1000.0));
      t = f2r(r2f(real'($urandom_range(1, 100000)) / 100.0));
      step = 7'($urandom_range(0, STEPS - 1));
      last = ($urandom_range(0, 9) == 0);
      f = last ? 1.0 : factors[step];
      est = f * a;
      if (est > t * (1.0 + 1e-5) || est < t * (1.0 - 1e-5)) begin
        acc = r2f(a); thr = r2f(t); in_valid = 1;
        @(negedge clk);
        in_valid = 0;
        check(out_valid === 1'b1, "out_valid latency");
        check(exit_o === (t < est), $sformatf("step %0d last %0d acc %g thr %g est %g exit %0d",
              step, last, a, t, est, exit_o));
        if (t < est) n_exit++; else n_cont++;
      end
    end
    check(n_exit > 100 && n_cont > 100, "both outcomes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
