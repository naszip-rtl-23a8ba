// tb_vpe: self-checking test of the vector processing engine.
// Three Dfloat layouts of a 128-dimension vector are used, those printed for
// the paper's examples: 16 bits everywhere; 18/16/14 bits over dimensions
// 1-42/43-74/75-128 (6, 4 and 6 bursts); 21/18/14/12 bits over 1-24/25-52/
// 53-88/89-128 (4 bursts each). Each needs 16 bursts, i.e. 4 accesses of one
// burst per device, burst b coming from device b mod 4. The testbench plays
// the controller: it loads two queries into the query buffers (each path gets
// the elements of its own bursts, in order), writes alpha/beta factors, and
// streams random vectors, truncated to the Dfloat widths, in L2 and IP mode.
// After every access it checks the early-exit decision and the partial
// distance against a double-precision reference, stops the vector on exit,
// checks the full distance on the last access, and checks the latency from
// the 16th beat to the decision (largest element count of the access + 5).
module tb_vpe;
  import naszip_pkg::*;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 0;
  dist_mode_e mode = MODE_L2;
  logic [N_SEG-1:0][$bits(dfseg_t)-1:0] segs;
  logic [7:0] n_access = 4;
  logic qb_wr_en = 0, fee_wr_en = 0, vec_start = 0, beat_valid = 0;
  logic [1:0] qb_wr_path = 0;
  logic [8:0] qb_wr_addr = 0, q_base = 0;
  fp32_t qb_wr_data = 0, fee_wr_data = 0, thr = 0, distance;
  logic [6:0] fee_wr_step = 0;
  logic [31:0] beat_data = 0;
  logic step_valid, step_exit, step_last;
  int checks = 0, failures = 0, n_exit = 0, n_accept = 0;

  vpe #(.QB_DEPTH(512)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // layouts: {dim_end, width} per segment
  int lay_dim [3][4] = '{'{128, 128, 128, 128}, '{42, 74, 128, 128}, '{24, 52, 88, 128}};
  int lay_w   [3][4] = '{'{16, 16, 16, 16},     '{18, 16, 14, 14},   '{21, 18, 14, 12}};
  // burst -> first dimension and element count, per layout
  int b_first [3][16], b_cnt [3][16], b_w [3][16];
  real fac [4] = '{6.0, 2.5, 1.4, 1.0};
  real qv [2][128];

  function automatic logic [31:0] trunc(input real x, input int w);
    logic [31:0] f;
    f = r2f(x);
    return f & ~((32'd1 << (32 - w)) - 1);
  endfunction

  task automatic build_layouts();
    for (int l = 0; l < 3; l++) begin
      int b, ds;
      b = 0; ds = 0;
      for (int s = 0; s < 4; s++) begin
        int epb, nd, nb;
        epb = 128 / lay_w[l][s];
        nd  = lay_dim[l][s] - ds;
        nb  = (nd + epb - 1) / epb;
        for (int i = 0; i < nb; i++) begin
          b_first[l][b] = ds + i * epb;
          b_cnt[l][b]   = (nd - i * epb < epb) ? nd - i * epb : epb;
          b_w[l][b]     = lay_w[l][s];
          b++;
        end
        ds = lay_dim[l][s];
      end
      if (b != 16) $display("layout %0d has %0d bursts", l, b);
    end
  endtask

  task automatic set_segs(input int l);
    int b, ds;
    dfseg_t sg;
    b = 0; ds = 0;
    for (int s = 0; s < 4; s++) begin
      int epb, nd;
      epb = 128 / lay_w[l][s];
      nd  = lay_dim[l][s] - ds;
      b  += (nd + epb - 1) / epb;
      sg.burst_end = 10'(b); sg.dim_end = 12'(lay_dim[l][s]);
      sg.width = 6'(lay_w[l][s]); sg.epb = 4'(epb);
      segs[s] = sg;
      ds = lay_dim[l][s];
    end
  endtask

  // Query qi for layout l at base qb: path p holds the elements of its bursts.
  task automatic load_query(input int l, input int qi, input int qb);
    int pos [4];
    pos = '{qb, qb, qb, qb};
    for (int b = 0; b < 16; b++) begin
      int p;
      p = b % 4;
      for (int e = 0; e < b_cnt[l][b]; e++) begin
        @(negedge clk);
        qb_wr_en = 1; qb_wr_path = 2'(p); qb_wr_addr = 9'(pos[p]);
        qb_wr_data = r2f(qv[qi][b_first[l][b] + e]);
        pos[p]++;
      end
    end
    @(negedge clk); qb_wr_en = 0;
  endtask

  initial begin
    real dv [128];
    real part, est, tv;
    logic [127:0] bursts [16];
    int l, qi, lat, maxc;
    logic ambiguous;
    build_layouts();
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 4; k++) begin
      @(negedge clk); fee_wr_en = 1; fee_wr_step = 7'(k); fee_wr_data = r2f(fac[k]);
    end
    @(negedge clk); fee_wr_en = 0;
    for (int i = 0; i < 128; i++) begin
      qv[0][i] = f2r(r2f(real'($urandom_range(0, 2000)) / 1000.0 - 1.0));
      qv[1][i] = f2r(r2f(real'($urandom_range(0, 2000)) / 1000.0 - 1.0));
    end
    for (int v = 0; v < 150; v++) begin
      l  = v % 3;
      qi = v % 2;
      mode = (v % 4 == 3) ? MODE_IP : MODE_L2;
      set_segs(l);
      load_query(l, qi, qi * 200);
      // vector, truncated to the widths of its bursts
      for (int b = 0; b < 16; b++) begin
        bursts[b] = '0;
        for (int e = 0; e < b_cnt[l][b]; e++) begin
          logic [31:0] f;
          f = trunc(real'($urandom_range(0, 2000)) / 1000.0 - 1.0, b_w[l][b]);
          dv[b_first[l][b] + e] = f2r(f);
          bursts[b][e * b_w[l][b] +: 32] = 32'(f >> (32 - b_w[l][b]));
        end
      end
      // threshold: spread so that exits happen at every step and some accept
      tv = 0.0;
      for (int i = 0; i < 128; i++)
        tv += (mode == MODE_L2) ? (qv[qi][i] - dv[i]) ** 2 : -(qv[qi][i] * dv[i]);
      tv = tv * (0.5 + real'($urandom_range(0, 1500)) / 1000.0);
      if (mode == MODE_IP) tv = tv - 2.0 + real'($urandom_range(0, 4000)) / 1000.0;
      tv = f2r(r2f(tv));
      @(negedge clk);
      vec_start = 1; thr = r2f(tv); q_base = 9'(qi * 200);
      @(negedge clk);
      vec_start = 0;
      part = 0.0;
      for (int k = 0; k < 4; k++) begin
        maxc = 0;
        for (int p = 0; p < 4; p++) begin
          int b;
          b = 4 * k + p;
          if (b_cnt[l][b] > maxc) maxc = b_cnt[l][b];
          for (int e = 0; e < b_cnt[l][b]; e++)
            part += (mode == MODE_L2) ? (qv[qi][b_first[l][b] + e] - dv[b_first[l][b] + e]) ** 2
                                      : -(qv[qi][b_first[l][b] + e] * dv[b_first[l][b] + e]);
        end
        for (int t = 0; t < 16; t++) begin
          beat_valid = 1;
          for (int p = 0; p < 4; p++) beat_data[8*p +: 8] = bursts[4*k + p][8*t +: 8];
          @(negedge clk);
        end
        beat_valid = 0;
        lat = 0;
        while (!step_valid && lat < 100) begin @(negedge clk); lat++; end
        check(lat <= maxc + 5, $sformatf("latency %0d for %0d elements", lat, maxc));
        est = ((k == 3) ? 1.0 : fac[k]) * part;
        ambiguous = (est > tv ? est - tv : tv - est) < 1e-3 * ((tv < 0 ? -tv : tv) + 1e-6);
        check(close(f2r(distance), part), $sformatf("v %0d step %0d partial %g exp %g", v, k, f2r(distance), part));
        check(step_last === (k == 3), "step_last");
        if (!ambiguous)
          check(step_exit === (tv < est), $sformatf("v %0d step %0d exit %0d est %g thr %g", v, k, step_exit, est, tv));
        if (step_exit) begin n_exit++; break; end
        if (k == 3) n_accept++;
      end
      @(negedge clk);
    end
    check(n_exit > 20 && n_accept > 20, $sformatf("exits %0d accepts %0d", n_exit, n_accept));
    $display("exits=%0d accepts=%0d", n_exit, n_accept);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
