// tb_rank_env: end-to-end test bench environment of one NasZip rank.
// It builds a random proximity graph of N_NODES nodes with 128-dimension
// vectors, splits it over the two sub-channels (nodes 0..N/2-1 in
// sub-channel 0, the rest in sub-channel 1), lays out each sub-channel's
// memory (neighbor list table, partitioned neighbor lists, Dfloat vectors in
// the 18/16/14-bit layout of the paper's example) in two tb_dram models, and
// plays the host: it writes the FEE factors and N_Q queries, then runs rounds
// of search hops per query (each on the closest node not yet expanded, as a
// best-first search does), with a prefetch command and searches of the
// prefetched nodes every third round and a queue clear in the middle.
//
// Checks:
//  - every neighbor whose early-exit decisions are clear-cut (no estimate
//    within 0.1 % of the threshold) is accepted or dropped as a
//    double-precision model of the VPE predicts, accepted ones with the
//    model's distance, and nothing else is pushed into the queue;
//  - after every hop the whole list of the query, read through the host
//    port, equals a model of the sorted queue fed with the observed pushes,
//    and the overflow pulses match that model;
//  - the number of distance steps per hop equals the model's;
//  - no memory request touches a line that holds no data;
//  - each mechanism happened at least once: LNC-T hit and miss, LNC-D hit
//    and miss, early exit, accept, prefetch, a search served fully from the
//    caches right after a prefetch, and queue overflow.
// Parameters are passed to the rank unchanged, so an instance without
// overrides tests the rank at its default (paper) sizes.
module tb_rank_env
  import naszip_pkg::*;
  import tb_fp_pkg::*;
#(
  parameter int unsigned QDEPTH     = 16,
  parameter int unsigned LNCT_BYTES = 8192,
  parameter int unsigned LNCD_BYTES = 262144,
  parameter int unsigned LNCD_WAYS  = 8,
  parameter bit          IP         = 1'b0,   // inner-product metric
  parameter int          N_NODES    = 256,
  parameter int          N_Q        = 4,
  parameter int          ROUNDS     = 12,
  parameter bit          GAPS       = 1'b0
) ();
  localparam int DIM = 128, NACC = 4, HALF = N_NODES / 2;
  localparam int NLT_BASE = 'h100, NBR_BASE = 'h1000;
  localparam int VEC_BASE0 = 'h10000, VEC_BASE1 = 'h20000;

  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic cmd_valid = 0, cmd_ready;
  host_cmd_t cmd = '0;
  logic [1:0] mem_req_valid, mem_req_ready, mem_rsp_valid;
  logic [1:0][31:0] mem_req_addr, mem_rsp_data;
  logic [3:0] pq_rd_qid = 0;
  logic [$clog2(QDEPTH)-1:0] pq_rd_idx = 0;
  logic [31:0] pq_rd_id, pq_rd_dist;
  logic [$clog2(QDEPTH+1)-1:0] pq_rd_count;
  logic pq_overflow;
  logic [1:0] ev_t_hit, ev_t_miss, ev_d_hit, ev_d_miss, ev_exit, ev_accept, ev_prefetch;

  naszip_rank #(.QDEPTH(QDEPTH), .LNCT_BYTES(LNCT_BYTES), .LNCD_BYTES(LNCD_BYTES),
                .LNCD_WAYS(LNCD_WAYS)) dut (.*);

  for (genvar s = 0; s < 2; s++) begin : g_mem
    tb_dram #(.LAT(4 + 2 * s), .GAPS(GAPS)) mem (
      .clk, .rst_n,
      .req_valid (mem_req_valid[s]),
      .req_addr  (mem_req_addr[s]),
      .req_ready (mem_req_ready[s]),
      .rsp_valid (mem_rsp_valid[s]),
      .rsp_data  (mem_rsp_data[s])
    );
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_t_hit = 0, n_t_miss = 0, n_d_hit = 0, n_d_miss = 0, n_exit = 0;
  int n_accept = 0, n_pref = 0, n_ovf = 0, n_pf_hit = 0, n_steps = 0;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // ---- observed activity ------------------------------------------------------
  logic [31:0] obs_id [$], obs_d [$];
  always @(posedge clk) if (rst_n) begin
    n_t_hit  += $countones(ev_t_hit);
    n_t_miss += $countones(ev_t_miss);
    n_d_hit  += $countones(ev_d_hit);
    n_d_miss += $countones(ev_d_miss);
    n_exit   += $countones(ev_exit);
    n_accept += $countones(ev_accept);
    n_pref   += $countones(ev_prefetch);
    if (pq_overflow) n_ovf++;
    if (dut.pq_ins_valid) begin obs_id.push_back(dut.pq_ins_id); obs_d.push_back(dut.pq_ins_dist); end
    n_steps  += $countones(dut.step_valid);
  end

  // ---- data set -----------------------------------------------------------------
  // Dfloat-1 layout: 18 bits for dims 1-42, 16 for 43-74, 14 for 75-128.
  int seg_dim [4] = '{42, 74, 128, 128};
  int seg_w   [4] = '{18, 16, 14, 14};
  int b_first [16], b_cnt [16], b_w [16];
  real fac [4] = '{3.0, 1.8, 1.25, 1.0};
  real vec [N_NODES][DIM];
  real qv  [N_Q][DIM];
  int  nbrs [N_NODES][$];
  int  q_base [N_Q];

  function automatic int sc_of(input int v);
    return v < HALF ? 0 : 1;
  endfunction

  task automatic build_layout();
    int b, ds;
    dfseg_t sg;
    b = 0; ds = 0;
    for (int s = 0; s < 4; s++) begin
      int epb, nd, nb;
      epb = 128 / seg_w[s];
      nd  = seg_dim[s] - ds;
      nb  = (nd + epb - 1) / epb;
      for (int i = 0; i < nb; i++) begin
        b_first[b] = ds + i * epb;
        b_cnt[b]   = (nd - i * epb < epb) ? nd - i * epb : epb;
        b_w[b]     = seg_w[s];
        b++;
      end
      sg.burst_end = 10'(b); sg.dim_end = 12'(seg_dim[s]);
      sg.width = 6'(seg_w[s]); sg.epb = 4'(epb);
      cfg.seg[s] = sg;
      ds = seg_dim[s];
    end
    check(b == 16, "layout has 16 bursts");
  endtask

  function automatic logic [31:0] trunc(input real x, input int w);
    logic [31:0] f;
    f = r2f(x);
    return f & ~((32'd1 << (32 - w)) - 1);
  endfunction

  task automatic build_data();
    logic [511:0] nlt [2][int], nl [2][int];
    int cur_line [2], cur_word [2];
    // vectors, stored truncated to their Dfloat widths
    for (int v = 0; v < N_NODES; v++) begin
      logic [127:0] bursts [16];
      int s;
      s = sc_of(v);
      for (int b = 0; b < 16; b++) begin
        bursts[b] = '0;
        for (int e = 0; e < b_cnt[b]; e++) begin
          logic [31:0] f;
          f = trunc(real'($urandom_range(0, 2000)) / 1000.0 - 1.0, b_w[b]);
          vec[v][b_first[b] + e] = f2r(f);
          bursts[b][e * b_w[b] +: 32] = 32'(f >> (32 - b_w[b]));
        end
      end
      for (int k = 0; k < NACC; k++)
        g_write(s, (s != 0 ? VEC_BASE1 : VEC_BASE0) + (v - s * HALF) * NACC + k,
                {bursts[4*k+3], bursts[4*k+2], bursts[4*k+1], bursts[4*k]});
    end
    // graph: 6..14 distinct random neighbors per node
    for (int v = 0; v < N_NODES; v++) begin
      int deg;
      deg = $urandom_range(6, 14);
      while (nbrs[v].size() < deg) begin
        int u, dup;
        u = $urandom_range(0, N_NODES - 1);
        dup = (u == v);
        foreach (nbrs[v][i]) if (nbrs[v][i] == u) dup = 1;
        if (!dup) nbrs[v].push_back(u);
      end
    end
    // NLT and partitioned neighbor lists per sub-channel, in node order
    cur_line = '{0, 0}; cur_word = '{0, 0};
    for (int v = 0; v < N_NODES; v++) begin
      for (int s = 0; s < 2; s++) begin
        int loc [$];
        nlt_entry_t e;
        foreach (nbrs[v][i]) if (sc_of(nbrs[v][i]) == s) loc.push_back(nbrs[v][i]);
        if (!nlt[s].exists(v / 16)) nlt[s][v / 16] = '0;
        if (loc.size() == 0) e = '0;
        else begin
          if (cur_word[s] + loc.size() > 16) begin cur_line[s]++; cur_word[s] = 0; end
          if (!nl[s].exists(cur_line[s])) nl[s][cur_line[s]] = '0;
          e.len  = 8'(loc.size());
          e.addr = 24'(cur_line[s] * 64 + cur_word[s] * 4);
          foreach (loc[i]) nl[s][cur_line[s]][(cur_word[s] + i) * 32 +: 32] = 32'(loc[i]);
          cur_word[s] += loc.size();
        end
        nlt[s][v / 16][(v % 16) * 32 +: 32] = e;
      end
    end
    for (int s = 0; s < 2; s++) begin
      foreach (nlt[s][a]) g_write(s, NLT_BASE + a, nlt[s][a]);
      foreach (nl[s][a])  g_write(s, NBR_BASE + a, nl[s][a]);
    end
  endtask

  task automatic g_write(input int s, input int a, input logic [511:0] d);
    if (s == 0) g_mem[0].mem.write_line(a, d);
    else        g_mem[1].mem.write_line(a, d);
  endtask

  // ---- host commands ------------------------------------------------------------
  task automatic send(input host_cmd_t c);
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    do @(posedge clk); while (!cmd_ready);
    @(negedge clk);
    cmd_valid = 0;
    while (!cmd_ready) @(negedge clk);
  endtask

  task automatic load_queries();
    host_cmd_t c;
    for (int qi = 0; qi < N_Q; qi++) begin
      int pos [4];
      q_base[qi] = qi * 40;
      pos = '{q_base[qi], q_base[qi], q_base[qi], q_base[qi]};
      for (int i = 0; i < DIM; i++) qv[qi][i] = f2r(r2f(real'($urandom_range(0, 2000)) / 1000.0 - 1.0));
      for (int b = 0; b < 16; b++)
        for (int e = 0; e < b_cnt[b]; e++) begin
          c = '0; c.op = OP_WR_QUERY; c.path = 2'(b % 4); c.addr = 12'(pos[b % 4]);
          c.data = r2f(qv[qi][b_first[b] + e]);
          pos[b % 4]++;
          send(c);
        end
    end
  endtask

  // ---- model ----------------------------------------------------------------------
  logic [31:0] rq_id [N_Q][$], rq_d [N_Q][$];
  int          ovf_exp = 0;
  bit          expanded [N_Q][int];

  function automatic real term(input int qi, input int v, input int i);
    return IP ? -(qv[qi][i] * vec[v][i]) : (qv[qi][i] - vec[v][i]) ** 2;
  endfunction

  function automatic real full_dist(input int qi, input int v);
    real d;
    d = 0.0;
    for (int i = 0; i < DIM; i++) d += term(qi, v, i);
    return d;
  endfunction

  // Expected outcome: -1 ambiguous, 0 early exit, 1 accept; steps taken.
  function automatic int outcome(input int qi, input int v, input real thr, output real d, output int steps);
    real part, est;
    part = 0.0;
    steps = 0;
    for (int k = 0; k < NACC; k++) begin
      for (int b = 4 * k; b < 4 * k + 4; b++)
        for (int e = 0; e < b_cnt[b]; e++) part += term(qi, v, b_first[b] + e);
      est = fac[k] * part;
      steps++;
      if ((est > thr ? est - thr : thr - est) < 1e-3 * ((thr < 0 ? -thr : thr) + 1e-3)) return -1;
      if (thr < est) begin d = part; return 0; end
    end
    d = part;
    return 1;
  endfunction

  task automatic model_insert(input int qi, input logic [31:0] id, input logic [31:0] d);
    int p;
    p = 0;
    for (int j = 0; j < rq_d[qi].size(); j++) if (!fp_lt(d, rq_d[qi][j])) p = j + 1;
    if (p >= QDEPTH) ovf_exp++;
    else begin
      rq_id[qi].insert(p, id); rq_d[qi].insert(p, d);
      if (rq_d[qi].size() > QDEPTH) begin
        void'(rq_id[qi].pop_back()); void'(rq_d[qi].pop_back()); ovf_exp++;
      end
    end
  endtask

  task automatic compare_queue(input int qi);
    @(negedge clk);
    pq_rd_qid = 4'(qi);
    #1;
    check(pq_rd_count === ($clog2(QDEPTH+1))'(rq_d[qi].size()),
          $sformatf("q%0d count %0d exp %0d", qi, pq_rd_count, rq_d[qi].size()));
    for (int j = 0; j < rq_d[qi].size(); j++) begin
      pq_rd_idx = ($clog2(QDEPTH))'(j);
      #1;
      check(pq_rd_id === rq_id[qi][j] && pq_rd_dist === rq_d[qi][j], $sformatf("q%0d entry %0d", qi, j));
    end
    @(negedge clk);
  endtask

  // One hop of query qi on node v; returns the number of cache misses seen.
  task automatic hop(input int qi, input int v, output int misses);
    real ds [$], thr, d;
    int exp_acc [int], amb [int], steps, steps_exp, o, m0, st0, n_amb;
    host_cmd_t c;
    foreach (nbrs[v][i]) ds.push_back(full_dist(qi, nbrs[v][i]));
    ds.sort();
    // threshold between two neighbor distances, past the middle
    o   = (ds.size() * 2) / 3;
    thr = (ds[o - 1] + ds[o]) / 2.0;
    thr = f2r(r2f(thr));
    steps_exp = 0; n_amb = 0;
    foreach (nbrs[v][i]) begin
      int u;
      u = nbrs[v][i];
      o = outcome(qi, u, thr, d, steps);
      steps_exp += steps;
      if (o < 0) begin amb[u] = 1; n_amb++; end
      else if (o == 1) exp_acc[u] = 1;
    end
    obs_id.delete(); obs_d.delete();
    m0 = n_t_miss + n_d_miss; st0 = n_steps;
    c = '0; c.op = OP_SEARCH; c.qid = 4'(qi); c.node = 32'(v);
    c.addr = 12'(q_base[qi]); c.data = r2f(thr);
    send(c);
    repeat (2) @(negedge clk);
    misses = n_t_miss + n_d_miss - m0;
    if (n_amb == 0) check(n_steps - st0 == steps_exp, $sformatf("hop steps %0d exp %0d", n_steps - st0, steps_exp));
    foreach (obs_id[i]) begin
      int u;
      u = int'(obs_id[i]);
      if (amb.exists(u)) continue;
      check(exp_acc.exists(u), $sformatf("node %0d pushed but not expected", u));
      if (exp_acc.exists(u)) begin
        check(close(f2r(obs_d[i]), full_dist(qi, u)), $sformatf("node %0d distance %g exp %g", u, f2r(obs_d[i]), full_dist(qi, u)));
        exp_acc.delete(u);
      end
    end
    check(exp_acc.size() == 0, $sformatf("%0d expected accepts missing", exp_acc.size()));
    foreach (obs_id[i]) model_insert(qi, obs_id[i], obs_d[i]);
    compare_queue(qi);
    check(n_ovf == ovf_exp, $sformatf("overflows %0d exp %0d", n_ovf, ovf_exp));
  endtask

  // Closest queued node of query qi not yet expanded, else a random node.
  function automatic int next_node(input int qi);
    foreach (rq_id[qi][j]) if (!expanded[qi].exists(int'(rq_id[qi][j]))) return int'(rq_id[qi][j]);
    return $urandom_range(0, N_NODES - 1);
  endfunction

  initial begin
    host_cmd_t c;
    int misses, pf_misses;
    cfg = '0;
    cfg.mode     = IP ? MODE_IP : MODE_L2;
    cfg.n_access = 8'(NACC);
    cfg.nlt_base = NLT_BASE;
    cfg.nbr_base = NBR_BASE;
    cfg.vec_base[0] = VEC_BASE0;
    cfg.vec_base[1] = VEC_BASE1;
    cfg.id_base[0]  = 0;
    cfg.id_base[1]  = HALF;
    build_layout();
    build_data();
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < NACC; k++) begin
      c = '0; c.op = OP_WR_FEE; c.addr = 12'(k); c.data = r2f(fac[k]);
      send(c);
    end
    load_queries();
    for (int r = 0; r < ROUNDS; r++) begin
      if (r == ROUNDS / 2) begin
        c = '0; c.op = OP_PQ_CLEAR;
        send(c);
        for (int qi = 0; qi < N_Q; qi++) begin
          rq_id[qi].delete(); rq_d[qi].delete(); expanded[qi].delete();
          compare_queue(qi);
        end
      end
      for (int qi = 0; qi < N_Q; qi++) begin
        int v;
        v = next_node(qi);
        expanded[qi][v] = 1;
        hop(qi, v, misses);
      end
      if (r % 3 == 2) begin
        // prefetch the closest node of every query, then search those nodes
        int m0, p0;
        m0 = n_t_miss + n_d_miss; p0 = n_pref;
        c = '0; c.op = OP_PREFETCH;
        send(c);
        repeat (2) @(negedge clk);
        pf_misses = n_t_miss + n_d_miss - m0;
        check(n_pref - p0 == 2 * N_Q, $sformatf("prefetches %0d exp %0d", n_pref - p0, 2 * N_Q));
        for (int qi = 0; qi < N_Q; qi++) begin
          int v;
          v = int'(rq_id[qi][0]);
          expanded[qi][v] = 1;
          hop(qi, v, misses);
          if (misses == 0 && pf_misses > 0) n_pf_hit++;
        end
      end
    end
    for (int s = 0; s < 2; s++) begin
      int bad;
      bad = (s == 0) ? g_mem[0].mem.bad_reqs : g_mem[1].mem.bad_reqs;
      check(bad == 0, $sformatf("sub-channel %0d: %0d reads of empty lines", s, bad));
    end
    $display("events: lnc_t hit=%0d miss=%0d lnc_d hit=%0d miss=%0d exit=%0d accept=%0d prefetch=%0d prefetch_hit=%0d overflow=%0d",
             n_t_hit, n_t_miss, n_d_hit, n_d_miss, n_exit, n_accept, n_pref, n_pf_hit, n_ovf);
    check(n_t_hit  > 0, "no LNC-T hit");
    check(n_t_miss > 0, "no LNC-T miss");
    check(n_d_hit  > 0, "no LNC-D hit");
    check(n_d_miss > 0, "no LNC-D miss");
    check(n_exit   > 0, "no early exit");
    check(n_accept > 0, "no accept");
    check(n_pref   > 0, "no prefetch");
    check(n_pf_hit > 0, "no search served from prefetched cache lines");
    check(n_ovf    > 0, "no queue overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
