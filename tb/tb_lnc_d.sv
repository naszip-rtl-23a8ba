// tb_lnc_d: self-checking test of the neighbor-list cache (LNC-D).
// Lines are filled into a few sets, more than the 8 ways hold, each tagged
// with a node range (start ID, end ID) that does not overlap the others of
// its set. A reference model of the sets with round-robin replacement
// predicts every lookup: a hit when a line of the addressed set covers the
// node ID, with that line's data two cycles after the request; a miss
// otherwise. It also checks that a node just outside a cached range misses.
module tb_lnc_d;
  import naszip_pkg::*;
  localparam int WAYS = 8;
  logic clk = 0, rst_n = 0;
  logic lk_valid = 0, fill_valid = 0, rsp_valid, rsp_hit;
  logic [8:0] lk_set = 0, fill_set = 0;
  logic [31:0] lk_id = 0, fill_start = 0, fill_end = 0;
  logic [511:0] rsp_line, fill_line = 0;
  int checks = 0, failures = 0, hits = 0, misses = 0;
  // reference: 16 sets used, by set index 0..15 -> real set 37*i
  logic         rv  [16][WAYS];
  logic [31:0]  rs  [16][WAYS], re [16][WAYS];
  logic [511:0] rl  [16][WAYS];
  int           rp  [16];
  int           nfill [16];

  lnc_d dut (.*);

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

  task automatic lookup(input int si, input logic [31:0] id);
    int w;
    w = -1;
    for (int i = 0; i < WAYS; i++) if (rv[si][i] && rs[si][i] <= id && id <= re[si][i]) w = i;
    @(negedge clk);
    lk_valid = 1; lk_set = 9'(si * 37); lk_id = id;
    @(negedge clk);
    lk_valid = 0;
    check(rsp_valid === 1'b0, "no response after one cycle");
    @(negedge clk);
    check(rsp_valid === 1'b1, "response after two cycles");
    check(rsp_hit === (w >= 0), $sformatf("set %0d id %0d hit %0d exp %0d", si, id, rsp_hit, w >= 0));
    if (w >= 0) begin hits++; check(rsp_line === rl[si][w], "line data"); end
    else misses++;
  endtask

  task automatic fill(input int si);
    logic [31:0] s, e;
    s = 32'(si * 100000 + nfill[si] * 20);      // disjoint ranges per set
    e = s + 32'($urandom_range(0, 15));
    nfill[si]++;
    @(negedge clk);
    fill_valid = 1; fill_set = 9'(si * 37); fill_start = s; fill_end = e;
    for (int i = 0; i < 16; i++) fill_line[i*32 +: 32] = $urandom;
    rv[si][rp[si]] = 1; rs[si][rp[si]] = s; re[si][rp[si]] = e; rl[si][rp[si]] = fill_line;
    rp[si] = (rp[si] + 1) % WAYS;
    @(negedge clk);
    fill_valid = 0;
  endtask

  initial begin
    for (int i = 0; i < 16; i++) begin
      rp[i] = 0; nfill[i] = 0;
      for (int w = 0; w < WAYS; w++) rv[i][w] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      int si;
      si = $urandom_range(0, 15);
      if ($urandom_range(0, 2) == 0) fill(si);
      else if (nfill[si] > 0) begin
        int n;
        logic [31:0] id;
        // recent range of this set, sometimes just outside it
        n  = nfill[si] - 1 - $urandom_range(0, (nfill[si] > 10 ? 10 : nfill[si] - 1));
        id = 32'(si * 100000 + n * 20 + $urandom_range(0, 17));
        lookup(si, id);
      end else lookup(si, 32'(si * 100000));
    end
    check(hits > 100 && misses > 100, $sformatf("hits %0d misses %0d", hits, misses));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
