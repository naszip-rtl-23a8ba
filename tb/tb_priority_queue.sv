// tb_priority_queue: self-checking test of the shared priority queue.
// Random results (query, node ID, FP32 distance) are inserted one per cycle
// and the same inserts are applied to a reference list per query, kept
// ascending with ties in arrival order and cut at QDEPTH entries. After every
// insert the test checks the overflow pulse (a result was dropped or pushed
// the farthest out), every query's head and, from time to time, the full
// content of one query's list through the read port. Clear is exercised in the
// middle and at the end. Distances come from a small set of values so that
// ties occur; some are negative (inner-product mode).
module tb_priority_queue;
  import naszip_pkg::*;
  localparam int BATCH = 16, QDEPTH = 16;
  logic clk = 0, rst_n = 0, clr = 0, ins_valid = 0, overflow;
  logic [3:0]  ins_qid = 0, rd_qid = 0, rd_idx = 0;
  logic [31:0] ins_id = 0, ins_dist = 0, rd_id, rd_dist;
  logic [4:0]  rd_count;
  logic [BATCH-1:0] head_valid;
  logic [BATCH-1:0][31:0] head_id;
  int checks = 0, failures = 0, n_ovf = 0;
  logic [31:0] r_id [BATCH][$], r_d [BATCH][$];

  priority_queue dut (.*);

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

  function automatic logic [31:0] rand_dist();
    logic [31:0] v;
    v = {1'b0, 8'(120 + $urandom_range(0, 15)), 23'($urandom_range(0, 3)) << 20};
    if ($urandom_range(0, 9) == 0) v[31] = 1'b1;
    return v;
  endfunction

  task automatic ref_insert(input int q, input logic [31:0] id, input logic [31:0] d, output logic ovf);
    int p;
    p = 0;
    for (int j = 0; j < r_d[q].size(); j++) if (!fp_lt(d, r_d[q][j])) p = j + 1;
    ovf = 0;
    if (p >= QDEPTH) ovf = 1;
    else begin
      r_id[q].insert(p, id); r_d[q].insert(p, d);
      if (r_d[q].size() > QDEPTH) begin
        void'(r_id[q].pop_back()); void'(r_d[q].pop_back()); ovf = 1;
      end
    end
  endtask

  task automatic check_heads();
    for (int q = 0; q < BATCH; q++) begin
      check(head_valid[q] === (r_d[q].size() > 0), $sformatf("head_valid %0d", q));
      if (r_d[q].size() > 0) check(head_id[q] === r_id[q][0], $sformatf("head_id %0d", q));
    end
  endtask

  task automatic check_list(input int q);
    rd_qid = 4'(q);
    #1;
    check(rd_count === 5'(r_d[q].size()), $sformatf("count q%0d %0d exp %0d", q, rd_count, r_d[q].size()));
    for (int j = 0; j < r_d[q].size(); j++) begin
      rd_idx = 4'(j);
      #1;
      check(rd_id === r_id[q][j] && rd_dist === r_d[q][j], $sformatf("entry q%0d[%0d]", q, j));
    end
    @(negedge clk);   // back in step with the drive edge
  endtask

  task automatic do_clear();
    @(negedge clk);
    clr = 1;
    @(negedge clk);
    clr = 0;
    for (int q = 0; q < BATCH; q++) begin r_id[q].delete(); r_d[q].delete(); end
    check_heads();
  endtask

  initial begin
    logic ovf;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check_heads();
    for (int it = 0; it < 3000; it++) begin
      int q;
      if (it == 1500) do_clear();
      q = (it < 1500) ? $urandom_range(0, 3) : $urandom_range(0, BATCH - 1);
      ins_valid = 1; ins_qid = 4'(q); ins_id = $urandom; ins_dist = rand_dist();
      ref_insert(q, ins_id, ins_dist, ovf);
      @(negedge clk);
      ins_valid = 0;
      check(overflow === ovf, $sformatf("overflow %0d exp %0d", overflow, ovf));
      if (ovf) n_ovf++;
      check_heads();
      if ($urandom_range(0, 7) == 0) check_list($urandom_range(0, BATCH - 1));
    end
    for (int q = 0; q < BATCH; q++) check_list(q);
    check(n_ovf > 50, $sformatf("overflows seen %0d", n_ovf));
    do_clear();
    check_list(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
