// tb_lnc_t: self-checking test of the NLT cache (LNC-T).
// Lines of 16 random NLT entries are filled for random node groups, more of
// them than the 128 lines the 8 KB cache holds, so that round-robin
// replacement evicts. A reference model (the last 128 distinct fills in
// order) predicts hit or miss for every lookup of a random node, and on a hit
// the returned entry (3-byte address, 1-byte length) and line must match.
module tb_lnc_t;
  import naszip_pkg::*;
  localparam int NL = 128;
  logic clk = 0, rst_n = 0;
  logic [31:0] lk_id = 0, fill_id = 0;
  logic lk_hit, fill_valid = 0;
  nlt_entry_t lk_entry;
  logic [511:0] lk_line, fill_line = 0;
  logic [27:0]  ref_tag  [NL];
  logic [511:0] ref_line [NL];
  logic         ref_v    [NL];
  int ptr = 0, checks = 0, failures = 0, hits = 0, misses = 0;

  lnc_t dut (.*);

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

  function automatic int find(input logic [27:0] tag);
    for (int i = 0; i < NL; i++) if (ref_v[i] && ref_tag[i] == tag) return i;
    return -1;
  endfunction

  initial begin
    int idx;
    for (int i = 0; i < NL; i++) ref_v[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      lk_id = 32'($urandom_range(0, 400 * 16 - 1));
      #1;
      idx = find(lk_id[31:4]);
      check(lk_hit === (idx >= 0), $sformatf("hit id %0d got %0d exp %0d", lk_id, lk_hit, idx >= 0));
      if (idx >= 0) begin
        hits++;
        check(lk_entry === nlt_entry_t'(ref_line[idx][lk_id[3:0]*32 +: 32]), "entry");
        check(lk_line === ref_line[idx], "line");
      end else begin
        misses++;
        // fill on a miss, like the controller
        @(negedge clk);
        fill_valid = 1; fill_id = lk_id;
        for (int w = 0; w < 16; w++) fill_line[w*32 +: 32] = $urandom;
        @(negedge clk);
        fill_valid = 0;
        ref_v[ptr] = 1; ref_tag[ptr] = lk_id[31:4]; ref_line[ptr] = fill_line;
        ptr = (ptr + 1) % NL;
        #1;
        check(lk_hit === 1'b1 && lk_line === fill_line, "hit right after fill");
      end
      @(negedge clk);
    end
    check(hits > 200 && misses > NL, $sformatf("hits %0d misses %0d", hits, misses));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
