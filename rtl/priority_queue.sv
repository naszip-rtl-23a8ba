// priority_queue: shared priority queue of a rank.
//
// Both VPEs of a rank push the vectors they accept (node ID and distance)
// into this queue, which keeps, for every query of the batch, the closest
// results found so far in ascending order of distance. Only these top
// candidates travel to the host, which merges the queues of all ranks into
// its global queue. The head of each query's list (its closest node) is also
// what the sub-channels prefetch neighbor lists for between hops.
//
// An insert finds its position as the number of stored entries whose distance
// is not larger, shifts the farther entries down by one and writes the new
// one; when the list is full the farthest entry falls out, and a result that
// is not closer than a full list's last entry is dropped (overflow).
//
// Following the paper: a queue shared by the two VPEs that merges and sorts
// their results per query and is read by the host. This design's choices:
// 16 queries (the batch size the paper evaluates) x 16 entries, one insert
// per cycle, registers rather than SRAM, ties keep arrival order.
//
// Timing: an insert is written at the clock edge; overflow pulses one cycle
// later. Reads (rd_qid, rd_idx) and the per-query heads are combinational.
module priority_queue
  import naszip_pkg::*;
#(
  parameter int unsigned BATCH  = 16,
  parameter int unsigned QDEPTH = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clr,
  input  logic                          ins_valid,
  input  logic [$clog2(BATCH)-1:0]      ins_qid,
  input  logic [ID_W-1:0]               ins_id,
  input  fp32_t                         ins_dist,
  output logic                          overflow,
  input  logic [$clog2(BATCH)-1:0]      rd_qid,
  input  logic [$clog2(QDEPTH)-1:0]     rd_idx,
  output logic [ID_W-1:0]               rd_id,
  output fp32_t                         rd_dist,
  output logic [$clog2(QDEPTH+1)-1:0]   rd_count,
  output logic [BATCH-1:0]              head_valid,
  output logic [BATCH-1:0][ID_W-1:0]    head_id
);
  localparam int unsigned CW = $clog2(QDEPTH + 1);

  logic [ID_W-1:0] ids   [BATCH][QDEPTH];
  fp32_t           dists [BATCH][QDEPTH];
  logic [CW-1:0]   cnt   [BATCH];

  // Position of the new entry within its query's list.
  logic [CW-1:0] pos;
  always_comb begin
    pos = '0;
    for (int j = 0; j < QDEPTH; j++)
      if (CW'(j) < cnt[ins_qid] && !fp_lt(ins_dist, dists[ins_qid][j])) pos = CW'(j + 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int q = 0; q < BATCH; q++) cnt[q] <= '0;
      overflow <= 1'b0;
    end else begin
      overflow <= 1'b0;
      if (clr) begin
        for (int q = 0; q < BATCH; q++) cnt[q] <= '0;
      end else if (ins_valid) begin
        if (pos >= CW'(QDEPTH)) overflow <= 1'b1;
        else begin
          if (cnt[ins_qid] < CW'(QDEPTH)) cnt[ins_qid] <= cnt[ins_qid] + CW'(1);
          else                            overflow <= 1'b1;   // farthest falls out
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!clr && ins_valid && pos < CW'(QDEPTH)) begin
      for (int j = QDEPTH - 1; j > 0; j--) begin
        if (CW'(j) > pos) begin
          ids[ins_qid][j]   <= ids[ins_qid][j-1];
          dists[ins_qid][j] <= dists[ins_qid][j-1];
        end
      end
      ids[ins_qid][pos[$clog2(QDEPTH)-1:0]]   <= ins_id;
      dists[ins_qid][pos[$clog2(QDEPTH)-1:0]] <= ins_dist;
    end
  end

  assign rd_id    = ids[rd_qid][rd_idx];
  assign rd_dist  = dists[rd_qid][rd_idx];
  assign rd_count = cnt[rd_qid];

  for (genvar q = 0; q < BATCH; q++) begin : g_head
    assign head_valid[q] = (cnt[q] != '0);
    assign head_id[q]    = ids[q][0];
  end

endmodule
