// controller: rank controller of the near-memory ANNS logic.
//
// The controller is the rank's interface to the host and the scheduler of its
// two sub-channels. It decodes host commands:
//   OP_WR_QUERY  writes one query element into path `path` of both VPEs'
//                query buffers (each VPE serves its own sub-channel's vectors
//                for the same query);
//   OP_WR_FEE    writes the FEE factor alpha_k/beta_k of step k into both VPEs;
//   OP_SEARCH    starts a hop: both sub-channels traverse their local part of
//                node `node`'s neighbor list for query `qid` (query elements
//                at base `addr`, threshold `data`);
//   OP_PREFETCH  both sub-channels prefetch the neighbor lists of the closest
//                node of every query in the shared priority queue;
//   OP_PQ_CLEAR  empties the shared priority queue.
// A command is taken when cmd_valid and cmd_ready are both high; cmd_ready is
// low while a sub-channel is still busy with a hop or a prefetch. Each
// sub-channel is sequenced by its own subch_ctrl. Results of the two
// sub-channels meet at the shared priority queue; when both push in the same
// cycle, sub-channel 0 goes first. The query-buffer and FEE write ports carry
// the command's path, address and data fields straight through; only their
// enables are decoded.
//
// Following the paper: one controller per rank driving both sub-channels'
// LNC and VPE, neighbor-list lookup and distance computation offloaded from
// the host, results merged in one queue, prefetch between hops. The command
// set and its encoding are this design's own; the paper gives none.
module controller
  import naszip_pkg::*;
#(
  parameter int unsigned QB_DEPTH  = 4096,
  parameter int unsigned MAX_STEPS = 128,
  parameter int unsigned BATCH     = 16,
  parameter int unsigned D_SETS    = 512
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  cfg_t                                  cfg,
  // host commands
  input  logic                                  cmd_valid,
  input  host_cmd_t                             cmd,
  output logic                                  cmd_ready,
  // writes into the VPEs
  output logic                                  qb_wr_en,
  output logic [1:0]                            qb_wr_path,
  output logic [$clog2(QB_DEPTH)-1:0]           qb_wr_addr,
  output fp32_t                                 qb_wr_data,
  output logic                                  fee_wr_en,
  output logic [$clog2(MAX_STEPS)-1:0]          fee_wr_step,
  output fp32_t                                 fee_wr_data,
  // shared priority queue
  output logic                                  pq_clr,
  output logic                                  pq_ins_valid,
  output logic [$clog2(BATCH)-1:0]              pq_ins_qid,
  output logic [ID_W-1:0]                       pq_ins_id,
  output fp32_t                                 pq_ins_dist,
  input  logic [BATCH-1:0]                      pq_head_valid,
  input  logic [BATCH-1:0][ID_W-1:0]            pq_head_id,
  // per sub-channel: LNC-T
  output logic [N_SUBCH-1:0][ID_W-1:0]          t_lk_id,
  input  logic [N_SUBCH-1:0]                    t_lk_hit,
  input  logic [N_SUBCH-1:0][31:0]              t_lk_entry,
  input  logic [N_SUBCH-1:0][LINE_BITS-1:0]     t_lk_line,
  output logic [N_SUBCH-1:0]                    t_fill_valid,
  output logic [N_SUBCH-1:0][ID_W-1:0]          t_fill_id,
  output logic [N_SUBCH-1:0][LINE_BITS-1:0]     t_fill_line,
  // per sub-channel: LNC-D
  output logic [N_SUBCH-1:0]                    d_lk_valid,
  output logic [N_SUBCH-1:0][$clog2(D_SETS)-1:0] d_lk_set,
  output logic [N_SUBCH-1:0][ID_W-1:0]          d_lk_id,
  input  logic [N_SUBCH-1:0]                    d_rsp_valid,
  input  logic [N_SUBCH-1:0]                    d_rsp_hit,
  input  logic [N_SUBCH-1:0][LINE_BITS-1:0]     d_rsp_line,
  output logic [N_SUBCH-1:0]                    d_fill_valid,
  output logic [N_SUBCH-1:0][$clog2(D_SETS)-1:0] d_fill_set,
  output logic [N_SUBCH-1:0][ID_W-1:0]          d_fill_start,
  output logic [N_SUBCH-1:0][ID_W-1:0]          d_fill_end,
  output logic [N_SUBCH-1:0][LINE_BITS-1:0]     d_fill_line,
  // per sub-channel: memory
  output logic [N_SUBCH-1:0]                    mem_req_valid,
  output logic [N_SUBCH-1:0][31:0]              mem_req_addr,
  input  logic [N_SUBCH-1:0]                    mem_req_ready,
  input  logic [N_SUBCH-1:0]                    mem_rsp_valid,
  input  logic [N_SUBCH-1:0][N_DEV*DEV_BITS-1:0] mem_rsp_data,
  // per sub-channel: VPE
  output logic [N_SUBCH-1:0]                    vec_start,
  output logic [N_SUBCH-1:0][31:0]              vec_thr,
  output logic [N_SUBCH-1:0][$clog2(QB_DEPTH)-1:0] vec_qbase,
  output logic [N_SUBCH-1:0]                    vec_beat_valid,
  input  logic [N_SUBCH-1:0]                    step_valid,
  input  logic [N_SUBCH-1:0]                    step_exit,
  input  logic [N_SUBCH-1:0]                    step_last,
  input  logic [N_SUBCH-1:0][31:0]              step_dist,
  // events, per sub-channel one-cycle pulses
  output logic [N_SUBCH-1:0]                    ev_t_hit,
  output logic [N_SUBCH-1:0]                    ev_t_miss,
  output logic [N_SUBCH-1:0]                    ev_d_hit,
  output logic [N_SUBCH-1:0]                    ev_d_miss,
  output logic [N_SUBCH-1:0]                    ev_exit,
  output logic [N_SUBCH-1:0]                    ev_accept,
  output logic [N_SUBCH-1:0]                    ev_prefetch
);
  logic [N_SUBCH-1:0] busy, push_valid, push_ready;
  logic [N_SUBCH-1:0][$clog2(BATCH)-1:0] push_qid;
  logic [N_SUBCH-1:0][ID_W-1:0]          push_id;
  logic [N_SUBCH-1:0][31:0]              push_dist;
  logic take;

  assign cmd_ready = ~|busy;
  assign take      = cmd_valid && cmd_ready;

  assign qb_wr_en    = take && cmd.op == OP_WR_QUERY;
  assign qb_wr_path  = cmd.path;
  assign qb_wr_addr  = cmd.addr[$clog2(QB_DEPTH)-1:0];
  assign qb_wr_data  = cmd.data;
  assign fee_wr_en   = take && cmd.op == OP_WR_FEE;
  assign fee_wr_step = cmd.addr[$clog2(MAX_STEPS)-1:0];
  assign fee_wr_data = cmd.data;
  assign pq_clr      = take && cmd.op == OP_PQ_CLEAR;

  for (genvar s = 0; s < N_SUBCH; s++) begin : g_sc
    subch_ctrl #(.SC(s), .QB_DEPTH(QB_DEPTH), .BATCH(BATCH), .D_SETS(D_SETS)) u_seq (
      .clk, .rst_n, .cfg,
      .start_search   (take && cmd.op == OP_SEARCH),
      .start_prefetch (take && cmd.op == OP_PREFETCH),
      .cmd_node       (cmd.node),
      .cmd_qid        (cmd.qid[$clog2(BATCH)-1:0]),
      .cmd_qbase      (cmd.addr[$clog2(QB_DEPTH)-1:0]),
      .cmd_thr        (cmd.data),
      .busy           (busy[s]),
      .head_valid     (pq_head_valid),
      .head_id        (pq_head_id),
      .t_lk_id        (t_lk_id[s]),
      .t_lk_hit       (t_lk_hit[s]),
      .t_lk_entry     (nlt_entry_t'(t_lk_entry[s])),
      .t_lk_line      (t_lk_line[s]),
      .t_fill_valid   (t_fill_valid[s]),
      .t_fill_id      (t_fill_id[s]),
      .t_fill_line    (t_fill_line[s]),
      .d_lk_valid     (d_lk_valid[s]),
      .d_lk_set       (d_lk_set[s]),
      .d_lk_id        (d_lk_id[s]),
      .d_rsp_valid    (d_rsp_valid[s]),
      .d_rsp_hit      (d_rsp_hit[s]),
      .d_rsp_line     (d_rsp_line[s]),
      .d_fill_valid   (d_fill_valid[s]),
      .d_fill_set     (d_fill_set[s]),
      .d_fill_start   (d_fill_start[s]),
      .d_fill_end     (d_fill_end[s]),
      .d_fill_line    (d_fill_line[s]),
      .mem_req_valid  (mem_req_valid[s]),
      .mem_req_addr   (mem_req_addr[s]),
      .mem_req_ready  (mem_req_ready[s]),
      .mem_rsp_valid  (mem_rsp_valid[s]),
      .mem_rsp_data   (mem_rsp_data[s]),
      .vec_start      (vec_start[s]),
      .vec_thr        (vec_thr[s]),
      .vec_qbase      (vec_qbase[s]),
      .vec_beat_valid (vec_beat_valid[s]),
      .step_valid     (step_valid[s]),
      .step_exit      (step_exit[s]),
      .step_last      (step_last[s]),
      .step_dist      (step_dist[s]),
      .push_valid     (push_valid[s]),
      .push_qid       (push_qid[s]),
      .push_id        (push_id[s]),
      .push_dist      (push_dist[s]),
      .push_ready     (push_ready[s]),
      .ev_t_hit       (ev_t_hit[s]),
      .ev_t_miss      (ev_t_miss[s]),
      .ev_d_hit       (ev_d_hit[s]),
      .ev_d_miss      (ev_d_miss[s]),
      .ev_exit        (ev_exit[s]),
      .ev_accept      (ev_accept[s]),
      .ev_prefetch    (ev_prefetch[s])
    );
  end

  // Fixed-priority merge into the shared queue: lowest sub-channel first.
  always_comb begin
    push_ready   = '0;
    pq_ins_valid = 1'b0;
    pq_ins_qid   = '0;
    pq_ins_id    = '0;
    pq_ins_dist  = FP_ZERO;
    for (int s = N_SUBCH - 1; s >= 0; s--) begin
      if (push_valid[s]) begin
        push_ready   = '0;
        push_ready[s] = 1'b1;
        pq_ins_valid = 1'b1;
        pq_ins_qid   = push_qid[s];
        pq_ins_id    = push_id[s];
        pq_ins_dist  = push_dist[s];
      end
    end
  end

endmodule
