// naszip_rank: near-memory ANNS logic of one DDR5 rank (top level).
//
// A rank has two sub-channels of four x8 DRAM devices. Next to each
// sub-channel sit a vector processing engine (VPE), which computes distances
// with early exit over Dfloat-compressed vectors, and a local neighbor cache
// (LNC) made of LNC-T (cached neighbor list table lines) and LNC-D (cached
// neighbor lists). The controller takes host commands and sequences both
// sub-channels; accepted results of the two VPEs are merged and sorted in a
// shared priority queue that the host reads out after every hop.
//
// Because each node's vector and its neighbor list partition live in the same
// sub-channel, a hop on node v runs in both sub-channels at once, each on
// the neighbors it stores, without data crossing between sub-channels.
//
// Ports: cfg holds the host-written configuration (metric, Dfloat segments,
// accesses per vector, table and data base addresses). cmd_valid/cmd/cmd_ready
// carry host commands (see controller). Each sub-channel has a read port to
// its DRAM devices: a request (mem_req_valid/addr/ready, address in 64-byte
// access units) is answered by 16 beats of 32 bits on mem_rsp_valid/data,
// byte p of a beat from device p. The DRAM command/PHY side of the data
// buffer chip is outside this module. The host reads the shared queue with
// pq_rd_qid/pq_rd_idx. ev_* are one-cycle event pulses per sub-channel.
//
// Following the paper: per sub-channel VPE and LNC, one controller, one
// shared priority queue per rank. The port protocol is this design's own.
module naszip_rank
  import naszip_pkg::*;
#(
  parameter int unsigned QB_DEPTH     = 4096,
  parameter int unsigned MAX_STEPS    = 128,
  parameter int unsigned BATCH        = 16,
  parameter int unsigned QDEPTH       = 16,
  parameter int unsigned LNCT_BYTES   = 8192,
  parameter int unsigned LNCD_BYTES   = 262144,
  parameter int unsigned LNCD_WAYS    = 8
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  cfg_t                                   cfg,
  input  logic                                   cmd_valid,
  input  host_cmd_t                              cmd,
  output logic                                   cmd_ready,
  // DRAM read ports, one per sub-channel
  output logic [N_SUBCH-1:0]                     mem_req_valid,
  output logic [N_SUBCH-1:0][31:0]               mem_req_addr,
  input  logic [N_SUBCH-1:0]                     mem_req_ready,
  input  logic [N_SUBCH-1:0]                     mem_rsp_valid,
  input  logic [N_SUBCH-1:0][N_DEV*DEV_BITS-1:0] mem_rsp_data,
  // host read of the shared priority queue
  input  logic [$clog2(BATCH)-1:0]               pq_rd_qid,
  input  logic [$clog2(QDEPTH)-1:0]              pq_rd_idx,
  output logic [ID_W-1:0]                        pq_rd_id,
  output fp32_t                                  pq_rd_dist,
  output logic [$clog2(QDEPTH+1)-1:0]            pq_rd_count,
  output logic                                   pq_overflow,
  // events
  output logic [N_SUBCH-1:0]                     ev_t_hit,
  output logic [N_SUBCH-1:0]                     ev_t_miss,
  output logic [N_SUBCH-1:0]                     ev_d_hit,
  output logic [N_SUBCH-1:0]                     ev_d_miss,
  output logic [N_SUBCH-1:0]                     ev_exit,
  output logic [N_SUBCH-1:0]                     ev_accept,
  output logic [N_SUBCH-1:0]                     ev_prefetch
);
  localparam int unsigned D_SETS = LNCD_BYTES / 64 / LNCD_WAYS;

  logic                                  qb_wr_en, fee_wr_en;
  logic [1:0]                            qb_wr_path;
  logic [$clog2(QB_DEPTH)-1:0]           qb_wr_addr;
  fp32_t                                 qb_wr_data, fee_wr_data;
  logic [$clog2(MAX_STEPS)-1:0]          fee_wr_step;
  logic                                  pq_clr, pq_ins_valid;
  logic [$clog2(BATCH)-1:0]              pq_ins_qid;
  logic [ID_W-1:0]                       pq_ins_id;
  fp32_t                                 pq_ins_dist;
  logic [BATCH-1:0]                      pq_head_valid;
  logic [BATCH-1:0][ID_W-1:0]            pq_head_id;

  logic [N_SUBCH-1:0][ID_W-1:0]          t_lk_id, t_fill_id;
  logic [N_SUBCH-1:0]                    t_lk_hit, t_fill_valid;
  logic [N_SUBCH-1:0][31:0]              t_lk_entry;
  logic [N_SUBCH-1:0][LINE_BITS-1:0]     t_lk_line, t_fill_line;
  logic [N_SUBCH-1:0]                    d_lk_valid, d_rsp_valid, d_rsp_hit, d_fill_valid;
  logic [N_SUBCH-1:0][$clog2(D_SETS)-1:0] d_lk_set, d_fill_set;
  logic [N_SUBCH-1:0][ID_W-1:0]          d_lk_id, d_fill_start, d_fill_end;
  logic [N_SUBCH-1:0][LINE_BITS-1:0]     d_rsp_line, d_fill_line;
  logic [N_SUBCH-1:0]                    vec_start, vec_beat_valid;
  logic [N_SUBCH-1:0][31:0]              vec_thr, step_dist;
  logic [N_SUBCH-1:0][$clog2(QB_DEPTH)-1:0] vec_qbase;
  logic [N_SUBCH-1:0]                    step_valid, step_exit, step_last;

  controller #(.QB_DEPTH(QB_DEPTH), .MAX_STEPS(MAX_STEPS), .BATCH(BATCH), .D_SETS(D_SETS)) u_ctrl (
    .clk, .rst_n, .cfg, .cmd_valid, .cmd, .cmd_ready,
    .qb_wr_en, .qb_wr_path, .qb_wr_addr, .qb_wr_data,
    .fee_wr_en, .fee_wr_step, .fee_wr_data,
    .pq_clr, .pq_ins_valid, .pq_ins_qid, .pq_ins_id, .pq_ins_dist,
    .pq_head_valid, .pq_head_id,
    .t_lk_id, .t_lk_hit, .t_lk_entry, .t_lk_line, .t_fill_valid, .t_fill_id, .t_fill_line,
    .d_lk_valid, .d_lk_set, .d_lk_id, .d_rsp_valid, .d_rsp_hit, .d_rsp_line,
    .d_fill_valid, .d_fill_set, .d_fill_start, .d_fill_end, .d_fill_line,
    .mem_req_valid, .mem_req_addr, .mem_req_ready, .mem_rsp_valid, .mem_rsp_data,
    .vec_start, .vec_thr, .vec_qbase, .vec_beat_valid,
    .step_valid, .step_exit, .step_last, .step_dist,
    .ev_t_hit, .ev_t_miss, .ev_d_hit, .ev_d_miss, .ev_exit, .ev_accept, .ev_prefetch
  );

  for (genvar s = 0; s < N_SUBCH; s++) begin : g_sc
    nlt_entry_t t_entry;
    assign t_lk_entry[s] = t_entry;

    lnc_t #(.SIZE_BYTES(LNCT_BYTES)) u_lnc_t (
      .clk, .rst_n,
      .lk_id      (t_lk_id[s]),
      .lk_hit     (t_lk_hit[s]),
      .lk_entry   (t_entry),
      .lk_line    (t_lk_line[s]),
      .fill_valid (t_fill_valid[s]),
      .fill_id    (t_fill_id[s]),
      .fill_line  (t_fill_line[s])
    );

    lnc_d #(.SIZE_BYTES(LNCD_BYTES), .WAYS(LNCD_WAYS)) u_lnc_d (
      .clk, .rst_n,
      .lk_valid   (d_lk_valid[s]),
      .lk_set     (d_lk_set[s]),
      .lk_id      (d_lk_id[s]),
      .rsp_valid  (d_rsp_valid[s]),
      .rsp_hit    (d_rsp_hit[s]),
      .rsp_line   (d_rsp_line[s]),
      .fill_valid (d_fill_valid[s]),
      .fill_set   (d_fill_set[s]),
      .fill_start (d_fill_start[s]),
      .fill_end   (d_fill_end[s]),
      .fill_line  (d_fill_line[s])
    );

    vpe #(.QB_DEPTH(QB_DEPTH), .MAX_STEPS(MAX_STEPS)) u_vpe (
      .clk, .rst_n,
      .mode        (cfg.mode),
      .segs        (cfg.seg),
      .n_access    (cfg.n_access),
      .qb_wr_en    (qb_wr_en),
      .qb_wr_path  (qb_wr_path),
      .qb_wr_addr  (qb_wr_addr),
      .qb_wr_data  (qb_wr_data),
      .fee_wr_en   (fee_wr_en),
      .fee_wr_step (fee_wr_step),
      .fee_wr_data (fee_wr_data),
      .vec_start   (vec_start[s]),
      .thr         (vec_thr[s]),
      .q_base      (vec_qbase[s]),
      .beat_valid  (vec_beat_valid[s]),
      .beat_data   (mem_rsp_data[s]),
      .step_valid  (step_valid[s]),
      .step_exit   (step_exit[s]),
      .step_last   (step_last[s]),
      .distance    (step_dist[s])
    );
  end

  priority_queue #(.BATCH(BATCH), .QDEPTH(QDEPTH)) u_pq (
    .clk, .rst_n,
    .clr        (pq_clr),
    .ins_valid  (pq_ins_valid),
    .ins_qid    (pq_ins_qid),
    .ins_id     (pq_ins_id),
    .ins_dist   (pq_ins_dist),
    .overflow   (pq_overflow),
    .rd_qid     (pq_rd_qid),
    .rd_idx     (pq_rd_idx),
    .rd_id      (pq_rd_id),
    .rd_dist    (pq_rd_dist),
    .rd_count   (pq_rd_count),
    .head_valid (pq_head_valid),
    .head_id    (pq_head_id)
  );

endmodule
