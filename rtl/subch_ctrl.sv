// subch_ctrl: the controller's sequencer for one sub-channel.
//
// For a search hop on node v the sequencer
//   1. looks up v's neighbor list table (NLT) entry in LNC-T; on a miss it
//      reads the NLT line (16 entries) from memory and fills LNC-T;
//   2. if the entry's length is not zero, looks up the neighbor list in LNC-D;
//      on a miss it reads the 64-byte line holding the list and fills LNC-D,
//      tagging the line with the first and last node of v's NLT line whose
//      lists lie entirely inside it;
//   3. for every neighbor ID of the list, starts the VPE and reads the vector
//      access by access (one access = one burst from each of the 4 devices),
//      stopping as soon as the VPE signals an early exit;
//   4. pushes each accepted neighbor (full distance not above the threshold)
//      into the shared priority queue.
// For a prefetch it walks the queries of the batch and, for each query whose
// queue is not empty, does steps 1 and 2 for the query's closest node, which
// leaves that node's NLT line and neighbor list in the caches for the next hop.
//
// Following the paper: NLT entries of 3-byte address and 1-byte length; NLT
// and neighbor list co-located with the vectors in the sub-channel (DaM);
// LNC-T then LNC-D lookup with fills on misses; per-neighbor vector fetch and
// distance with early exit; prefetch of the closest node's neighbor list per
// query between hops. This design's choices: one memory request outstanding
// at a time, 16 beats per response; NLT line of node v at nlt_base + v/16;
// the neighbor list of a node is at nbr_base + addr/64 and does not cross a
// 64-byte line; the lists of a sub-channel are stored in node order; vector
// v's access k is at vec_base + (v - id_base) * n_access + k; line byte
// 16p + t arrives on beat t from device p.
module subch_ctrl
  import naszip_pkg::*;
#(
  parameter int unsigned SC       = 0,
  parameter int unsigned QB_DEPTH = 4096,
  parameter int unsigned BATCH    = 16,
  parameter int unsigned D_SETS   = 512
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  cfg_t                        cfg,
  // commands
  input  logic                        start_search,
  input  logic                        start_prefetch,
  input  logic [ID_W-1:0]             cmd_node,
  input  logic [$clog2(BATCH)-1:0]    cmd_qid,
  input  logic [$clog2(QB_DEPTH)-1:0] cmd_qbase,
  input  fp32_t                       cmd_thr,
  output logic                        busy,
  // heads of the shared priority queue
  input  logic [BATCH-1:0]            head_valid,
  input  logic [BATCH-1:0][ID_W-1:0]  head_id,
  // LNC-T
  output logic [ID_W-1:0]             t_lk_id,
  input  logic                        t_lk_hit,
  input  nlt_entry_t                  t_lk_entry,
  input  logic [LINE_BITS-1:0]        t_lk_line,
  output logic                        t_fill_valid,
  output logic [ID_W-1:0]             t_fill_id,
  output logic [LINE_BITS-1:0]        t_fill_line,
  // LNC-D
  output logic                        d_lk_valid,
  output logic [$clog2(D_SETS)-1:0]   d_lk_set,
  output logic [ID_W-1:0]             d_lk_id,
  input  logic                        d_rsp_valid,
  input  logic                        d_rsp_hit,
  input  logic [LINE_BITS-1:0]        d_rsp_line,
  output logic                        d_fill_valid,
  output logic [$clog2(D_SETS)-1:0]   d_fill_set,
  output logic [ID_W-1:0]             d_fill_start,
  output logic [ID_W-1:0]             d_fill_end,
  output logic [LINE_BITS-1:0]        d_fill_line,
  // memory (one sub-channel, 4 devices)
  output logic                        mem_req_valid,
  output logic [31:0]                 mem_req_addr,
  input  logic                        mem_req_ready,
  input  logic                        mem_rsp_valid,
  input  logic [N_DEV*DEV_BITS-1:0]   mem_rsp_data,
  // VPE
  output logic                        vec_start,
  output fp32_t                       vec_thr,
  output logic [$clog2(QB_DEPTH)-1:0] vec_qbase,
  output logic                        vec_beat_valid,
  input  logic                        step_valid,
  input  logic                        step_exit,
  input  logic                        step_last,
  input  fp32_t                       step_dist,
  // shared priority queue
  output logic                        push_valid,
  output logic [$clog2(BATCH)-1:0]    push_qid,
  output logic [ID_W-1:0]             push_id,
  output fp32_t                       push_dist,
  input  logic                        push_ready,
  // events, one-cycle pulses
  output logic                        ev_t_hit,
  output logic                        ev_t_miss,
  output logic                        ev_d_hit,
  output logic                        ev_d_miss,
  output logic                        ev_exit,
  output logic                        ev_accept,
  output logic                        ev_prefetch
);
  localparam int unsigned SETW = $clog2(D_SETS);
  localparam int unsigned BW   = $clog2(BATCH);

  typedef enum logic [3:0] {
    S_IDLE, S_PF_NEXT, S_T_LOOK, S_T_REQ, S_T_FETCH, S_T_FILL,
    S_D_WAIT, S_D_REQ, S_D_FETCH, S_NBR, S_V_REQ, S_V_WAIT, S_PUSH
  } state_e;

  state_e                 st;
  logic                   pf_mode;
  logic [BW-1:0]          pf_qid;
  logic [ID_W-1:0]        node;
  logic [BW-1:0]          qid;
  logic [$clog2(QB_DEPTH)-1:0] qbase;
  fp32_t                  thr;
  nlt_entry_t             ent;
  logic [LINE_BITS-1:0]   nlt_line;   // NLT line of the current node
  logic [LINE_BITS-1:0]   buf_line;   // line being assembled from beats
  logic [LINE_BITS-1:0]   nbr_line;   // neighbor-list line
  logic [3:0]             beat;
  logic [4:0]             nbr_len;    // neighbors of this node in this line
  logic [4:0]             j;          // current neighbor
  logic [7:0]             k;          // current access of the vector
  logic [ID_W-1:0]        nid;
  fp32_t                  acc_dist;

  // Neighbor j of the current list.
  logic [3:0] nbr_off;
  assign nbr_off = ent.addr[5:2];
  assign nid     = nbr_line[(4'(nbr_off + j[3:0]))*32 +: 32];

  // Node range of the NLT line whose lists lie inside the fetched line.
  logic [ID_W-1:0] rng_start, rng_end;
  always_comb begin
    nlt_entry_t e;
    logic       first;
    rng_start = node;
    rng_end   = node;
    first     = 1'b1;
    for (int g = 0; g < 16; g++) begin
      e = nlt_entry_t'(nlt_line[g*32 +: 32]);
      if (e.len != 8'd0 && e.addr[23:6] == ent.addr[23:6] &&
          (10'(e.addr[5:2]) + 10'(e.len)) <= 10'd16) begin
        if (first) rng_start = {node[ID_W-1:4], 4'(g)};
        rng_end = {node[ID_W-1:4], 4'(g)};
        first   = 1'b0;
      end
    end
  end

  logic [31:0] vec_addr;
  assign vec_addr = cfg.vec_base[SC] + (node_rel(nid, cfg.id_base[SC]) * 32'(cfg.n_access)) + 32'(k);

  function automatic logic [31:0] node_rel(input logic [ID_W-1:0] id, input logic [31:0] base);
    return 32'(id) - base;
  endfunction

  // Where a node's work ends: back to idle, or on to the next prefetch.
  state_e done_st;
  assign done_st = (pf_mode && pf_qid != '0) ? S_PF_NEXT : S_IDLE;

  // Combinational outputs.
  assign busy           = (st != S_IDLE);
  assign t_lk_id        = node;
  assign d_lk_set       = SETW'(ent.addr[23:6]);
  assign d_lk_id        = node;
  assign vec_thr        = thr;
  assign vec_qbase      = qbase;
  assign vec_beat_valid = (st == S_V_WAIT) && mem_rsp_valid;
  assign push_qid       = qid;
  assign push_id        = nid;
  assign push_dist      = acc_dist;
  assign push_valid     = (st == S_PUSH);
  assign t_fill_id      = node;
  assign t_fill_line    = buf_line;
  assign d_fill_set     = SETW'(ent.addr[23:6]);
  assign d_fill_start   = rng_start;
  assign d_fill_end     = rng_end;
  assign d_fill_line    = buf_line;
  assign mem_req_valid  = (st == S_T_REQ) || (st == S_D_REQ) || (st == S_V_REQ);
  always_comb begin
    unique case (st)
      S_T_REQ: mem_req_addr = cfg.nlt_base + (32'(node) >> 4);
      S_D_REQ: mem_req_addr = cfg.nbr_base + 32'(ent.addr[23:6]);
      default: mem_req_addr = vec_addr;
    endcase
  end

  // Next line from beats: byte 16p + t of the line is byte p of beat t.
  logic [LINE_BITS-1:0] line_next;
  always_comb begin
    line_next = buf_line;
    for (int p = 0; p < N_DEV; p++)
      line_next[(p*16 + int'(beat))*8 +: 8] = mem_rsp_data[p*8 +: 8];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st           <= S_IDLE;
      pf_mode      <= 1'b0;
      pf_qid       <= '0;
      node         <= '0;
      qid          <= '0;
      qbase        <= '0;
      thr          <= FP_ZERO;
      ent          <= '0;
      nlt_line     <= '0;
      buf_line     <= '0;
      nbr_line     <= '0;
      beat         <= '0;
      nbr_len      <= '0;
      j            <= '0;
      k            <= '0;
      acc_dist     <= FP_ZERO;
      t_fill_valid <= 1'b0;
      d_fill_valid <= 1'b0;
      d_lk_valid   <= 1'b0;
      vec_start    <= 1'b0;
      ev_t_hit     <= 1'b0;
      ev_t_miss    <= 1'b0;
      ev_d_hit     <= 1'b0;
      ev_d_miss    <= 1'b0;
      ev_exit      <= 1'b0;
      ev_accept    <= 1'b0;
      ev_prefetch  <= 1'b0;
    end else begin
      t_fill_valid <= 1'b0;
      d_fill_valid <= 1'b0;
      d_lk_valid   <= 1'b0;
      vec_start    <= 1'b0;
      ev_t_hit     <= 1'b0;
      ev_t_miss    <= 1'b0;
      ev_d_hit     <= 1'b0;
      ev_d_miss    <= 1'b0;
      ev_exit      <= 1'b0;
      ev_accept    <= 1'b0;
      ev_prefetch  <= 1'b0;
      unique case (st)
        S_IDLE: begin
          if (start_search) begin
            pf_mode <= 1'b0;
            node    <= cmd_node;
            qid     <= cmd_qid;
            qbase   <= cmd_qbase;
            thr     <= cmd_thr;
            st      <= S_T_LOOK;
          end else if (start_prefetch) begin
            pf_mode <= 1'b1;
            pf_qid  <= '0;
            st      <= S_PF_NEXT;
          end
        end
        S_PF_NEXT: begin
          if (head_valid[pf_qid]) begin
            node        <= head_id[pf_qid];
            ev_prefetch <= 1'b1;
            st          <= S_T_LOOK;
          end else if (pf_qid == BW'(BATCH - 1)) st <= S_IDLE;
          pf_qid <= pf_qid + BW'(1);
        end
        S_T_LOOK: begin
          if (t_lk_hit) begin
            ev_t_hit <= 1'b1;
            ent      <= t_lk_entry;
            nlt_line <= t_lk_line;
            nbr_len  <= (10'(t_lk_entry.addr[5:2]) + 10'(t_lk_entry.len) > 10'd16)
                        ? 5'(5'd16 - 5'(t_lk_entry.addr[5:2])) : 5'(t_lk_entry.len);
            if (t_lk_entry.len == 8'd0) st <= done_st;  // nothing local
            else begin
              d_lk_valid <= 1'b1;
              st         <= S_D_WAIT;
            end
          end else begin
            ev_t_miss <= 1'b1;
            st        <= S_T_REQ;
          end
        end
        S_T_REQ: if (mem_req_ready) begin beat <= '0; st <= S_T_FETCH; end
        S_T_FETCH: if (mem_rsp_valid) begin
          buf_line <= line_next;
          beat     <= beat + 4'd1;
          if (beat == 4'd15) begin
            t_fill_valid <= 1'b1;
            st           <= S_T_FILL;
          end
        end
        S_T_FILL: st <= S_T_LOOK;          // fill visible from this cycle
        S_D_WAIT: if (d_rsp_valid) begin
          if (d_rsp_hit) begin
            ev_d_hit <= 1'b1;
            nbr_line <= d_rsp_line;
            j        <= '0;
            st       <= S_NBR;
          end else begin
            ev_d_miss <= 1'b1;
            st        <= S_D_REQ;
          end
        end
        S_D_REQ: if (mem_req_ready) begin beat <= '0; st <= S_D_FETCH; end
        S_D_FETCH: if (mem_rsp_valid) begin
          buf_line <= line_next;
          beat     <= beat + 4'd1;
          if (beat == 4'd15) begin
            d_fill_valid <= 1'b1;
            nbr_line     <= line_next;
            j            <= '0;
            st           <= S_NBR;
          end
        end
        S_NBR: begin
          if (pf_mode || j == nbr_len) st <= done_st;
          else begin
            vec_start <= 1'b1;
            k         <= '0;
            st        <= S_V_REQ;
          end
        end
        S_V_REQ: if (mem_req_ready) st <= S_V_WAIT;
        S_V_WAIT: if (step_valid) begin
          if (step_exit) begin
            ev_exit <= 1'b1;
            j       <= j + 5'd1;
            st      <= S_NBR;
          end else if (step_last) begin
            acc_dist <= step_dist;
            st       <= S_PUSH;
          end else begin
            k  <= k + 8'd1;
            st <= S_V_REQ;
          end
        end
        S_PUSH: if (push_ready) begin
          ev_accept <= 1'b1;
          j         <= j + 5'd1;
          st        <= S_NBR;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
