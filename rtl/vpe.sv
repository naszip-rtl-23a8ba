// vpe: vector processing engine of one sub-channel.
//
// The VPE computes the distance between the current query and one vector read
// from its sub-channel, memory access by memory access, and decides after
// each access whether to exit early. One memory access returns one 128-bit
// burst from each of the four devices in parallel (16 beats of 4 x 8 bits).
// Each device feeds its own path: a Dfloat decoder (dfloat_proc), a query
// buffer that supplies the matching query element, and a distance module
// (dist_calc). The four terms of a cycle are summed by an adder tree into an
// accumulator that holds the partial distance. When all four paths have
// finished the access, the FEE module scales the partial distance by
// alpha_k/beta_k and compares it with the threshold.
//
// Following the paper: four parallel paths, one per device; Dfloat decoding,
// query buffer and L2/IP distance per path; accumulator merging the paths;
// FEE decision after each accumulator update; Dfloat burst k of a vector read
// from device k mod 4 (Fig. 12 interleaving). This design's choices: the
// element width and count of each burst come from the host-set segment table
// (see naszip_pkg::burst_fmt); the adder tree is a registered stage of three
// FP32 adders; a vector's accesses are processed one at a time.
//
// Interface: vec_start (with thr and q_base) begins a vector; the 16 beats of
// each access arrive on beat_valid/beat_data (byte p from device p). About
// four cycles after the 16th beat plus the largest element count of the
// access, step_valid pulses with step_exit (1 = early exit) and step_last
// (this was the vector's last access); on a last step without exit, distance is
// the full distance and the vector is accepted.
module vpe
  import naszip_pkg::*;
#(
  parameter int unsigned QB_DEPTH  = 4096,
  parameter int unsigned MAX_STEPS = 128
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // configuration
  input  dist_mode_e                  mode,
  input  logic [N_SEG-1:0][$bits(dfseg_t)-1:0] segs,
  input  logic [7:0]                  n_access,
  // host writes
  input  logic                        qb_wr_en,
  input  logic [1:0]                  qb_wr_path,
  input  logic [$clog2(QB_DEPTH)-1:0] qb_wr_addr,
  input  fp32_t                       qb_wr_data,
  input  logic                        fee_wr_en,
  input  logic [$clog2(MAX_STEPS)-1:0] fee_wr_step,
  input  fp32_t                       fee_wr_data,
  // vector stream
  input  logic                        vec_start,
  input  fp32_t                       thr,
  input  logic [$clog2(QB_DEPTH)-1:0] q_base,
  input  logic                        beat_valid,
  input  logic [N_DEV*DEV_BITS-1:0]   beat_data,
  // result
  output logic                        step_valid,
  output logic                        step_exit,
  output logic                        step_last,
  output fp32_t                       distance
);
  logic [7:0]        k;          // access index within the vector
  fp32_t             thr_q;
  burst_fmt_t        fmt   [N_DEV];
  logic [N_DEV-1:0]  ev, pdone, seen, tv;
  fp32_t             elem  [N_DEV];
  fp32_t             qel   [N_DEV];
  fp32_t             term  [N_DEV];

  for (genvar p = 0; p < N_DEV; p++) begin : g_path
    assign fmt[p] = burst_fmt(segs, 10'({k, 2'b00} + p));

    dfloat_proc u_dfloat (
      .clk, .rst_n,
      .beat_valid (beat_valid),
      .beat_data  (beat_data[p*DEV_BITS +: DEV_BITS]),
      .width      (fmt[p].width),
      .count      (fmt[p].count),
      .elem_valid (ev[p]),
      .elem_fp32  (elem[p]),
      .done       (pdone[p])
    );

    query_buffer #(.DEPTH(QB_DEPTH)) u_qbuf (
      .clk, .rst_n,
      .wr_en   (qb_wr_en && qb_wr_path == 2'(p)),
      .wr_addr (qb_wr_addr),
      .wr_data (qb_wr_data),
      .start   (vec_start),
      .base    (q_base),
      .next    (ev[p]),
      .out     (qel[p])
    );

    dist_calc u_dist (
      .clk, .rst_n,
      .in_valid  (ev[p]),
      .mode      (mode),
      .q         (qel[p]),
      .d         (elem[p]),
      .out_valid (tv[p]),
      .term      (term[p])
    );
  end

  // Adder tree and accumulator.
  fp32_t tree_q, acc;
  logic  tree_v;
  logic  all_done, m1, m2;

  assign all_done = &(seen | pdone);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tree_q <= FP_ZERO;
      tree_v <= 1'b0;
      acc    <= FP_ZERO;
      seen   <= '0;
      m1     <= 1'b0;
      m2     <= 1'b0;
      k      <= '0;
      thr_q  <= FP_ZERO;
    end else begin
      tree_v <= |tv;
      tree_q <= fp_add(fp_add(term[0], term[1]), fp_add(term[2], term[3]));
      if (vec_start) begin
        acc   <= FP_ZERO;
        k     <= '0;
        thr_q <= thr;
      end else begin
        if (tree_v) acc <= fp_add(acc, tree_q);
        if (step_valid && !step_exit && !step_last) k <= k + 8'd1;
      end
      seen <= all_done ? '0 : (seen | pdone);
      m1   <= all_done;
      m2   <= m1;
    end
  end

  logic fee_last;
  assign fee_last = (k == n_access - 8'd1);

  fee_module #(.MAX_STEPS(MAX_STEPS)) u_fee (
    .clk, .rst_n,
    .wr_en     (fee_wr_en),
    .wr_step   (fee_wr_step),
    .wr_factor (fee_wr_data),
    .in_valid  (m2),
    .step      (k[$clog2(MAX_STEPS)-1:0]),
    .last      (fee_last),
    .acc       (acc),
    .thr       (thr_q),
    .out_valid (step_valid),
    .exit_o    (step_exit)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  step_last <= 1'b0;
    else if (m2) step_last <= fee_last;
  end

  assign distance = acc;

endmodule
