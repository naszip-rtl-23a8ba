// dist_calc: per-element distance term of one VPE path.
//
// One shared datapath serves both metrics. For L2 the subtractor forms q-d
// and the multiplier squares it; for inner product (IP) a multiplexer routes
// q and d around the subtractor straight into the multiplier. The term is
// registered, so it appears one cycle after the inputs.
//
// Following the paper: a subtractor and a multiplier shared by L2 and IP with
// a mode multiplexer, FP32 arithmetic. This design's choice: the IP term is
// negated (-(q*d)) so that for both metrics a smaller accumulated value means
// a closer vector and the early-exit comparison is the same.
module dist_calc
  import naszip_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  dist_mode_e mode,
  input  fp32_t      q,
  input  fp32_t      d,
  output logic       out_valid,
  output fp32_t      term
);
  fp32_t diff, ma, mb, prod;

  always_comb begin
    diff = fp_add(q, {~d[31], d[30:0]});
    ma   = (mode == MODE_L2) ? diff : q;
    mb   = (mode == MODE_L2) ? diff : d;
    prod = fp_mul(ma, mb);
    if (mode == MODE_IP) prod[31] = ~prod[31];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      term      <= FP_ZERO;
    end else begin
      out_valid <= in_valid;
      term      <= in_valid ? prod : FP_ZERO;
    end
  end

endmodule
