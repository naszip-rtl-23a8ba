// fee_module: feature-level early exit (FEE) decision of the VPE.
//
// After the k-th memory access of a vector the accumulator holds the partial
// distance d_part over the dimensions read so far. The module multiplies it by
// the factor alpha_k/beta_k, which estimates the full distance (alpha_k, from
// the PCA eigenvalues) and corrects the estimate downwards (beta_k > 1, from a
// Chebyshev bound), and compares the estimate with the threshold, the distance
// of the farthest candidate in the queue: thr < alpha_k/beta_k * acc gives 1
// (exit, the vector is discarded), otherwise 0 (continue).
//
// Following the paper: one stored alpha/beta factor per step, a multiplier
// and a comparator with the exit condition above. This design's choices: the
// host writes the factors as FP32 into a MAX_STEPS-entry table (128 steps hold
// a 2048-dimension FP32 vector); on the last access of a vector the factor is
// forced to 1.0 so that the decision is exactly "full distance > threshold".
//
// Timing: in_valid with acc/thr/step/last; exit_o and out_valid follow one
// cycle later.
module fee_module
  import naszip_pkg::*;
#(
  parameter int unsigned MAX_STEPS = 128
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         wr_en,
  input  logic [$clog2(MAX_STEPS)-1:0] wr_step,
  input  fp32_t                        wr_factor,
  input  logic                         in_valid,
  input  logic [$clog2(MAX_STEPS)-1:0] step,
  input  logic                         last,
  input  fp32_t                        acc,
  input  fp32_t                        thr,
  output logic                         out_valid,
  output logic                         exit_o
);
  fp32_t ab_mem [MAX_STEPS];
  fp32_t factor, est_c;

  always_ff @(posedge clk) begin
    if (wr_en) ab_mem[wr_step] <= wr_factor;
  end

  always_comb begin
    factor = last ? FP_ONE : ab_mem[step];
    est_c  = fp_mul(factor, acc);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      exit_o    <= 1'b0;
    end else begin
      out_valid <= in_valid;
      exit_o    <= in_valid && fp_lt(thr, est_c);
    end
  end

endmodule
