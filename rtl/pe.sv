// pe: one processing element of the outer-product GEMM engine.
//
// Every clock with en high the PE multiplies the LHS element on its row bus by
// the RHS element on its column bus (both BF16) and adds the product to its
// local FP32 accumulator, so after K enabled cycles acc holds
// sum_k a[k] * b[k] -- one element of the output tile, which stays in place
// (output stationary). With first high the product replaces the accumulator,
// which starts a new tile without a separate clear cycle.
// Timing: one MAC per clock, result visible on acc the cycle after en.
// Following the paper: BF16 multiply, FP32 accumulate, local accumulation.
// This design's choices: single-cycle MAC, round to nearest even, subnormals
// flushed to zero (see fp_pkg), accumulator reset to +0.
module pe
  import fp_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  first,
  input  bf16_t a,
  input  bf16_t b,
  output fp32_t acc
);

  fp32_t prod;

  always_comb prod = fp32_mul(bf16_to_fp32(a), bf16_to_fp32(b));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        acc <= FP32_ZERO;
    else if (en) begin
      if (first)       acc <= prod;
      else             acc <= fp32_add(acc, prod);
    end
  end

endmodule
