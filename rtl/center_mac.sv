// center_mac: the K multiplications of the quantized dot product.
//
// After the cluster sums S_k of a row are complete, the row result is
// y = sum_k c_k * S_k: only K multiplications however long the row is. This
// unit takes one (c, s) pair per cycle while en is high, rounds the product
// c*s to binary32, and adds it into the accumulator (also rounded), so the
// order of the terms is the order in which they are presented.
//
// Interface and timing: clear (synchronous, priority over en) zeroes the
// accumulator; acc is the register and shows the sum of all terms accepted at
// earlier clock edges. rst_n is an asynchronous active-low reset. Using a
// separate multiplier and adder (no fused multiply-add) is this design's own
// choice.
module center_mac
  import dpnet_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear,
  input  logic  en,
  input  fp32_t c,
  input  fp32_t s,
  output fp32_t acc
);

  fp32_t prod, sum;

  fp32_mul u_mul (.a(c),   .b(s),    .y(prod));
  fp32_add u_add (.a(acc), .b(prod), .y(sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     acc <= FP32_ZERO;
    else if (clear) acc <= FP32_ZERO;
    else if (en)    acc <= sum;
  end

endmodule
