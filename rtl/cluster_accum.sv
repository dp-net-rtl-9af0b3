// cluster_accum: the K per-cluster sums of vector elements.
//
// This is the addition half of the quantized dot product
//   a . w = sum_k c_k * S_k,   S_k = sum of a_i over all i with p_i = k,
// where p_i is the cluster index of weight i and c_k the k-th center. Every
// cycle with en high, the element a is added into bin idx; no multiplier is
// involved. The sums are K registers sharing one binary32 adder: the bin is
// read, added to and written back in the same cycle, so consecutive elements
// of the same cluster need no forwarding or stall.
//
// Interface and timing: clear (synchronous) zeroes all sums and takes
// priority over en. bin = S_sel is read combinationally from the registers
// and reflects every addition completed at earlier clock edges. rst_n is an
// asynchronous active-low reset to zero. The single shared adder and the
// register-file sums are this design's own choices.
module cluster_accum
  import dpnet_pkg::*;
#(
  parameter int unsigned K   = 16,
  localparam int unsigned KW = $clog2(K)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          en,
  input  logic [KW-1:0] idx,
  input  fp32_t         a,
  input  logic [KW-1:0] sel,
  output fp32_t         bin
);

  fp32_t sums [K];
  fp32_t sum;

  fp32_add u_add (
    .a (sums[idx]),
    .b (a),
    .y (sum)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < K; k++) sums[k] <= FP32_ZERO;
    end else if (clear) begin
      for (int k = 0; k < K; k++) sums[k] <= FP32_ZERO;
    end else if (en) begin
      sums[idx] <= sum;
    end
  end

  assign bin = sums[sel];

endmodule
