// center_mem: the per-row codebooks of cluster centers.
//
// Fine-grained quantization gives every matrix row its own K cluster centers,
// each a binary32 number. Center k of row r is kept at address r*K + k. With
// the defaults (K = 16, up to 1000 rows) the memory holds 16,000 words.
//
// Interface and timing: one write port for loading, written on the rising
// clock edge, and one read port with registered data (one cycle of latency).
// No reset; what is read must have been written.
module center_mem
  import dpnet_pkg::*;
#(
  parameter int unsigned K        = 16,
  parameter int unsigned MAX_ROWS = 1000,
  localparam int unsigned DEPTH   = MAX_ROWS * K,
  localparam int unsigned AW      = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  fp32_t         wdata,
  input  logic [AW-1:0] raddr,
  output fp32_t         rdata
);

  fp32_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
