// index_mem: storage for the quantized matrix, one cluster index per weight.
//
// Each weight of the compressed matrix is kept only as the log2(K)-bit number
// of its cluster, as in the quantized storage format of DP-Net (a 4-bit index
// for 16 clusters). The matrix is laid out row-major at address
// row*cols + col, one index per word. The default depth, 1,024,000 words, is
// the larger of the two matrices the design is sized for (1000x1024; the
// 384x1728 one needs 663,552).
//
// Interface and timing: one write port for loading (we, waddr, wdata, written
// on the rising clock edge) and one read port whose data appears one cycle
// after the address (registered read). On the FPGA this maps to LUT
// (distributed) RAM with an output register. The memory has no reset; what is
// read must have been written.
module index_mem #(
  parameter int unsigned IDX_W = 4,
  parameter int unsigned DEPTH = 1024000,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [IDX_W-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [IDX_W-1:0] rdata
);

  logic [IDX_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
