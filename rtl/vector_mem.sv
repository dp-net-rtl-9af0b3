// vector_mem: the dense input vector of the matrix-vector product.
//
// Holds up to MAX_COLS binary32 elements a_0 .. a_{cols-1}; 1728 by default,
// the column count of the largest (convolutional) matrix the design is sized
// for. It is written as a RAM with a load port, so the vector can be replaced
// between runs; the FPGA experiment this design follows held it as a
// LUT-based ROM.
//
// Interface and timing: one write port, written on the rising clock edge, and
// one read port with registered data (one cycle of latency). No reset.
module vector_mem
  import dpnet_pkg::*;
#(
  parameter int unsigned MAX_COLS = 1728,
  localparam int unsigned AW      = $clog2(MAX_COLS)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  fp32_t         wdata,
  input  logic [AW-1:0] raddr,
  output fp32_t         rdata
);

  fp32_t mem [MAX_COLS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
