// dpnet_accel: compressed matrix-vector multiplier for DP-Net quantized
// layers.
//
// DP-Net quantizes every row of a weight matrix to K scalar cluster centers,
// so a row w is stored as K binary32 centers c_k plus one log2(K)-bit index
// p_i per weight. The dot product of the row with a vector a then regroups as
//   w . a = sum_k c_k * (sum of a_i over i with p_i = k),
// which needs one addition per weight but only K multiplications per row.
// This top computes y = W a that way, one weight per clock cycle:
//   index_mem     indices p, row-major (cols per row)
//   center_mem    K centers per row
//   vector_mem    the vector a
//   cluster_accum K running sums, one addition per cycle
//   center_mac    sum of c_k * S_k, one multiply-add per cycle
//   dpnet_ctrl    the row-by-row schedule
// A fully connected layer is used as is; a convolutional layer with
// n x m x h x w weights is first reshaped to an n x (m*h*w) matrix.
//
// Interface: the three memories are loaded through their write ports while
// the unit is idle. start (with rows and cols) begins a run; each row's
// result appears for one cycle on y_data with y_valid and its row number on
// y_row; done pulses after the last row. A run of rows x cols takes
// rows*(cols+K+2)+1 cycles, e.g. 1,042,001 cycles (10.4 ms at 100 MHz) for
// 1000x1024 with K = 16. The defaults (K = 16, up to 1000 rows, up to 1728
// columns, 1,024,000 stored indices) cover both matrices of the reference
// FPGA experiment, 1000x1024 and 384x1728. The load ports, the result stream
// and the memory layout are this design's own choices.
module dpnet_accel
  import dpnet_pkg::*;
#(
  parameter int unsigned K         = DEF_K,
  parameter int unsigned MAX_ROWS  = DEF_MAX_ROWS,
  parameter int unsigned MAX_COLS  = DEF_MAX_COLS,
  parameter int unsigned IDX_DEPTH = DEF_IDX_DEPTH,
  localparam int unsigned KW  = $clog2(K),
  localparam int unsigned RW  = $clog2(MAX_ROWS + 1),
  localparam int unsigned CW  = $clog2(MAX_COLS + 1),
  localparam int unsigned IAW = $clog2(IDX_DEPTH),
  localparam int unsigned VAW = $clog2(MAX_COLS),
  localparam int unsigned CAW = $clog2(MAX_ROWS * K)
) (
  input  logic           clk,
  input  logic           rst_n,
  // index memory load port (address row*cols + col)
  input  logic           idx_we,
  input  logic [IAW-1:0] idx_waddr,
  input  logic [KW-1:0]  idx_wdata,
  // center memory load port (address row*K + k)
  input  logic           ctr_we,
  input  logic [CAW-1:0] ctr_waddr,
  input  fp32_t          ctr_wdata,
  // vector memory load port
  input  logic           vec_we,
  input  logic [VAW-1:0] vec_waddr,
  input  fp32_t          vec_wdata,
  // run control
  input  logic           start,
  input  logic [RW-1:0]  rows,
  input  logic [CW-1:0]  cols,
  output logic           busy,
  output logic           done,
  // results
  output logic           y_valid,
  output logic [RW-1:0]  y_row,
  output fp32_t          y_data
);

  logic [IAW-1:0] idx_raddr;
  logic [VAW-1:0] vec_raddr;
  logic [CAW-1:0] ctr_raddr;
  logic [KW-1:0]  idx_rdata, bin_sel;
  fp32_t          vec_rdata, ctr_rdata, bin;
  logic           acc_clear, acc_en, mac_clear, mac_en;

  index_mem #(.IDX_W(KW), .DEPTH(IDX_DEPTH)) u_idx (
    .clk, .we(idx_we), .waddr(idx_waddr), .wdata(idx_wdata),
    .raddr(idx_raddr), .rdata(idx_rdata)
  );

  center_mem #(.K(K), .MAX_ROWS(MAX_ROWS)) u_ctr (
    .clk, .we(ctr_we), .waddr(ctr_waddr), .wdata(ctr_wdata),
    .raddr(ctr_raddr), .rdata(ctr_rdata)
  );

  vector_mem #(.MAX_COLS(MAX_COLS)) u_vec (
    .clk, .we(vec_we), .waddr(vec_waddr), .wdata(vec_wdata),
    .raddr(vec_raddr), .rdata(vec_rdata)
  );

  dpnet_ctrl #(.K(K), .MAX_ROWS(MAX_ROWS), .MAX_COLS(MAX_COLS),
               .IDX_DEPTH(IDX_DEPTH)) u_ctrl (
    .clk, .rst_n, .start, .rows, .cols, .busy, .done,
    .idx_raddr, .vec_raddr, .ctr_raddr,
    .acc_clear, .acc_en, .bin_sel, .mac_clear, .mac_en,
    .y_valid, .y_row
  );

  cluster_accum #(.K(K)) u_bins (
    .clk, .rst_n, .clear(acc_clear), .en(acc_en),
    .idx(idx_rdata), .a(vec_rdata), .sel(bin_sel), .bin
  );

  center_mac u_mac (
    .clk, .rst_n, .clear(mac_clear), .en(mac_en),
    .c(ctr_rdata), .s(bin), .acc(y_data)
  );

  // The memories must not change under a running multiplication.
  a_no_load_while_busy: assert property (@(posedge clk)
    busy |-> !(idx_we || ctr_we || vec_we))
    else $error("dpnet_accel: memory written during a run");

endmodule
