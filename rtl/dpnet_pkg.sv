// dpnet_pkg: types and constants shared by the compressed matrix-vector
// multiplier.
//
// The accelerator multiplies a matrix whose every row has been quantized to
// K scalar cluster centers by a dense vector. Each weight is stored as a
// log2(K)-bit index into its row's K binary32 centers. The defaults, K = 16
// clusters (4-bit indices) and matrices up to 1000x1024 and 384x1728, are the
// configuration of the FPGA experiment the design follows. The packed field
// layout of fp32_t is the standard IEEE-754 binary32 one.
package dpnet_pkg;

  // IEEE-754 binary32, as raw bits and as its three fields.
  typedef logic [31:0] fp32_t;

  typedef struct packed {
    logic       sign;
    logic [7:0] exp;
    logic [22:0] frac;
  } fp32_fields_t;

  localparam fp32_t FP32_ZERO  = 32'h0000_0000;
  localparam fp32_t FP32_QNAN  = 32'h7FC0_0000;
  localparam logic [7:0] FP32_EMAX = 8'hFF;

  // Default sizes (4-bit indices, 16 centers per row).
  localparam int unsigned DEF_K         = 16;
  localparam int unsigned DEF_MAX_ROWS  = 1000;
  localparam int unsigned DEF_MAX_COLS  = 1728;
  localparam int unsigned DEF_IDX_DEPTH = 1024000;

  // Controller states.
  typedef enum logic [2:0] {
    ST_IDLE = 3'd0,  // waiting for start
    ST_ACC  = 3'd1,  // streaming one row's indices and vector elements
    ST_MAC  = 3'd2,  // streaming the row's K centers and cluster sums
    ST_WAIT = 3'd3,  // last multiply-add completes
    ST_OUT  = 3'd4   // result of the row is presented
  } ctrl_state_t;

endpackage
