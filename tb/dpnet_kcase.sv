// dpnet_kcase: testbench helper that runs random matrix-vector products on
// one dpnet_accel instance with K clusters (log2(K)-bit indices) and reduced
// memories, and checks each result against the binary32 reference (cluster
// sums in column order, then the K center products in order) and each run
// time against rows*(cols+K+2)+1 cycles. With FIG1 set it first runs the
// 9-weight example of the quantized storage format (centers 3.5 and 7.2,
// 1-bit indices 0 0 1 1 1 0 0 0 1) and also compares the result with the dense
// dot product of the expanded row, to within a relative 1e-5. It raises
// finished when done and reports its counts.
module dpnet_kcase #(
  parameter int K    = 4,
  parameter int MR   = 6,
  parameter int MC   = 48,
  parameter int NRUN = 12,
  parameter bit FIG1 = 1'b0
) (
  output logic finished,
  output int   checks,
  output int   failures
);
  import fp_ref_pkg::*;
  localparam int ID  = MR * MC;
  localparam int KW  = $clog2(K);
  localparam int RW  = $clog2(MR + 1);
  localparam int CW  = $clog2(MC + 1);
  localparam int IAW = $clog2(ID);
  localparam int VAW = $clog2(MC);
  localparam int CAW = $clog2(MR * K);

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;
  logic idx_we = 1'b0, ctr_we = 1'b0, vec_we = 1'b0, start = 1'b0;
  logic [IAW-1:0] idx_waddr = '0;
  logic [KW-1:0]  idx_wdata = '0;
  logic [CAW-1:0] ctr_waddr = '0;
  logic [VAW-1:0] vec_waddr = '0;
  logic [31:0]    ctr_wdata = '0, vec_wdata = '0, y_data;
  logic [RW-1:0]  rows = '0, y_row;
  logic [CW-1:0]  cols = '0;
  logic busy, done, y_valid;

  dpnet_accel #(.K(K), .MAX_ROWS(MR), .MAX_COLS(MC), .IDX_DEPTH(ID)) dut (
    .clk, .rst_n, .idx_we, .idx_waddr, .idx_wdata, .ctr_we, .ctr_waddr,
    .ctr_wdata, .vec_we, .vec_waddr, .vec_wdata, .start, .rows, .cols,
    .busy, .done, .y_valid, .y_row, .y_data);

  logic [KW-1:0] m_idx [ID];
  logic [31:0]   m_ctr [MR*K];
  logic [31:0]   m_vec [MC];

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("MISMATCH K=%0d %s", K, what);
    end
  endtask

  task automatic load(int R, int C);
    for (int j = 0; j < C; j++) begin
      @(negedge clk); vec_we = 1'b1; vec_waddr = VAW'(j); vec_wdata = m_vec[j];
    end
    @(negedge clk); vec_we = 1'b0;
    for (int a = 0; a < R*C; a++) begin
      idx_we = 1'b1; idx_waddr = IAW'(a); idx_wdata = m_idx[a];
      @(negedge clk);
    end
    idx_we = 1'b0;
    for (int a = 0; a < R*K; a++) begin
      ctr_we = 1'b1; ctr_waddr = CAW'(a); ctr_wdata = m_ctr[a];
      @(negedge clk);
    end
    ctr_we = 1'b0;
  endtask

  // Multiply, compare; returns row 0's result.
  task automatic run(int R, int C, output logic [31:0] y0);
    logic [31:0] exp_y [MR];
    int got, cyc;
    bit seen_done;
    for (int r = 0; r < R; r++) begin
      logic [31:0] s [K];
      logic [31:0] y;
      foreach (s[k]) s[k] = 32'h0;
      for (int j = 0; j < C; j++) s[m_idx[r*C + j]] = ref_add(s[m_idx[r*C + j]], m_vec[j]);
      y = 32'h0;
      for (int k = 0; k < K; k++) y = ref_add(y, ref_mul(m_ctr[r*K + k], s[k]));
      exp_y[r] = y;
    end
    @(negedge clk);
    start = 1'b1; rows = RW'(R); cols = CW'(C);
    @(negedge clk);
    start = 1'b0;
    got = 0; cyc = 1; seen_done = 1'b0; y0 = 32'h0;
    while (!seen_done && cyc < 100000) begin
      #1;
      if (y_valid) begin
        if (got == 0) y0 = y_data;
        chk(int'(y_row) == got, "row order");
        if (got < R)
          chk(same(y_data, exp_y[got]), $sformatf("%0dx%0d row %0d: got %h expected %h", R, C, got, y_data, exp_y[got]));
        got++;
      end
      if (done) seen_done = 1'b1;
      else begin @(negedge clk); cyc++; end
    end
    chk(seen_done && got == R, "done and result count");
    chk(cyc == R*(C+K+2) + 1, $sformatf("cycles %0d", cyc));
  endtask

  initial begin
    logic [31:0] y0;
    finished = 1'b0; checks = 0; failures = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    if (FIG1) begin
      // 3.5 3.5 7.2 7.2 7.2 3.5 3.5 3.5 7.2 as indices into {3.5, 7.2}.
      logic [8:0] bits;
      real dense, yr;
      bits = 9'b100011100;   // bit j is the index of weight j
      m_ctr[0] = 32'h4060_0000;   // 3.5
      m_ctr[1] = 32'h40E6_6666;   // 7.2
      dense = 0.0;
      for (int j = 0; j < 9; j++) begin
        m_idx[j] = KW'(bits[j]);
        m_vec[j] = rand_f32(120, 130);
        dense += f32_to_real(m_vec[j]) * f32_to_real(m_ctr[bits[j]]);
      end
      load(1, 9);
      run(1, 9, y0);
      yr = f32_to_real(y0);
      chk((yr - dense) < 1.0e-5 * dense && (dense - yr) < 1.0e-5 * dense,
          $sformatf("storage-format example: %f vs dense %f", yr, dense));
    end
    for (int n = 0; n < NRUN; n++) begin
      int R, C;
      R = 1 + int'($urandom_range(MR - 1));
      C = 1 + int'($urandom_range(MC - 1));
      if (n == 0) begin R = MR; C = MC; end
      for (int j = 0; j < C; j++) m_vec[j] = rand_f32(115, 135);
      for (int a = 0; a < R*C; a++) m_idx[a] = KW'($urandom_range(K - 1));
      for (int a = 0; a < R*K; a++) m_ctr[a] = rand_f32(118, 130);
      load(R, C);
      run(R, C, y0);
    end
    finished = 1'b1;
  end
endmodule
