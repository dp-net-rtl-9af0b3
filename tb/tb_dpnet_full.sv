// tb_dpnet_full: the two matrix-vector products the design is sized for, run
// on the top at its default parameters (K = 16, 4-bit indices):
//   a fully connected layer, 1000 x 1024, and
//   a convolutional layer reshaped to 384 x 1728.
// Each matrix is generated at random (indices and 16 binary32 centers per
// row), loaded through the ports with the vector, and multiplied once. All
// results are compared with a binary32 reference (cluster sums in column
// order, then the 16 center products in order) and the run time with
// rows*(cols+18)+1 cycles: 1,042,001 and 670,465 cycles, 10.42 ms and
// 6.70 ms at 100 MHz.
module tb_dpnet_full;
  import fp_ref_pkg::*;
  localparam int K = 16, MAXR = 1000, MAXC = 1728, ID = 1024000;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;
  logic idx_we = 1'b0, ctr_we = 1'b0, vec_we = 1'b0, start = 1'b0;
  logic [19:0] idx_waddr = '0;
  logic [3:0]  idx_wdata = '0;
  logic [13:0] ctr_waddr = '0;
  logic [31:0] ctr_wdata = '0, vec_wdata = '0, y_data;
  logic [10:0] vec_waddr = '0;
  logic [9:0]  rows = '0;
  logic [10:0] cols = '0;
  logic busy, done, y_valid;
  logic [9:0]  y_row;

  dpnet_accel dut (
    .clk, .rst_n, .idx_we, .idx_waddr, .idx_wdata, .ctr_we, .ctr_waddr,
    .ctr_wdata, .vec_we, .vec_waddr, .vec_wdata, .start, .rows, .cols,
    .busy, .done, .y_valid, .y_row, .y_data);

  logic [3:0]  m_idx [ID];
  logic [31:0] m_ctr [MAXR*K];
  logic [31:0] m_vec [MAXC];
  logic [31:0] exp_y [MAXR];
  int checks = 0, failures = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("MISMATCH %s", what);
    end
  endtask

  task automatic workload(string name, int R, int C);
    int got, cyc;
    bit seen_done;
    // Load the vector, the indices and the centers through the ports.
    for (int j = 0; j < C; j++) begin
      m_vec[j] = rand_f32(115, 135);
      @(negedge clk);
      vec_we = 1'b1; vec_waddr = 11'(j); vec_wdata = m_vec[j];
    end
    @(negedge clk);
    vec_we = 1'b0;
    for (int a = 0; a < R*C; a++) begin
      m_idx[a] = 4'($urandom);
      idx_we = 1'b1; idx_waddr = 20'(a); idx_wdata = m_idx[a];
      @(negedge clk);
    end
    idx_we = 1'b0;
    for (int a = 0; a < R*K; a++) begin
      m_ctr[a] = rand_f32(118, 130);
      ctr_we = 1'b1; ctr_waddr = 14'(a); ctr_wdata = m_ctr[a];
      @(negedge clk);
    end
    ctr_we = 1'b0;
    // Reference.
    for (int r = 0; r < R; r++) begin
      logic [31:0] s [K];
      logic [31:0] y;
      foreach (s[k]) s[k] = 32'h0;
      for (int j = 0; j < C; j++) s[m_idx[r*C + j]] = ref_add(s[m_idx[r*C + j]], m_vec[j]);
      y = 32'h0;
      for (int k = 0; k < K; k++) y = ref_add(y, ref_mul(m_ctr[r*K + k], s[k]));
      exp_y[r] = y;
    end
    // Run.
    @(negedge clk);
    start = 1'b1; rows = 10'(R); cols = 11'(C);
    @(negedge clk);
    start = 1'b0;
    got = 0; cyc = 1; seen_done = 1'b0;
    while (!seen_done && cyc < 2000000) begin
      #1;
      if (y_valid) begin
        chk(int'(y_row) == got, $sformatf("%s row order %0d/%0d", name, y_row, got));
        if (got < R)
          chk(same(y_data, exp_y[got]), $sformatf("%s row %0d: got %h expected %h", name, got, y_data, exp_y[got]));
        got++;
      end
      if (done) seen_done = 1'b1;
      else begin
        @(negedge clk);
        cyc++;
      end
    end
    chk(seen_done, {name, " done"});
    chk(got == R, $sformatf("%s result count %0d", name, got));
    chk(cyc == R*(C+K+2) + 1, $sformatf("%s cycles %0d expected %0d", name, cyc, R*(C+K+2) + 1));
    $display("%s %0dx%0d: %0d cycles = %0.2f ms at 100 MHz", name, R, C, cyc, real'(cyc) / 1.0e5);
    @(negedge clk);
  endtask

  initial begin
    repeat (6000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    workload("FC layer", 1000, 1024);
    workload("conv layer", 384, 1728);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
