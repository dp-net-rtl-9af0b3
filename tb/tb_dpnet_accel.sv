// tb_dpnet_accel: end-to-end, self-checking test of the compressed
// matrix-vector multiplier with reduced memories (up to 8 rows, 64 columns,
// 512 stored indices; K = 16 as in the default).
//
// Each case loads a random quantized matrix (4-bit indices, 16 binary32
// centers per row) and a random binary32 vector through the load ports,
// starts a run and compares every y value, the row order and the number of
// results with a reference built independently: per row the 16 cluster sums
// in column order, then the sum of center times cluster sum for k = 0..15,
// each operation rounded to binary32. The cycle count from start to done must
// equal rows*(cols+K+2)+1. The mechanisms of the design are counted and each
// must occur: consecutive weights of the same cluster (back-to-back update of
// one sum), clusters left empty in a row, a change of matrix shape between
// runs, a reload of only the vector between runs, a run of zero rows, and a
// maximum-size run.
module tb_dpnet_accel;
  import fp_ref_pkg::*;
  localparam int K = 16, MR = 8, MC = 64, ID = 512;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;
  logic idx_we = 1'b0, ctr_we = 1'b0, vec_we = 1'b0, start = 1'b0;
  logic [8:0]  idx_waddr = '0;
  logic [3:0]  idx_wdata = '0;
  logic [6:0]  ctr_waddr = '0;
  logic [31:0] ctr_wdata = '0, vec_wdata = '0, y_data;
  logic [5:0]  vec_waddr = '0;
  logic [3:0]  rows = '0;
  logic [6:0]  cols = '0;
  logic busy, done, y_valid;
  logic [3:0]  y_row;

  dpnet_accel #(.K(K), .MAX_ROWS(MR), .MAX_COLS(MC), .IDX_DEPTH(ID)) dut (
    .clk, .rst_n, .idx_we, .idx_waddr, .idx_wdata, .ctr_we, .ctr_waddr,
    .ctr_wdata, .vec_we, .vec_waddr, .vec_wdata, .start, .rows, .cols,
    .busy, .done, .y_valid, .y_row, .y_data);

  logic [3:0]  m_idx [ID];
  logic [31:0] m_ctr [MR*K];
  logic [31:0] m_vec [MC];
  int checks = 0, failures = 0;
  int n_same_run = 0, n_empty = 0, n_shape_change = 0, n_vec_reload = 0;
  int n_zero_run = 0, n_full_run = 0, last_r = -1, last_c = -1;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("MISMATCH %s", what);
    end
  endtask

  // mode 0: uniform indices; 1: repeat the previous index half the time;
  // 2: only clusters 0..5 used.
  task automatic load_matrix(int R, int C, int mode);
    for (int r = 0; r < R; r++) begin
      for (int j = 0; j < C; j++) begin
        logic [3:0] ix;
        ix = 4'($urandom);
        if (mode == 1 && j > 0 && $urandom_range(1) == 0) ix = m_idx[r*C + j - 1];
        if (mode == 2) ix = 4'($urandom_range(5));
        m_idx[r*C + j] = ix;
        @(negedge clk);
        idx_we = 1'b1; idx_waddr = 9'(r*C + j); idx_wdata = ix;
      end
      for (int k = 0; k < K; k++) begin
        m_ctr[r*K + k] = rand_f32(118, 130);
        @(negedge clk);
        idx_we = 1'b0;
        ctr_we = 1'b1; ctr_waddr = 7'(r*K + k); ctr_wdata = m_ctr[r*K + k];
      end
      @(negedge clk);
      idx_we = 1'b0; ctr_we = 1'b0;
    end
  endtask

  task automatic load_vector(int C);
    for (int j = 0; j < C; j++) begin
      m_vec[j] = rand_f32(115, 135);
      @(negedge clk);
      vec_we = 1'b1; vec_waddr = 6'(j); vec_wdata = m_vec[j];
    end
    @(negedge clk);
    vec_we = 1'b0;
  endtask

  task automatic run(int R, int C);
    logic [31:0] exp_y [MR];
    int got, cyc;
    bit seen_done;
    for (int r = 0; r < R; r++) begin
      logic [31:0] s [K];
      logic [31:0] y;
      bit used [K];
      foreach (s[k]) begin s[k] = 32'h0; used[k] = 1'b0; end
      for (int j = 0; j < C; j++) begin
        s[m_idx[r*C + j]] = ref_add(s[m_idx[r*C + j]], m_vec[j]);
        used[m_idx[r*C + j]] = 1'b1;
        if (j > 0 && m_idx[r*C + j] == m_idx[r*C + j - 1]) n_same_run++;
      end
      foreach (used[k]) if (!used[k]) n_empty++;
      y = 32'h0;
      for (int k = 0; k < K; k++) y = ref_add(y, ref_mul(m_ctr[r*K + k], s[k]));
      exp_y[r] = y;
    end
    if (last_r >= 0 && (R != last_r || C != last_c)) n_shape_change++;
    if (R == 0) n_zero_run++;
    if (R == MR && C == MC) n_full_run++;
    last_r = R; last_c = C;
    @(negedge clk);
    start = 1'b1; rows = 4'(R); cols = 7'(C);
    @(negedge clk);
    start = 1'b0;
    got = 0; cyc = 1; seen_done = 1'b0;
    while (!seen_done && cyc < 5000) begin
      #1;
      if (y_valid) begin
        chk(int'(y_row) == got, $sformatf("row order: got row %0d, expected %0d", y_row, got));
        if (got < R)
          chk(same(y_data, exp_y[got]), $sformatf("%0dx%0d row %0d: got %h expected %h", R, C, got, y_data, exp_y[got]));
        got++;
      end
      if (done) begin
        seen_done = 1'b1;
        chk(cyc == ((R == 0 || C == 0) ? 1 : R*(C+K+2) + 1),
            $sformatf("%0dx%0d cycles: %0d", R, C, cyc));
      end else begin
        @(negedge clk);
        cyc++;
      end
    end
    chk(seen_done, "done seen");
    chk(got == ((C == 0) ? 0 : R), $sformatf("result count %0d", got));
    @(negedge clk);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load_matrix(1, 1, 0);  load_vector(1);  run(1, 1);
    load_matrix(3, 5, 0);  load_vector(5);  run(3, 5);
    load_matrix(8, 64, 0); load_vector(64); run(8, 64);
    load_vector(64); n_vec_reload++;        run(8, 64);
    load_matrix(6, 40, 1); load_vector(40); run(6, 40);
    load_matrix(5, 30, 2); load_vector(30); run(5, 30);
    run(0, 30);
    for (int i = 0; i < 20; i++) begin
      int R, C;
      R = 1 + int'($urandom_range(MR - 1));
      C = 1 + int'($urandom_range(MC - 1));
      load_matrix(R, C, int'($urandom_range(2)));
      load_vector(C);
      run(R, C);
    end
    $display("mechanisms: same-cluster runs %0d, empty clusters %0d, shape changes %0d, vector reloads %0d, zero-row runs %0d, full-size runs %0d",
             n_same_run, n_empty, n_shape_change, n_vec_reload, n_zero_run, n_full_run);
    chk(n_same_run > 0, "same-cluster run occurred");
    chk(n_empty > 0, "empty cluster occurred");
    chk(n_shape_change > 0, "shape change occurred");
    chk(n_vec_reload > 0, "vector reload occurred");
    chk(n_zero_run > 0, "zero-row run occurred");
    chk(n_full_run > 0, "maximum-size run occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
