// tb_cluster_accum: self-checking test of the K = 16 cluster sums. Rows of
// random (index, element) pairs are streamed in one per cycle, including runs
// of the same index on consecutive cycles and clusters that receive nothing;
// after each row all 16 sums are read through sel and compared with sums
// formed by the binary32 reference in the same order. clear and reset are
// checked to zero every sum, and en low to leave them unchanged.
module tb_cluster_accum;
  import fp_ref_pkg::*;
  localparam int K = 16;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0, clear = 1'b0, en = 1'b0;
  logic [3:0]  idx = '0, sel = '0;
  logic [31:0] a = '0, bin;
  logic [31:0] model [K];
  int checks = 0, failures = 0, same_idx_runs = 0;

  cluster_accum dut (.clk, .rst_n, .clear, .en, .idx, .a, .sel, .bin);

  task automatic compare_all(string what);
    for (int k = 0; k < K; k++) begin
      sel = 4'(k);
      #1;
      checks++;
      if (bin !== model[k]) begin
        failures++;
        if (failures < 10) $display("MISMATCH %s bin %0d: got %h expected %h", what, k, bin, model[k]);
      end
    end
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
    foreach (model[k]) model[k] = 32'h0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    compare_all("reset");
    for (int row = 0; row < 40; row++) begin
      int n;
      logic [3:0] prev;
      n = 1 + int'($urandom_range(300));
      prev = '0;
      for (int i = 0; i < n; i++) begin
        logic [3:0] ix;
        // Row 3 uses only the even clusters; otherwise repeat the previous
        // index a quarter of the time.
        ix = ($urandom_range(3) == 0) ? prev : 4'($urandom);
        if (row == 3) ix[0] = 1'b0;
        if (i > 0 && ix == prev) same_idx_runs++;
        prev = ix;
        @(negedge clk);
        en = 1'b1; idx = ix; a = rand_f32(110, 140);
        model[ix] = ref_add(model[ix], a);
      end
      @(negedge clk);
      en = 1'b0;
      idx = 4'($urandom); a = rand_f32(110, 140);   // ignored: en low
      @(negedge clk);
      compare_all("row");
      clear = 1'b1;
      @(negedge clk);
      clear = 1'b0;
      foreach (model[k]) model[k] = 32'h0;
      compare_all("clear");
    end
    // clear has priority over en
    @(negedge clk);
    en = 1'b1; clear = 1'b1; idx = 4'd5; a = 32'h3F80_0000;
    @(negedge clk);
    en = 1'b0; clear = 1'b0;
    compare_all("clear+en");
    checks++;
    if (same_idx_runs == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
