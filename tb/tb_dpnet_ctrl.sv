// tb_dpnet_ctrl: self-checking, cycle-by-cycle test of the sequencer at its
// default parameters (K = 16) on small runs. For a run of R x C the expected
// value of every output in every cycle is built independently from the
// schedule: row r starts at cycle 1 + r*(C+K+2); its C accumulate cycles read
// index r*C+j and element j, with the sum enable one cycle later; its K
// center cycles read center r*K+k, with the multiply enable and bin select k
// one cycle later; the output cycle follows one wait cycle; done comes one
// cycle after the last output. Runs with zero rows or columns give done
// alone, and start while busy is ignored.
module tb_dpnet_ctrl;
  import dpnet_pkg::*;
  localparam int K = 16;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0, start = 1'b0;
  logic [9:0]  rows = '0;
  logic [10:0] cols = '0;
  logic busy, done, acc_clear, acc_en, mac_clear, mac_en, y_valid;
  logic [19:0] idx_raddr;
  logic [10:0] vec_raddr;
  logic [13:0] ctr_raddr;
  logic [3:0]  bin_sel;
  logic [9:0]  y_row;
  int checks = 0, failures = 0;

  dpnet_ctrl dut (.clk, .rst_n, .start, .rows, .cols, .busy, .done,
                  .idx_raddr, .vec_raddr, .ctr_raddr, .acc_clear, .acc_en,
                  .bin_sel, .mac_clear, .mac_en, .y_valid, .y_row);

  task automatic chk(bit ok, string what, int t);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("MISMATCH cycle %0d: %s", t, what);
    end
  endtask

  // Run R x C and compare every cycle until one cycle after done is due.
  task automatic run(int R, int C);
    int total, per;
    per   = C + K + 2;
    total = (R == 0 || C == 0) ? 1 : R * per + 1;
    @(negedge clk);
    start = 1'b1; rows = 10'(R); cols = 11'(C);
    @(negedge clk);
    start = 1'b0;
    for (int t = 1; t <= total + 1; t++) begin
      bit e_acc, e_mac, e_y, e_done, e_busy, in_acc, in_mac;
      int r, p, e_idx, e_vec, e_ctr, e_sel;
      // Start a run while busy: must be ignored.
      if (t == 3) begin start = 1'b1; rows = 10'd1; cols = 11'd1; end
      else start = 1'b0;
      #1;
      e_done = (t == total);
      e_busy = (R > 0 && C > 0) && (t <= R * per);
      r = (t - 1) / per;
      p = (t - 1) % per;
      in_acc = e_busy && (p < C);
      in_mac = e_busy && (p >= C) && (p < C + K);
      e_acc  = e_busy && (p >= 1) && (p <= C);
      e_mac  = e_busy && (p >= C + 1) && (p <= C + K);
      e_y    = e_busy && (p == C + K + 1);
      chk(done == e_done, "done", t);
      chk(busy == e_busy, "busy", t);
      chk(acc_en == e_acc, "acc_en", t);
      chk(mac_en == e_mac, "mac_en", t);
      chk(y_valid == e_y, "y_valid", t);
      if (in_acc) begin
        e_idx = r * C + p;
        e_vec = p;
        chk(idx_raddr == 20'(e_idx), $sformatf("idx_raddr %0d/%0d", idx_raddr, e_idx), t);
        chk(vec_raddr == 11'(e_vec), "vec_raddr", t);
      end
      if (in_mac) begin
        e_ctr = r * K + (p - C);
        chk(ctr_raddr == 14'(e_ctr), $sformatf("ctr_raddr %0d/%0d", ctr_raddr, e_ctr), t);
      end
      if (e_mac) begin
        e_sel = p - C - 1;
        chk(bin_sel == 4'(e_sel), "bin_sel", t);
      end
      if (e_y) begin
        chk(y_row == 10'(r), "y_row", t);
        chk(acc_clear && mac_clear, "clear at output", t);
      end else if (t != 0) begin
        chk(!acc_clear && !mac_clear, "no clear", t);
      end
      @(negedge clk);
    end
    start = 1'b0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run(1, 1);
    run(3, 5);
    run(2, 40);
    run(0, 7);
    run(4, 0);
    run(5, 17);
    // clear is also raised with the accepted start
    @(negedge clk);
    start = 1'b1; rows = 10'd1; cols = 11'd2;
    #1 chk(acc_clear && mac_clear, "clear at start", 0);
    @(negedge clk);
    start = 1'b0;
    repeat (40) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
