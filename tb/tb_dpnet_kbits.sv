// tb_dpnet_kbits: the multiplier with 1-, 2- and 3-bit cluster indices
// (K = 2, 4 and 8 centers per row), the codebook sizes of the 2- and 3-bit
// compressed networks, next to the 4-bit default covered elsewhere. The K = 2
// case also runs the 9-weight storage-format example and compares it with
// the dense dot product. Three instances run in parallel; their counts are
// summed.
module tb_dpnet_kbits;
  logic f2, f4, f8;
  int c2, c4, c8, e2, e4, e8;
  int checks, failures;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  dpnet_kcase #(.K(2), .MR(4), .MC(40), .NRUN(10), .FIG1(1'b1)) u_k2 (.finished(f2), .checks(c2), .failures(e2));
  dpnet_kcase #(.K(4), .MR(6), .MC(48), .NRUN(12)) u_k4 (.finished(f4), .checks(c4), .failures(e4));
  dpnet_kcase #(.K(8), .MR(5), .MC(64), .NRUN(12)) u_k8 (.finished(f8), .checks(c8), .failures(e8));

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c2 + c4 + c8, e2 + e4 + e8 + 1);
    $finish;
  end

  initial begin
    #1;
    wait (f2 && f4 && f8);
    checks   = c2 + c4 + c8;
    failures = e2 + e4 + e8;
    $display("K=2: %0d checks, K=4: %0d checks, K=8: %0d checks", c2, c4, c8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
