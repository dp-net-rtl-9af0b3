// tb_fp32_add: self-checking test of the binary32 adder against the double
// precision reference of fp_ref_pkg. Directed cases cover signed zeros,
// infinities, NaN, exact cancellation, carry-out, rounding ties and large
// exponent differences; then 50,000 random pairs with close exponents
// (cancellation and alignment) and 50,000 with any normal exponent.
module tb_fp32_add;
  import fp_ref_pkg::*;

  logic [31:0] a, b, y;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  fp32_add dut (.a, .b, .y);

  task automatic check(logic [31:0] x, logic [31:0] z);
    logic [31:0] exp_y;
    a = x; b = z;
    #1;
    exp_y = ref_add(x, z);
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("MISMATCH %h + %h: got %h expected %h", x, z, y, exp_y);
    end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(32'h0000_0000, 32'h0000_0000);
    check(32'h8000_0000, 32'h8000_0000);
    check(32'h8000_0000, 32'h0000_0000);
    check(32'h3F80_0000, 32'h0000_0000);   // 1 + 0
    check(32'h0000_0000, 32'hC060_0000);   // 0 + -3.5
    check(32'h3F80_0000, 32'hBF80_0000);   // 1 - 1 = +0
    check(32'h4060_0000, 32'h40E6_6666);   // 3.5 + 7.2
    check(32'h3F80_0000, 32'h3F80_0000);   // carry out
    check(32'h3F80_0000, 32'h3380_0000);   // tie to even, stays
    check(32'h3F80_0001, 32'h3380_0000);   // tie to even, rounds up
    check(32'h3F80_0000, 32'hB380_0000);   // 1 - 2^-24
    check(32'h3F80_0000, 32'h0080_0000);   // huge exponent difference
    check(32'h3F80_0000, 32'h8080_0000);
    check(32'h7F7F_FFFF, 32'h7F7F_FFFF);   // overflow to infinity
    check(32'h7F80_0000, 32'h3F80_0000);
    check(32'h7F80_0000, 32'hFF80_0000);   // inf - inf = NaN
    check(32'h7FC0_0000, 32'h3F80_0000);
    check(32'h0080_0001, 32'h8080_0000);   // result subnormal: flushed
    for (int i = 0; i < 50000; i++) begin
      logic [31:0] x;
      x = rand_f32(100, 150);
      check(x, {1'($urandom), 8'(int'(x[30:23]) + int'($urandom_range(6)) - 3), 23'($urandom)});
    end
    for (int i = 0; i < 50000; i++) check(rand_f32(1, 254), rand_f32(1, 254));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
