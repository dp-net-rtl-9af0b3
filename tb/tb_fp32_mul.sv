// tb_fp32_mul: self-checking test of the binary32 multiplier against the
// double precision reference of fp_ref_pkg. Directed cases cover zeros,
// infinities, NaN, zero times infinity, overflow, underflow and a product
// whose significand needs no normalisation; then 100,000 random pairs.
module tb_fp32_mul;
  import fp_ref_pkg::*;

  logic [31:0] a, b, y;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  fp32_mul dut (.a, .b, .y);

  task automatic check(logic [31:0] x, logic [31:0] z);
    logic [31:0] exp_y;
    a = x; b = z;
    #1;
    exp_y = ref_mul(x, z);
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("MISMATCH %h * %h: got %h expected %h", x, z, y, exp_y);
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
    check(32'h0000_0000, 32'h3F80_0000);
    check(32'h8000_0000, 32'h3F80_0000);
    check(32'h4060_0000, 32'h40E6_6666);   // 3.5 * 7.2
    check(32'h3F80_0000, 32'hBF80_0000);
    check(32'h3FFF_FFFF, 32'h3FFF_FFFF);   // product near 4, rounding carry
    check(32'h7F80_0000, 32'h0000_0000);   // inf * 0 = NaN
    check(32'h7F80_0000, 32'hBF80_0000);   // -inf
    check(32'h7FC0_0000, 32'h3F80_0000);
    check(32'h7F00_0000, 32'h7F00_0000);   // overflow
    check(32'h0100_0000, 32'h0100_0000);   // underflow, flushed
    for (int i = 0; i < 50000; i++) check(rand_f32(64, 190), rand_f32(64, 190));
    for (int i = 0; i < 50000; i++) check(rand_f32(1, 254), rand_f32(1, 254));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
