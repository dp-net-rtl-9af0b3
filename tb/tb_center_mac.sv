// tb_center_mac: self-checking test of the center multiply-accumulate. Groups
// of 16 random (center, sum) pairs, one per cycle, are accumulated and the
// result compared after every step with the reference: product rounded to
// binary32, then added and rounded, in the order presented. Also checks
// reset, clear, clear over en, en low holding the value, and zero sums (an
// empty cluster) contributing nothing.
module tb_center_mac;
  import fp_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0, clear = 1'b0, en = 1'b0;
  logic [31:0] c = '0, s = '0, acc, model;
  int checks = 0, failures = 0;

  center_mac dut (.clk, .rst_n, .clear, .en, .c, .s, .acc);

  task automatic cmp(string what);
    checks++;
    if (acc !== model) begin
      failures++;
      if (failures < 10) $display("MISMATCH %s: got %h expected %h", what, acc, model);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    model = 32'h0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    #1 cmp("reset");
    for (int g = 0; g < 500; g++) begin
      clear = 1'b1;
      @(negedge clk);
      clear = 1'b0;
      model = 32'h0;
      cmp("clear");
      for (int k = 0; k < 16; k++) begin
        en = 1'b1;
        c = rand_f32(115, 135);
        s = ($urandom_range(7) == 0) ? 32'h0 : rand_f32(110, 145);
        @(negedge clk);
        model = ref_add(model, ref_mul(c, s));
        cmp("step");
      end
      en = 1'b0;
      c = rand_f32(115, 135); s = rand_f32(115, 135);
      @(negedge clk);
      cmp("hold");
    end
    en = 1'b1; clear = 1'b1;
    @(negedge clk);
    en = 1'b0; clear = 1'b0;
    model = 32'h0;
    cmp("clear+en");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
