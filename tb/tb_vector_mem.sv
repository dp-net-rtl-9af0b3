// tb_vector_mem: self-checking test of vector_mem at its default size. Every word is
// written with a value computed from its address by a hash, then every word
// is read back in a scrambled order and compared, checking the one-cycle read
// latency; writes and reads of the same cycle are also exercised (a read
// returns the old contents).
module tb_vector_mem;
  localparam int N  = 1728;
  localparam int AW = $clog2(1728);

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic          we = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [31:0] wdata = '0, rdata;
  int checks = 0, failures = 0;

  vector_mem dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  function automatic logic [31:0] pattern(int addr, int seed);
    logic [31:0] h;
    h = 32'(addr) * 32'h9E37_79B9 + 32'(seed) * 32'h85EB_CA6B;
    h = h ^ (h >> 15);
    return 32'(h);
  endfunction

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int i = 0; i < N; i++) begin
      we = 1'b1; waddr = AW'(i); wdata = pattern(i, 1);
      @(negedge clk);
    end
    we = 1'b0;
    // Read back in a scrambled order: address (i * 7919) mod N.
    for (int i = 0; i < N; i++) begin
      int a;
      a = int'((longint'(i) * 7919) % N);
      raddr = AW'(a);
      @(posedge clk); #1;
      checks++;
      if (rdata !== pattern(a, 1)) begin
        failures++;
        if (failures < 10) $display("MISMATCH addr %0d: got %h expected %h", a, rdata, pattern(a, 1));
      end
      @(negedge clk);
    end
    // Read and write the same address in one cycle: the old word is read.
    for (int i = 0; i < 64; i++) begin
      int a;
      a = int'($urandom_range(N - 1));
      we = 1'b1; waddr = AW'(a); raddr = AW'(a); wdata = pattern(a, 2);
      @(posedge clk); #1;
      checks++;
      if (rdata !== pattern(a, 1)) failures++;
      we = 1'b0;
      @(posedge clk); #1;
      checks++;
      if (rdata !== pattern(a, 2)) failures++;
      // restore
      we = 1'b1; wdata = pattern(a, 1);
      @(posedge clk); #1;
      we = 1'b0;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
