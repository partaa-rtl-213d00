// tb_global_clock - self-checking testbench of the 64-bit global clock.
//
// Checks that the count is 0 after reset, advances by exactly one per
// clock cycle, and carries from the low into the high word (the carry is
// reached by forcing the counter near 2**32 and releasing it).
module tb_global_clock;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [63:0] count, prev;
  global_clock dut (.clk, .rst_n, .count);

  initial begin
    repeat (2) @(negedge clk);
    checks++; if (count !== 64'd0) failures++;
    rst_n = 1;
    prev = count;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      checks++;
      if (count !== prev + 64'd1) begin failures++; $display("FAIL %0d after %0d", count, prev); end
      prev = count;
    end
    checks++; if (count !== 64'd200) failures++;
    // low-to-high carry
    force dut.count = 64'h0000_0000_FFFF_FFFE;
    @(posedge clk); #1 release dut.count;
    @(negedge clk);
    checks++; if (count !== 64'h0000_0000_FFFF_FFFE) failures++;
    @(negedge clk);
    checks++; if (count !== 64'h0000_0000_FFFF_FFFF) begin failures++; $display("FAIL %h", count); end
    @(negedge clk);
    checks++; if (count !== 64'h0000_0001_0000_0000) begin failures++; $display("FAIL carry %h", count); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
