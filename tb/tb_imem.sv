// tb_imem - self-checking testbench of the instruction memory.
//
// Loads a pseudo-random pattern through the load port into all four
// segments, then reads every word back on the fetch port and compares it
// with the same pattern recomputed (word = hash of its address).
module tb_imem;
  localparam int PC_W = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic              ld_we;
  logic [PC_W+1:0]   ld_addr, raddr;
  logic [31:0]       ld_data, rdata;
  imem #(.PC_W(PC_W)) dut (.clk, .ld_we, .ld_addr, .ld_data, .raddr, .rdata);

  function automatic logic [31:0] pat(int a);
    return 32'(a) * 32'h9E37_79B9 ^ 32'h5A5A_0F0F;
  endfunction

  initial begin
    ld_we = 0; ld_addr = 0; ld_data = 0; raddr = 0;
    @(negedge clk);
    for (int a = 0; a < 2**(PC_W+2); a++) begin
      ld_we = 1; ld_addr = (PC_W+2)'(a); ld_data = pat(a);
      @(negedge clk);
    end
    ld_we = 0;
    for (int a = 0; a < 2**(PC_W+2); a++) begin
      raddr = (PC_W+2)'(a);
      #1;
      checks++;
      if (rdata !== pat(a)) begin failures++; if (failures < 10) $display("FAIL %0d", a); end
    end
    // an overwrite of one word leaves its neighbours
    @(negedge clk); ld_we = 1; ld_addr = 5; ld_data = 32'hDEAD_BEEF;
    @(negedge clk); ld_we = 0;
    raddr = 5; #1; checks++; if (rdata !== 32'hDEAD_BEEF) failures++;
    raddr = 4; #1; checks++; if (rdata !== pat(4)) failures++;
    raddr = 6; #1; checks++; if (rdata !== pat(6)) failures++;
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
