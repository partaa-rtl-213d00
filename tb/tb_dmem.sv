// tb_dmem - self-checking testbench of the dual-port data memory.
//
// Random writes and reads on both ports against a reference array kept in
// the testbench, including same-address collisions (port A wins) and reads
// of a word written by the other port.
module tb_dmem;
  localparam int N = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic         a_we, b_we;
  logic [N-1:0] a_addr, b_addr;
  logic [31:0]  a_wdata, b_wdata, a_rdata, b_rdata;
  logic [31:0]  ref_mem [2**N];
  dmem #(.N(N), .W(32)) dut (.clk, .a_we, .a_addr, .a_wdata, .a_rdata,
                             .b_we, .b_addr, .b_wdata, .b_rdata);

  initial begin
    a_we = 0; b_we = 0; a_addr = 0; b_addr = 0; a_wdata = 0; b_wdata = 0;
    // initialise everything through port A
    for (int i = 0; i < 2**N; i++) begin
      @(negedge clk); a_we = 1; a_addr = N'(i); a_wdata = 32'(i) * 7; ref_mem[i] = 32'(i) * 7;
    end
    @(negedge clk); a_we = 0;
    for (int i = 0; i < 2000; i++) begin
      a_addr  = N'($urandom_range(0, 2**N - 1));
      b_addr  = ($urandom_range(0, 7) == 0) ? a_addr : N'($urandom_range(0, 2**N - 1));
      a_we    = 1'($urandom_range(0, 1));
      b_we    = 1'($urandom_range(0, 1));
      a_wdata = $urandom;
      b_wdata = $urandom;
      #1;
      checks++;
      if (a_rdata !== ref_mem[a_addr] || b_rdata !== ref_mem[b_addr]) begin
        failures++;
        if (failures < 10) $display("FAIL read a[%0d]=%h/%h b[%0d]=%h/%h", a_addr, a_rdata,
                                    ref_mem[a_addr], b_addr, b_rdata, ref_mem[b_addr]);
      end
      @(negedge clk);
      if (b_we) ref_mem[b_addr] = b_wdata;
      if (a_we) ref_mem[a_addr] = a_wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
