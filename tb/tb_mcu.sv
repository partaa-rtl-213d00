// tb_mcu - exhaustive self-checking testbench of the memory-control unit.
//
// For every active-partition code and every partition-visible address the
// physical address is compared with the rule: protected (bit N-2 set) ->
// {apf, low bits}; shared -> {00, low bits}. Also checks that no partition
// address can reach another partition's segment.
module tb_mcu;
  localparam int N = 12;
  int checks = 0, failures = 0;
  logic [1:0]   apf;
  logic [N-2:0] vaddr;
  logic [N-1:0] paddr, exp;
  mcu #(.N(N)) dut (.apf, .vaddr, .paddr);

  initial begin
    for (int a = 1; a < 4; a++) begin
      for (int v = 0; v < 2**(N-1); v++) begin
        apf = 2'(a); vaddr = (N-1)'(v);
        #1;
        exp[N-3:0]   = vaddr[N-3:0];
        exp[N-1:N-2] = (v >= 2**(N-2)) ? 2'(a) : 2'b00;
        checks++;
        if (paddr !== exp) begin
          failures++;
          if (failures < 10) $display("FAIL apf=%0d v=%h got %h exp %h", a, v, paddr, exp);
        end
        checks++;
        if (paddr[N-1:N-2] != 2'b00 && paddr[N-1:N-2] != 2'(a)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
