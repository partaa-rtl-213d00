// tb_proc_flags - self-checking testbench of the processor flag unit.
//
// Random stores from the three partitions: only the 10 LSBs of the word
// are kept, only the writing partition's field changes, the active-
// partition flag is bits 31:30 and partition 1..3 fields sit in bits 9:0,
// 19:10 and 29:20. A store with segment 00 changes nothing.
module tb_proc_flags;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [1:0]  apf, wr_part;
  logic        we;
  logic [31:0] wdata, flags;
  logic [29:0] part_flags;
  logic [9:0]  m [3];
  proc_flags dut (.clk, .rst_n, .apf, .we, .wr_part, .wdata, .part_flags, .flags);

  initial begin
    apf = 0; we = 0; wr_part = 0; wdata = 0;
    m[0] = 0; m[1] = 0; m[2] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      apf     = 2'($urandom_range(0, 3));
      we      = 1'($urandom_range(0, 1));
      wr_part = 2'($urandom_range(0, 3));
      wdata   = $urandom;
      @(negedge clk);
      if (we && wr_part != 0) m[wr_part - 1] = wdata[9:0];
      checks++;
      if (flags !== {apf, m[2], m[1], m[0]}) begin
        failures++;
        if (failures < 10) $display("FAIL flags %h exp %h", flags, {apf, m[2], m[1], m[0]});
      end
      checks++;
      if (part_flags !== {m[2], m[1], m[0]}) failures++;
    end
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
