// tb_swcu - self-checking testbench of the partition scheduler.
//
// Two instances: budgets (3, 5, 2) and (4, 0, 6) (the second skips
// partition 2). A reference model in the testbench walks the same
// schedule; every cycle the active-partition flag and the part_switch pulse
// are compared with it. Also checks the window lengths exactly (the
// cycle-accurate switching), and that 'hold' forces 00 and restarts the
// round at partition 1.
module tb_swcu;
  logic clk = 0, rst_n = 0, hold = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam logic [2:0][31:0] BA = {32'd2, 32'd5, 32'd3};
  localparam logic [2:0][31:0] BB = {32'd6, 32'd0, 32'd4};

  logic [1:0] apf_a, apf_b;
  logic       sw_a, sw_b;
  swcu #(.BUDGET(BA)) dut_a (.clk, .rst_n, .hold, .apf(apf_a), .part_switch(sw_a));
  swcu #(.BUDGET(BB)) dut_b (.clk, .rst_n, .hold, .apf(apf_b), .part_switch(sw_b));

  // reference model state
  int pa, la, pb, lb;
  function automatic int nxt(int p, logic [2:0][31:0] b);
    int q = p;
    for (int i = 0; i < 3; i++) begin q = (q + 1) % 3; if (b[q] != 0) return q; end
    return p;
  endfunction

  task automatic model_reset();
    pa = 0; la = BA[0]; pb = 0; lb = BB[0];
  endtask

  task automatic check_now();
    checks++;
    if (apf_a !== 2'(pa + 1) || sw_a !== (la == int'(BA[pa]))) begin
      failures++; $display("FAIL a: apf=%0d exp=%0d sw=%0b", apf_a, pa + 1, sw_a);
    end
    checks++;
    if (apf_b !== 2'(pb + 1) || sw_b !== (lb == int'(BB[pb]))) begin
      failures++; $display("FAIL b: apf=%0d exp=%0d sw=%0b", apf_b, pb + 1, sw_b);
    end
  endtask

  task automatic model_step();
    if (la <= 1) begin pa = nxt(pa, BA); la = BA[pa]; end else la--;
    if (lb <= 1) begin pb = nxt(pb, BB); lb = BB[pb]; end else lb--;
  endtask

  int run_len, last;
  initial begin
    model_reset();
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 100; c++) begin
      check_now();
      @(negedge clk);
      model_step();
    end
    // measure the window length of partition 2 in instance a
    run_len = 0;
    while (apf_a != 2'd2) begin @(negedge clk); model_step(); end
    while (apf_a == 2'd2) begin run_len++; @(negedge clk); model_step(); end
    checks++;
    if (run_len != 5) begin failures++; $display("FAIL window len %0d", run_len); end
    // partition 2 of instance b never runs
    for (int c = 0; c < 40; c++) begin
      checks++;
      if (apf_b == 2'd2) failures++;
      check_now();
      @(negedge clk); model_step();
    end
    // hold forces 00
    hold = 1;
    for (int c = 0; c < 5; c++) begin
      #1;
      checks++;
      if (apf_a !== 2'b00 || apf_b !== 2'b00 || sw_a || sw_b) begin
        failures++; $display("FAIL hold apf=%0d/%0d", apf_a, apf_b);
      end
      @(negedge clk);
    end
    hold = 0; #1;
    model_reset();
    for (int c = 0; c < 30; c++) begin
      check_now();
      @(negedge clk); model_step();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
