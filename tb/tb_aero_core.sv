// tb_aero_core - self-checking testbench of the partitioned AEro pipeline.
//
// The testbench supplies the instruction memory (one segment per
// partition), a data memory that maps addresses like the MCU, and the stack
// memory, and plays the SwCU by driving apf. Every partition runs the same
// program on its own constants: a counted loop (ADD, SUB, BNZ with two
// delay slots), a CALL/RET pair, and register-indirect STX/LDX. The
// results, worked out here from the constants, must appear in memory:
//   [0x200] = N(N+1)/2   [0x201] = 2A   [0x202] = N(N+1)/2 + A
//   [0x203] = 2 * 0x700 (a result read by the second instruction after it)
// Phase 1 runs partition 1 alone and checks the cycle-exact timing: one
// instruction retires per cycle after a 3-cycle fill, and the store at
// program position 5+5N leaves M in cycle 5+5N+3. Phase 2 runs all three
// partitions interleaved with random window lengths of 1 to 9 cycles and
// checks that every partition still produces its exact results, i.e. that
// the state of an inactive partition stays frozen. Phase 3 checks that
// apf = 00 stops everything.
module tb_aero_core;
  import partaa_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [1:0]          apf;
  logic [IMEM_AW-1:0]  imem_addr;
  logic [31:0]         imem_rdata;
  logic                d_re, d_we, s_we, retire, br_taken;
  logic [VADDR_W-1:0]  d_addr;
  logic [DATA_W-1:0]   d_wdata, d_rdata, s_wdata, s_rdata;
  logic [OFF_W-1:0]    s_off;

  aero_core dut (.*);

  logic [31:0] im  [2**IMEM_AW];
  logic [31:0] dm  [2**DMEM_AW];
  logic [DMEM_AW-1:0] pa, pb;
  assign imem_rdata = im[imem_addr];
  assign pa = d_addr[VADDR_W-1] ? {apf, d_addr[OFF_W-1:0]} : {2'b00, d_addr[OFF_W-1:0]};
  assign pb = {apf, s_off};
  assign d_rdata = dm[pa];
  assign s_rdata = dm[pb];
  always @(posedge clk) if (rst_n) begin
    if (d_we) dm[pa] <= d_wdata;
    if (s_we) dm[pb] <= s_wdata;
  end

  localparam int P = 11'h400;   // protected-region bit
  function automatic int nval(int k); return 5 + 3 * k; endfunction
  function automatic int aval(int k); return 100 * k; endfunction

  task automatic load_program(int k);
    logic [31:0] prog [64];
    for (int i = 0; i < 64; i++) prog[i] = enc_r(OP_NOP, 0, 0, 0);
    prog[0]  = enc_m(OP_LD, 1, P | 'h100);
    prog[1]  = enc_m(OP_LD, 2, P | 'h101);
    prog[2]  = enc_m(OP_LD, 3, P | 'h102);
    prog[3]  = enc_m(OP_LD, 4, P | 'h103);
    prog[5]  = enc_r(OP_ADD, 1, 1, 3);
    prog[6]  = enc_r(OP_SUB, 3, 3, 2);
    prog[7]  = enc_j(OP_BNZ, 5);
    prog[10] = enc_m(OP_ST, 1, P | 'h200);
    prog[11] = enc_j(OP_CALL, 40);
    prog[14] = enc_m(OP_ST, 5, P | 'h201);
    prog[15] = enc_m(OP_LD, 6, P | 'h104);
    prog[17] = enc_r(OP_ADD, 10, 6, 6);        // result used two slots later
    prog[18] = enc_r(OP_STX, 0, 6, 1);
    prog[19] = enc_m(OP_ST, 10, P | 'h203);
    prog[21] = enc_r(OP_LDX, 7, 6, 0);
    prog[24] = enc_r(OP_ADD, 7, 7, 4);
    prog[27] = enc_m(OP_ST, 7, P | 'h202);
    prog[28] = enc_j(OP_JMP, 28);
    prog[40] = enc_r(OP_ADD, 5, 4, 4);
    prog[41] = enc_j(OP_RET, 0);
    for (int i = 0; i < 64; i++) im[{2'(k), PC_W'(i)}] = prog[i];
    // constants in the protected region of partition k
    dm[{2'(k), 10'h100}] = 0;
    dm[{2'(k), 10'h101}] = 1;
    dm[{2'(k), 10'h102}] = nval(k);
    dm[{2'(k), 10'h103}] = aval(k);
    dm[{2'(k), 10'h104}] = P | 'h300;
    for (int a = 'h200; a < 'h204; a++) dm[{2'(k), 10'(a)}] = 32'hFFFF_FFFF;
  endtask

  task automatic check_results(int k, string tag);
    int n, s;
    n = nval(k); s = n * (n + 1) / 2;
    checks++;
    if (dm[{2'(k), 10'h200}] !== s || dm[{2'(k), 10'h201}] !== 2 * aval(k) ||
        dm[{2'(k), 10'h202}] !== s + aval(k) || dm[{2'(k), 10'h300}] !== s ||
        dm[{2'(k), 10'h203}] !== 2 * (P | 'h300)) begin
      failures++;
      $display("FAIL %s partition %0d: %0d %0d %0d exp %0d %0d %0d", tag, k,
               dm[{2'(k), 10'h200}], dm[{2'(k), 10'h201}], dm[{2'(k), 10'h202}],
               s, 2 * aval(k), s + aval(k));
    end
  endtask

  int retired, cyc, st_cycle, n_br;
  always @(posedge clk) if (rst_n && br_taken) n_br++;

  initial begin
    n_br = 0;
    for (int i = 0; i < 2**IMEM_AW; i++) im[i] = '0;
    for (int i = 0; i < 2**DMEM_AW; i++) dm[i] = '0;
    for (int k = 1; k <= 3; k++) load_program(k);
    apf = 2'b01;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // ---- phase 1: partition 1 alone, cycle-exact timing
    retired = 0; st_cycle = -1;
    for (cyc = 0; cyc < 300; cyc++) begin
      #1;
      if (retire) retired++;
      if (d_we && d_addr == VADDR_W'(P | 'h200) && st_cycle < 0) st_cycle = cyc;
      if (cyc == 20) begin
        checks++;
        if (retired != 21 - 3) begin failures++; $display("FAIL retire count %0d", retired); end
      end
      @(negedge clk);
    end
    checks++;
    if (st_cycle != 5 + 5 * nval(1) + 3) begin
      failures++; $display("FAIL store cycle %0d exp %0d", st_cycle, 5 + 5 * nval(1) + 3);
    end
    check_results(1, "solo");
    // ---- phase 2: reset, all partitions interleaved
    rst_n = 0;
    for (int k = 1; k <= 3; k++) load_program(k);
    @(negedge clk); rst_n = 1;
    for (int w = 0; w < 400; w++) begin
      apf = 2'($urandom_range(1, 3));
      repeat ($urandom_range(1, 9)) @(negedge clk);
    end
    for (int k = 1; k <= 3; k++) check_results(k, "interleaved");
    // ---- phase 3: apf = 00 freezes the core
    apf = 2'b00;
    dm[{2'd1, 10'h200}] = 32'h1234_5678;
    repeat (20) @(negedge clk);
    checks++;
    if (retire || d_we || s_we || dm[{2'd1, 10'h200}] !== 32'h1234_5678) begin
      failures++; $display("FAIL core not frozen with apf=00");
    end
    checks++; if (n_br == 0) failures++;
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
