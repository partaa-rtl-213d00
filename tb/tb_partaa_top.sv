// tb_partaa_top - end-to-end testbench of the whole multiprocessor at
// reduced partition budgets and a fast UART.
//
// All four processors are loaded through the load port while 'hold' is
// high. The programs form an avionics-like chain: a UART sample (signal 0)
// is read by processor 1 partition 1, which sends value+1 over the NoC to
// processor 2 partition 1 and raises a partition flag; processor 2
// partition 1 adds 2 and publishes the result in shared memory; processor 2
// partition 3 spins on processor 1's flag word (the synchronisation of the
// paper's flag example) and then copies the result. Processor 1 partition 2
// doubles a shared value in a subroutine (CALL/RET), partition 3 reads the
// global clock. Processors 3 and 4 send packet bursts three cycles apart to
// NI 10, which overload the hub and force router overruns and NI sample
// overwrites. Processor 2 partition 1 also writes each result to UART
// output signal 1. The testbench sends two UART messages and one framing error
// and pulses 'hold' in the middle of the run.
//
// Checked: every partition window lasts exactly its budget; nothing
// executes during 'hold' and execution restarts at partition 1; the final
// values of the chain (second UART value); the clock word equals the
// counter at the load; flag waits end only after the flag is set; packets
// arrive with the right sources; the messages decoded from the UART
// output carry the chain results; and every mechanism was observed at least
// once (a missing one is a failure).
module tb_partaa_top;
  localparam logic [3:0][2:0][31:0] BUD = {
    {32'd60, 32'd60, 32'd60}, {32'd60, 32'd60, 32'd60},
    {32'd40, 32'd40, 32'd40}, {32'd80, 32'd100, 32'd150}};
  localparam int UC = 8;
  localparam int T_X1 = 0, T_X2 = 600, T_HOLD = 1500, L_HOLD = 37, T_END = 3000;
  localparam int WATCHDOG = 20000;
  import partaa_pkg::*;
  logic clk = 0, rst_n = 0, hold = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [1:0]        ld_proc = 0;
  logic              ld_imem_we = 0, ld_dmem_we = 0;
  logic [11:0]       ld_addr = 0;
  logic [31:0]       ld_data = 0;
  logic              uart_rx = 1;
  logic [31:0]       proc_flags [N_PROC];
  logic [1:0]        apf [N_PROC];
  logic [63:0]       gclk;
  logic [N_PROC-1:0] ev_part_switch, ev_retire, ev_branch;
  logic [N_NI-1:0]   ev_rx_overwrite, ev_overrun;
  logic              ev_gs_grant, ev_be_grant, ev_uart_update, ev_uart_frame_err;
  logic              uart_tx, ev_uart_tx_done;

  partaa_top #(.BUDGET(BUD), .UART_CLKS(UC)) dut (.*);

  localparam int P = 11'h400;              // protected-region address bit
  localparam logic [31:0] X1 = 32'h0000_0100, X2 = 32'h0000_2000;

  // ------------------------------------------------------------ loading
  task automatic ld_i(int g, int k, int pc, logic [31:0] ins);
    ld_proc = 2'(g); ld_imem_we = 1; ld_addr = {2'(k), 10'(pc)}; ld_data = ins;
    @(negedge clk); ld_imem_we = 0;
  endtask
  task automatic ld_d(int g, int seg, int off, logic [31:0] v);
    ld_proc = 2'(g); ld_dmem_we = 1; ld_addr = {2'(seg), 10'(off)}; ld_data = v;
    @(negedge clk); ld_dmem_we = 0;
  endtask
  task automatic ld_idle(int g, int k);
    ld_i(g, k, 0, enc_j(OP_JMP, 0));
  endtask

  task automatic load_all();
    // the memories power up with unknown contents: clear the program areas
    for (int g = 0; g < N_PROC; g++)
      for (int k = 1; k <= N_PART; k++)
        for (int pc = 0; pc < 24; pc++) ld_i(g, k, pc, enc_r(OP_NOP, 0, 0, 0));
    // processor 1, partition 1: sample UART signal 0; when valid, send
    // value+1 to NI 3 (processor 2, partition 1), publish it in shared
    // memory and raise partition flag bit 0 (the "data valid" flag).
    ld_i(0, 1, 0,  enc_m(OP_LD, 1, 'h030));
    ld_i(0, 1, 1,  enc_m(OP_LD, 2, P | 'h100));
    ld_i(0, 1, 2,  enc_m(OP_LD, 4, P | 'h101));
    ld_i(0, 1, 3,  enc_r(OP_ADD, 3, 1, 2));
    ld_i(0, 1, 4,  enc_r(OP_OR, 5, 1, 1));
    ld_i(0, 1, 5,  enc_j(OP_BZ, 0));
    ld_i(0, 1, 8,  enc_m(OP_ST, 4, P | 'h001));
    ld_i(0, 1, 9,  enc_m(OP_ST, 3, P | 'h002));
    ld_i(0, 1, 10, enc_m(OP_ST, 3, 'h050));
    ld_i(0, 1, 11, enc_m(OP_ST, 2, P | 'h000));
    ld_i(0, 1, 12, enc_j(OP_JMP, 0));
    ld_d(0, 1, 'h100, 1);
    ld_d(0, 1, 'h101, 3);
    // processor 1, partition 2: read the shared value, double it in a
    // subroutine (CALL/RET through the stack), store it; try to write a
    // read-only flag address.
    ld_i(0, 2, 0,  enc_m(OP_LD, 1, 'h050));
    ld_i(0, 2, 3,  enc_j(OP_CALL, 20));
    ld_i(0, 2, 6,  enc_m(OP_ST, 6, P | 'h180));
    ld_i(0, 2, 7,  enc_m(OP_ST, 1, 'h012));
    ld_i(0, 2, 8,  enc_j(OP_JMP, 0));
    ld_i(0, 2, 20, enc_r(OP_ADD, 6, 1, 1));
    ld_i(0, 2, 21, enc_j(OP_RET, 0));
    ld_d(0, 0, 'h012, 32'h0BAD_0BAD);
    // processor 1, partition 3: read the global clock into protected memory
    ld_i(0, 3, 0,  enc_m(OP_LD, 1, 'h000));
    ld_i(0, 3, 1,  enc_m(OP_LD, 2, 'h004));
    ld_i(0, 3, 3,  enc_m(OP_ST, 1, P | 'h180));
    ld_i(0, 3, 4,  enc_m(OP_ST, 2, P | 'h181));
    ld_i(0, 3, 5,  enc_j(OP_JMP, 0));
    // processor 2, partition 1: wait for a fresh sample from channel 0,
    // add 2, publish in shared memory and keep a protected copy.
    ld_i(1, 1, 0,  enc_m(OP_LD, 1, P | 'h003));
    ld_i(1, 1, 1,  enc_m(OP_LD, 2, P | 'h100));
    ld_i(1, 1, 2,  enc_m(OP_LD, 5, P | 'h101));
    ld_i(1, 1, 3,  enc_r(OP_AND, 3, 1, 2));
    ld_i(1, 1, 4,  enc_j(OP_BZ, 0));
    ld_i(1, 1, 7,  enc_m(OP_LD, 4, P | 'h010));
    ld_i(1, 1, 10, enc_r(OP_ADD, 6, 4, 5));
    ld_i(1, 1, 12, enc_m(OP_ST, 6, 'h060));
    ld_i(1, 1, 13, enc_m(OP_ST, 6, P | 'h180));
    ld_i(1, 1, 14, enc_j(OP_JMP, 0));
    ld_i(1, 1, 15, enc_m(OP_ST, 6, 'h039));    // delay slot: UART output 1
    ld_d(1, 1, 'h100, 1);
    ld_d(1, 1, 'h101, 2);
    ld_idle(1, 2);
    // processor 2, partition 3: wait until processor 1 raises partition-1
    // flag bit 0 (read from the shared region), then copy the shared value
    // and the clock.
    ld_i(1, 3, 0,  enc_m(OP_LD, 1, 'h008));
    ld_i(1, 3, 1,  enc_m(OP_LD, 2, P | 'h100));
    ld_i(1, 3, 3,  enc_r(OP_AND, 3, 1, 2));
    ld_i(1, 3, 4,  enc_j(OP_BZ, 0));
    ld_i(1, 3, 7,  enc_m(OP_LD, 4, 'h060));
    ld_i(1, 3, 8,  enc_m(OP_LD, 5, 'h000));
    ld_i(1, 3, 10, enc_m(OP_ST, 4, P | 'h180));
    ld_i(1, 3, 11, enc_m(OP_ST, 5, P | 'h181));
    ld_i(1, 3, 12, enc_j(OP_JMP, 0));
    ld_d(1, 3, 'h100, 1);
    // processors 3 and 4, partition 1: bursts of packets three cycles
    // apart to NI 10; partitions 2 and 3 idle.
    for (int g = 2; g < 4; g++) begin
      ld_i(g, 1, 0,  enc_m(OP_LD, 1, P | 'h100));
      ld_i(g, 1, 1,  enc_m(OP_LD, 2, P | 'h101));
      ld_i(g, 1, 2,  enc_m(OP_LD, 3, P | 'h102));
      ld_i(g, 1, 3,  enc_m(OP_ST, 1, P | 'h001));
      for (int j = 0; j < 4; j++) begin
        ld_i(g, 1, 4 + 3 * j, enc_m(OP_ST, 2, P | 'h002));
        ld_i(g, 1, 5 + 3 * j, enc_r(OP_ADD, 2, 2, 3));
      end
      ld_i(g, 1, 15, enc_j(OP_JMP, 4));
      ld_d(g, 1, 'h100, 10);
      ld_d(g, 1, 'h101, 32'h1000_0000 * g);
      ld_d(g, 1, 'h102, 1);
      ld_idle(g, 2);
      ld_idle(g, 3);
    end
  endtask

  // ------------------------------------------------------------ UART line
  task automatic send_byte(logic [7:0] b, logic stop = 1'b1);
    uart_rx = 0; repeat (UC) @(negedge clk);
    for (int i = 0; i < 8; i++) begin uart_rx = b[i]; repeat (UC) @(negedge clk); end
    uart_rx = stop; repeat (UC) @(negedge clk);
    uart_rx = 1;
  endtask
  task automatic send_msg(logic [7:0] id, logic [31:0] v);
    send_byte(id);
    for (int i = 0; i < 4; i++) send_byte(v[8*i +: 8]);
  endtask

  // ------------------------------------------------------------ monitors
  int cyc = -1;
  int n_switch, n_retire, n_branch, n_rxow, n_overrun, n_gs, n_be, n_uart, n_ferr;
  int n_hold_cyc, n_sync, n_wait, n_call, n_ret, n_dlv3, n_dlv10, n_clk_rd;
  int run_len [N_PROC];
  logic [1:0] run_apf [N_PROC];
  logic [63:0] clk_seen, clk_at_ld;
  logic first_sync_ok = 1'b1;
  // UART output decoder: messages {id, value} from the serial output
  int n_utx = 0;
  logic [7:0]  utx_id  [$];
  logic [31:0] utx_val [$];
  initial begin : utx_decoder
    logic [39:0] m;
    forever begin
      @(negedge clk);
      if (rst_n && uart_tx === 1'b0) begin
        for (int k = 0; k < 5; k++) begin
          if (k > 0) while (uart_tx !== 1'b0) @(negedge clk);
          repeat (UC / 2) @(negedge clk);
          for (int i = 0; i < 8; i++) begin
            repeat (UC) @(negedge clk);
            m[8 * k + i] = uart_tx;
          end
          repeat (UC) @(negedge clk);
        end
        utx_id.push_back(m[7:0]);
        utx_val.push_back(m[39:8]);
      end
    end
  end
  always @(posedge clk) if (rst_n) begin
    if (!hold) cyc <= cyc + 1;
    n_utx     += int'(ev_uart_tx_done);
    n_switch  += $countones(ev_part_switch);
    n_retire  += $countones(ev_retire);
    n_branch  += $countones(ev_branch);
    n_rxow    += $countones(ev_rx_overwrite);
    n_overrun += $countones(ev_overrun);
    n_gs      += int'(ev_gs_grant);
    n_be      += int'(ev_be_grant);
    n_uart    += int'(ev_uart_update);
    n_ferr    += int'(ev_uart_frame_err);
    if (hold) begin
      n_hold_cyc++;
      checks++;
      if (ev_retire != 0 || apf[0] != 0 || apf[1] != 0 || apf[2] != 0 || apf[3] != 0) begin
        failures++; $display("FAIL execution during hold");
      end
    end
    // partition windows: every completed window lasts exactly its budget
    for (int g = 0; g < N_PROC; g++) begin
      if (hold) begin
        run_len[g] = 0; run_apf[g] = 0;
      end else if (apf[g] == run_apf[g]) run_len[g]++;
      else begin
        if (run_apf[g] != 0) begin
          checks++;
          if (run_len[g] != int'(BUD[g][run_apf[g]-1])) begin
            failures++;
            $display("FAIL proc %0d partition %0d window %0d cycles, budget %0d",
                     g + 1, run_apf[g], run_len[g], BUD[g][run_apf[g]-1]);
          end
        end
        run_apf[g] = apf[g]; run_len[g] = 1;
      end
    end
    // stack use on processor 1, partition 2
    if (dut.g_pe[0].u_pe.u_core.br_taken && apf[0] == 2) begin
      if (dut.g_pe[0].u_pe.u_core.s_we) n_call++;
      else if (dut.g_pe[0].u_pe.u_core.e.op == OP_RET) n_ret++;
    end
    // clock read by processor 1, partition 3 (load of clock_L in M)
    if (apf[0] == 3 && dut.g_pe[0].u_pe.u_core.d_re && dut.g_pe[0].u_pe.u_core.d_addr == 0) begin
      clk_at_ld = gclk; n_clk_rd++;
    end
    // ... and the store of that reading two instructions later
    if (apf[0] == 3 && dut.g_pe[0].u_pe.u_core.d_we &&
        dut.g_pe[0].u_pe.u_core.d_addr == VADDR_W'(P | 'h180)) begin
      checks++;
      if (dut.g_pe[0].u_pe.u_core.d_wdata !== clk_at_ld[31:0]) begin
        failures++; $display("FAIL clock_L stored %h, clock was %h", dut.g_pe[0].u_pe.u_core.d_wdata, clk_at_ld);
      end
      clk_seen = clk_at_ld;
    end
    // Fig. 6 synchronisation: processor 2 partition 3 spins on the flag of
    // processor 1 partition 1, and passes only once it is set
    if (apf[1] == 3 && dut.g_pe[1].u_pe.u_core.br_taken &&
        dut.g_pe[1].u_pe.u_core.e.op == OP_BZ) n_wait++;
    if (apf[1] == 3 && dut.g_pe[1].u_pe.u_core.d_we &&
        dut.g_pe[1].u_pe.u_core.d_addr == VADDR_W'(P | 'h181)) begin
      n_sync++;
      if (proc_flags[0][0] !== 1'b1) first_sync_ok = 1'b0;
    end
    // NoC deliveries
    if (dut.rx_v[3]) begin
      n_dlv3++;
      checks++;
      if (dut.rx_p[3].src != 0 || (dut.rx_p[3].data != X1 + 1 && dut.rx_p[3].data != X2 + 1)) begin
        failures++; $display("FAIL delivery to NI 3: %p", dut.rx_p[3]);
      end
    end
    if (dut.rx_v[10]) begin
      n_dlv10++;
      checks++;
      if (dut.rx_p[10].src != 6 && dut.rx_p[10].src != 9) begin
        failures++; $display("FAIL delivery to NI 10: %p", dut.rx_p[10]);
      end
    end
  end

  task automatic need(int n, string what);
    checks++;
    $display("mechanism %-28s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
  endtask
  task automatic expect_eq(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s = %h exp %h", what, got, exp); end
  endtask

  initial begin
    n_switch = 0; n_retire = 0; n_branch = 0; n_rxow = 0; n_overrun = 0;
    n_gs = 0; n_be = 0; n_uart = 0; n_ferr = 0; n_hold_cyc = 0; n_sync = 0;
    n_wait = 0; n_call = 0; n_ret = 0; n_dlv3 = 0; n_dlv10 = 0; n_clk_rd = 0;
    for (int g = 0; g < N_PROC; g++) begin run_len[g] = 0; run_apf[g] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_all();
    repeat (3) @(negedge clk);
    hold = 0;
    #1;
    checks++;
    if (apf[0] != 1 || apf[1] != 1 || apf[2] != 1 || apf[3] != 1) begin
      failures++; $display("FAIL start is not partition 1");
    end
    fork
      begin
        repeat (T_X1) @(negedge clk);
        send_msg(8'd0, X1);
        send_byte(8'd0, 1'b0);            // framing error
        repeat (T_X2 - T_X1 - 60 * UC) @(negedge clk);
        send_msg(8'd0, X2);
      end
      begin
        repeat (T_HOLD) @(negedge clk);
        hold = 1;
        repeat (L_HOLD) @(negedge clk);
        hold = 0;
        #1;
        checks++;
        if (apf[0] != 1 || apf[1] != 1 || apf[2] != 1 || apf[3] != 1) begin
          failures++; $display("FAIL hold release does not restart at partition 1");
        end
      end
    join
    repeat (T_END - T_HOLD - L_HOLD) @(negedge clk);
    hold = 1;                              // freeze, then inspect memories
    @(negedge clk);
    // ---------------- end-to-end results
    expect_eq(dut.g_pe[0].u_pe.u_dmem.mem[{2'd0, 10'h050}], X2 + 1, "proc1 shared value");
    expect_eq(dut.g_pe[0].u_pe.u_dmem.mem[{2'd2, 10'h180}], 2 * (X2 + 1), "proc1 part2 CALL result");
    expect_eq(dut.g_pe[0].u_pe.u_dmem.mem[{2'd0, 10'h012}], 32'h0BAD_0BAD, "read-only flag address");
    expect_eq(dut.g_pe[1].u_pe.u_dmem.mem[{2'd0, 10'h060}], X2 + 3, "proc2 shared value");
    expect_eq(dut.g_pe[1].u_pe.u_dmem.mem[{2'd1, 10'h180}], X2 + 3, "proc2 part1 value");
    expect_eq(dut.g_pe[1].u_pe.u_dmem.mem[{2'd3, 10'h180}], X2 + 3, "proc2 part3 value");
    expect_eq(dut.g_pe[0].u_pe.u_dmem.mem[{2'd3, 10'h180}], clk_seen[31:0], "clock_L read");
    expect_eq(dut.g_pe[0].u_pe.u_dmem.mem[{2'd3, 10'h181}], 0, "clock_H read");
    expect_eq(proc_flags[0], {2'b00, 10'd0, 10'd0, 10'd1}, "proc1 flag word");
    expect_eq({31'd0, first_sync_ok}, 1, "sync only after flag");
    // UART output: every message is signal 1 carrying a chain result, the
    // last one the result of the second input; one message per tx_done
    expect_eq(utx_id.size(), n_utx, "UART output messages decoded");
    for (int i = 0; i < utx_id.size(); i++) begin
      expect_eq(utx_id[i], 1, "UART output id");
      checks++;
      if (utx_val[i] !== X1 + 3 && utx_val[i] !== X2 + 3) begin
        failures++; $display("FAIL UART output value %h", utx_val[i]);
      end
    end
    if (utx_val.size() > 0) expect_eq(utx_val[utx_val.size() - 1], X2 + 3, "last UART output");
    // ---------------- every mechanism must have happened
    need(n_switch,  "partition switch");
    need(n_retire,  "instruction retired");
    need(n_branch,  "taken branch");
    need(n_call,    "CALL (stack push)");
    need(n_ret,     "RET (stack pop)");
    need(n_clk_rd,  "global clock read");
    need(n_hold_cyc, "hold (no partition)");
    need(n_wait,    "flag wait (spin)");
    need(n_sync,    "flag synchronisation");
    need(n_gs,      "NoC guaranteed-slot grant");
    need(n_be,      "NoC best-effort grant");
    need(n_dlv3,    "NoC delivery to NI 3");
    need(n_dlv10,   "NoC delivery to NI 10");
    need(n_overrun, "router overrun");
    need(n_rxow,    "NI sample overwritten");
    need(n_uart,    "UART sample update");
    need(n_ferr,    "UART framing error");
    need(n_utx,     "UART output message");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
