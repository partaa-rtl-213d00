// tb_aero_pe - self-checking testbench of one processing element.
//
// Programs and constants are written through the load port while 'hold'
// is high; releasing 'hold' starts partition 1 (budgets 60 cycles each).
// Partition 1 sets its flag, writes shared and protected memory, sends a
// packet through its NI, reads the global clock, the processor flags, a
// UART sampling buffer and an NI sampling buffer, and tries to write a
// read-only flag address. Partition 2 reads what partition 1 shared, reads
// its own protected word at the same address partition 1 wrote, and reads
// the flag word. Partition 3 sets its flag, queues a UART output sample
// (shared 0x3B = signal 3) and reads the pending bit back. Checked afterwards:
//   * isolation: the same protected address holds different words for
//     partitions 1 and 2; the shared word is seen by both;
//   * flags: fields and active-partition bits as read by software, and the
//     exported 32-bit word; a write to a flag address changes nothing;
//   * clock: partition 1 reads exactly the count of the cycle its load
//     passes M (cycle 13 after start: the clock was 1000 at start);
//   * NoC: exactly one packet {dest 7, src 0, data} leaves NI 0, TX_LAT-1
//     cycles after the store passes M; an injected packet is read back
//     with its fresh bit;
//   * UART output: exactly one slot write {id 3, value}, the pending bit
//     reads back as 1, and the memory word under the address is untouched;
//   * hold: apf = 00 and no execution while loading.
module tb_aero_pe;
  import partaa_pkg::*;
  logic clk = 0, rst_n = 0, hold = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic              ld_imem_we = 0, ld_dmem_we = 0;
  logic [11:0]       ld_addr = 0;
  logic [31:0]       ld_data = 0;
  logic [63:0]       gclk;
  logic [31:0]       all_flags [N_PROC];
  logic [31:0]       uart_buf  [N_UART_SIG];
  logic [31:0]       flags;
  logic [2:0]        ni_tx_valid, ni_rx_valid, ni_overwrite;
  pkt_t              ni_tx_pkt [3], ni_rx_pkt [3];
  logic [1:0]        apf;
  logic              part_switch, retire, br_taken;
  logic              uart_tx_we, uart_tx_pend;
  logic [7:0]        uart_tx_id;
  logic [31:0]       uart_tx_data;

  aero_pe #(.PE_ID(0), .BUDGET({32'd60, 32'd60, 32'd60})) dut (.*);

  assign all_flags[0] = flags;
  assign all_flags[1] = 32'h1111_1111;
  assign all_flags[2] = 32'h2222_2222;
  assign all_flags[3] = 32'h3333_3333;
  for (genvar i = 0; i < N_UART_SIG; i++) begin : g_u
    assign uart_buf[i] = 32'hABC0_0000 + i;
  end

  localparam int P = 11'h400;
  localparam logic [31:0] V1 = 32'h0000_1111, V2 = 32'h0000_5555;

  task automatic ld_i(int k, int pc, logic [31:0] ins);
    ld_imem_we = 1; ld_addr = {2'(k), 10'(pc)}; ld_data = ins;
    @(negedge clk); ld_imem_we = 0;
  endtask
  task automatic ld_d(int seg, int off, logic [31:0] v);
    ld_dmem_we = 1; ld_addr = {2'(seg), 10'(off)}; ld_data = v;
    @(negedge clk); ld_dmem_we = 0;
  endtask

  int cyc = -1, n_tx = 0, tx_cyc = -1, st_cyc = -1;
  pkt_t txp;
  always @(posedge clk) begin
    if (rst_n && !hold) cyc <= cyc + 1;
    if (rst_n && ni_tx_valid[0]) begin n_tx++; txp = ni_tx_pkt[0]; tx_cyc = cyc; end
    if (rst_n && (ni_tx_valid[1] || ni_tx_valid[2])) n_tx += 100;
  end
  // UART output slot model: pending from the cycle after a write
  int n_utx = 0;
  logic [7:0]  utx_id;
  logic [31:0] utx_val;
  always @(posedge clk) begin
    if (!rst_n) uart_tx_pend <= 1'b0;
    else if (uart_tx_we) begin
      uart_tx_pend <= 1'b1;
      n_utx++; utx_id = uart_tx_id; utx_val = uart_tx_data;
    end
  end
  // global clock model: 1000 in the first cycle after hold is released
  always @(posedge clk) if (hold) gclk <= 64'd1000; else gclk <= gclk + 1;

  initial begin
    gclk = 0;
    for (int i = 0; i < 3; i++) ni_rx_pkt[i] = '0;
    ni_rx_valid = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // the memories power up with unknown contents: clear the program areas
    for (int k = 1; k <= 3; k++)
      for (int pc = 0; pc < 32; pc++) ld_i(k, pc, enc_r(OP_NOP, 0, 0, 0));
    // ---------------- partition 1 program (segment 1)
    ld_i(1, 0,  enc_m(OP_LD, 1, P | 'h100));
    ld_i(1, 1,  enc_m(OP_LD, 2, P | 'h101));
    ld_i(1, 2,  enc_m(OP_LD, 3, P | 'h102));
    ld_i(1, 3,  enc_m(OP_ST, 1, P | 'h000));   // partition flag
    ld_i(1, 4,  enc_m(OP_ST, 2, 'h040));       // shared word
    ld_i(1, 5,  enc_m(OP_ST, 2, P | 'h180));   // protected word
    ld_i(1, 6,  enc_m(OP_ST, 3, P | 'h001));   // NI destination
    ld_i(1, 9,  enc_m(OP_ST, 2, P | 'h002));   // NI data -> send
    ld_i(1, 10, enc_m(OP_LD, 4, 'h000));       // clock_L
    ld_i(1, 11, enc_m(OP_LD, 5, 'h008));       // processor 1 flags
    ld_i(1, 12, enc_m(OP_ST, 2, 'h008));       // read-only: no effect
    ld_i(1, 14, enc_m(OP_ST, 4, P | 'h181));
    ld_i(1, 15, enc_m(OP_ST, 5, P | 'h182));
    ld_i(1, 16, enc_m(OP_LD, 6, 'h032));       // UART sampling buffer 2
    ld_i(1, 19, enc_m(OP_ST, 6, P | 'h183));
    ld_i(1, 20, enc_m(OP_LD, 7, P | 'h003));   // NI fresh bits
    ld_i(1, 21, enc_m(OP_LD, 8, P | 'h013));   // NI rx buffer, channel 3
    ld_i(1, 24, enc_m(OP_ST, 7, P | 'h184));
    ld_i(1, 25, enc_m(OP_ST, 8, P | 'h185));
    ld_i(1, 26, enc_m(OP_LD, 9, P | 'h003));   // fresh bit cleared by the read
    ld_i(1, 29, enc_m(OP_ST, 9, P | 'h186));
    ld_i(1, 30, enc_j(OP_JMP, 30));
    // ---------------- partition 2 program (segment 2)
    ld_i(2, 0,  enc_m(OP_LD, 1, 'h040));
    ld_i(2, 1,  enc_m(OP_LD, 2, P | 'h180));
    ld_i(2, 4,  enc_m(OP_ST, 1, P | 'h190));
    ld_i(2, 5,  enc_m(OP_ST, 2, P | 'h191));
    ld_i(2, 6,  enc_m(OP_LD, 3, P | 'h000));
    ld_i(2, 7,  enc_m(OP_LD, 4, 'h008));
    ld_i(2, 10, enc_m(OP_ST, 4, P | 'h192));
    ld_i(2, 11, enc_m(OP_ST, 3, P | 'h193));
    ld_i(2, 12, enc_j(OP_JMP, 12));
    // ---------------- partition 3 program (segment 3)
    ld_i(3, 0,  enc_m(OP_LD, 1, P | 'h100));
    ld_i(3, 3,  enc_m(OP_ST, 1, P | 'h000));
    ld_i(3, 4,  enc_m(OP_ST, 1, 'h03B));       // UART output, signal 3
    ld_i(3, 6,  enc_m(OP_LD, 2, 'h038));       // pending bit
    ld_i(3, 9,  enc_m(OP_ST, 2, P | 'h1A0));
    ld_i(3, 10, enc_j(OP_JMP, 10));
    // ---------------- data
    ld_d(1, 'h100, 32'hFFFF_F2A5);   // flag value: only 10 LSBs kept
    ld_d(1, 'h101, V1);
    ld_d(1, 'h102, 7);
    ld_d(2, 'h180, V2);
    ld_d(3, 'h100, 32'h0000_0155);
    ld_d(0, 'h008, 32'h0BAD_0BAD);   // memory word under the flag address
    ld_d(0, 'h03B, 32'h0BAD_0BAD);   // memory word under a UART output address
    // an incoming packet for NI 0 from channel 3
    ni_rx_valid[0] = 1; ni_rx_pkt[0] = '{dest: 0, src: 3, data: 32'hFEED_0003};
    @(negedge clk); ni_rx_valid = 0;
    repeat (6) @(negedge clk);
    checks++;
    if (apf !== 2'b00 || retire) begin failures++; $display("FAIL hold does not stop execution"); end
    hold = 0;
    repeat (200) @(negedge clk);
    // ---------------- checks
    checks++; if (n_utx != 1 || utx_id !== 8'd3 || utx_val !== 32'h155) begin
      failures++; $display("FAIL uart output writes %0d id %0d val %h", n_utx, utx_id, utx_val); end
    checks++; if (dut.u_dmem.mem[{2'd3, 10'h1A0}] !== 32'd1) begin failures++; $display("FAIL uart pending read"); end
    checks++; if (dut.u_dmem.mem[{2'd0, 10'h03B}] !== 32'h0BAD_0BAD) begin failures++; $display("FAIL uart output reached memory"); end
    checks++; if (dut.u_dmem.mem[{2'd1, 10'h180}] !== V1) begin failures++; $display("FAIL p1 protected"); end
    checks++; if (dut.u_dmem.mem[{2'd2, 10'h180}] !== V2) begin failures++; $display("FAIL p2 protected overwritten"); end
    checks++; if (dut.u_dmem.mem[{2'd0, 10'h040}] !== V1) begin failures++; $display("FAIL shared write"); end
    checks++; if (dut.u_dmem.mem[{2'd2, 10'h190}] !== V1) begin failures++; $display("FAIL shared read by p2"); end
    checks++; if (dut.u_dmem.mem[{2'd2, 10'h191}] !== V2) begin failures++; $display("FAIL p2 own protected read"); end
    checks++; if (dut.u_dmem.mem[{2'd1, 10'h181}] !== 64'd1013) begin
      failures++; $display("FAIL clock read %0d exp 1013", dut.u_dmem.mem[{2'd1, 10'h181}]); end
    checks++; if (dut.u_dmem.mem[{2'd1, 10'h182}] !== {2'b01, 10'h0, 10'h0, 10'h2A5}) begin
      failures++; $display("FAIL flags read by p1 %h", dut.u_dmem.mem[{2'd1, 10'h182}]); end
    checks++; if (dut.u_dmem.mem[{2'd2, 10'h192}] !== {2'b10, 10'h0, 10'h0, 10'h2A5}) begin
      failures++; $display("FAIL flags read by p2 %h", dut.u_dmem.mem[{2'd2, 10'h192}]); end
    checks++; if (dut.u_dmem.mem[{2'd2, 10'h193}] !== 0) begin failures++; $display("FAIL p2 own flag"); end
    checks++; if (flags[29:0] !== {10'h155, 10'h0, 10'h2A5}) begin failures++; $display("FAIL flag word %h", flags); end
    checks++; if (dut.u_dmem.mem[{2'd0, 10'h008}] !== 32'h0BAD_0BAD) begin failures++; $display("FAIL read-only write"); end
    checks++; if (dut.u_dmem.mem[{2'd1, 10'h183}] !== 32'hABC0_0002) begin failures++; $display("FAIL uart read"); end
    checks++; if (dut.u_dmem.mem[{2'd1, 10'h184}] !== 32'h8) begin failures++; $display("FAIL NI fresh %h", dut.u_dmem.mem[{2'd1, 10'h184}]); end
    checks++; if (dut.u_dmem.mem[{2'd1, 10'h185}] !== 32'hFEED_0003) begin failures++; $display("FAIL NI rx"); end
    checks++; if (dut.u_dmem.mem[{2'd1, 10'h186}] !== 32'h0) begin failures++; $display("FAIL NI fresh not cleared"); end
    checks++; if (n_tx != 1 || txp.dest != 7 || txp.src != 0 || txp.data != V1) begin
      failures++; $display("FAIL NI tx n=%0d %p", n_tx, txp); end
    // store at pc 9 passes M in cycle 12; tx_valid follows TX_LAT-1 edges later
    checks++; if (tx_cyc != 12 + 3) begin failures++; $display("FAIL tx cycle %0d", tx_cyc); end
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
