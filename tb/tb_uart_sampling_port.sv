// tb_uart_sampling_port - self-checking testbench of the UART sampling port.
//
// A bit-level line model sends messages (id byte + 4 value bytes, 8N1,
// LSB first) at CLKS_PER_BIT = 16. Checked: every message with a valid id
// lands in its own buffer and leaves all other buffers untouched; a newer
// sample of the same id overwrites the older one; ids >= N_SIG are dropped
// without an update pulse; a low stop bit raises frame_err and the message
// is not stored; the update pulse of back-to-back messages repeats exactly
// every 50 bit times (one message is 5 characters of 10 bits), and the first
// one comes half a bit plus a fixed synchroniser delay after the line's
// last stop-bit edge would start.
//
// Transmit side (4 source slots): a bit-level decoder on 'tx' rebuilds every
// message. Checked: samples written to all slots in one cycle leave in
// round-robin order; a sample rewritten before it was sent goes out with
// its newest value only; tx_pend rises the cycle after the write, the
// slot is taken one cycle later and the start bit begins then; the line is idle high between messages and
// back-to-back messages end exactly 50 bit times + 1 cycle apart; a write
// to a slot whose sample is on the line queues a second message; and, with
// 'tx' looped back into 'rx', the receive buffers get the sent samples.
module tb_uart_sampling_port;
  localparam int CPB = 16, NS = 8, NSRC = 4;
  logic clk = 0, rst_n = 0, rx_drv = 1, loop = 0;
  wire  rx;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [31:0] sbuf [NS];
  logic        upd, frame_err;
  logic [NSRC-1:0] tx_we = '0, tx_pend;
  logic [7:0]      tx_id   [NSRC];
  logic [31:0]     tx_data [NSRC];
  logic            tx, tx_done;

  assign rx = loop ? tx : rx_drv;
  uart_sampling_port #(.CLKS_PER_BIT(CPB), .N_SIG(NS), .N_SRC(NSRC)) dut (.*);

  // ---------------------------------------------------- transmit decoder
  logic [7:0]  got_id  [$];
  logic [31:0] got_val [$];
  int n_done = 0, last_done = -1, done_gap_bad = 0, line_bad = 0;
  initial begin : decoder
    logic [7:0] b [5];
    forever begin
      @(negedge clk);
      if (rst_n && tx === 1'b0) begin
        for (int k = 0; k < 5; k++) begin
          if (k > 0) begin
            while (tx !== 1'b0) @(negedge clk);
          end
          repeat (CPB / 2) @(negedge clk);           // middle of start bit
          if (tx !== 1'b0) line_bad++;
          for (int i = 0; i < 8; i++) begin
            repeat (CPB) @(negedge clk);
            b[k][i] = tx;
          end
          repeat (CPB) @(negedge clk);
          if (tx !== 1'b1) line_bad++;               // stop bit
        end
        got_id.push_back(b[0]);
        got_val.push_back({b[4], b[3], b[2], b[1]});
      end
    end
  end
  always @(posedge clk) if (rst_n) begin
    if (!$isunknown(tx) && tx_done) begin
      if (last_done >= 0 && cyc - last_done != 50 * CPB + 1 && tx_pend != 0)
        done_gap_bad++;
      last_done = cyc;
      n_done++;
    end
  end

  task automatic tx_write(int s, logic [7:0] id, logic [31:0] v);
    tx_id[s] = id; tx_data[s] = v; tx_we[s] = 1'b1;
  endtask
  task automatic expect_msg(int n, logic [7:0] id, logic [31:0] v, string what);
    checks++;
    if (got_id.size() <= n || got_id[n] !== id || got_val[n] !== v) begin
      failures++;
      if (got_id.size() > n)
        $display("FAIL %s: message %0d = %h/%h exp %h/%h", what, n, got_id[n], got_val[n], id, v);
      else $display("FAIL %s: message %0d missing", what, n);
    end
  endtask

  logic [31:0] model [NS];
  int cyc = 0, n_upd = 0, n_ferr = 0, last_upd = -1, first_upd = -1;
  int gaps_bad = 0;
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (upd) begin
      if (last_upd >= 0 && cyc - last_upd != 50 * CPB) gaps_bad++;
      if (first_upd < 0) first_upd = cyc;
      last_upd = cyc;
      n_upd++;
    end
    if (frame_err) n_ferr++;
  end

  task automatic send_byte(logic [7:0] b, logic stop = 1'b1);
    rx_drv = 0; repeat (CPB) @(negedge clk);
    for (int i = 0; i < 8; i++) begin rx_drv = b[i]; repeat (CPB) @(negedge clk); end
    rx_drv = stop; repeat (CPB) @(negedge clk);
    rx_drv = 1;
  endtask
  task automatic send_msg(logic [7:0] id, logic [31:0] v);
    send_byte(id);
    for (int i = 0; i < 4; i++) send_byte(v[8*i +: 8]);
    if (int'(id) < NS) model[id[2:0]] = v;
  endtask
  task automatic cmp(string what);
    for (int i = 0; i < NS; i++) begin
      checks++;
      if (sbuf[i] !== model[i]) begin
        failures++; $display("FAIL %s buf %0d = %h exp %h", what, i, sbuf[i], model[i]);
      end
    end
  endtask

  int t_start, n0;
  initial begin
    for (int i = 0; i < NS; i++) model[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    // back-to-back messages, one per id
    t_start = cyc;
    for (int i = 0; i < NS; i++) send_msg(8'(i), 32'hC0DE_0000 + 32'(i * 4097));
    repeat (CPB) @(negedge clk);
    cmp("fill");
    checks++; if (n_upd != NS) begin failures++; $display("FAIL upd count %0d", n_upd); end
    checks++; if (gaps_bad != 0) begin failures++; $display("FAIL message period"); end
    // first message: 49.5 bit times after the start edge, plus 2 sync + 1 reg
    checks++;
    if (first_upd - t_start < 49 * CPB + CPB / 2 || first_upd - t_start > 49 * CPB + CPB / 2 + 4) begin
      failures++; $display("FAIL first update after %0d cycles", first_upd - t_start);
    end
    // overwrite by a newer sample of the same signal
    send_msg(8'd3, 32'h1234_5678);
    repeat (CPB) @(negedge clk);
    cmp("overwrite");
    // id outside the buffer range: dropped
    n0 = n_upd;
    send_msg(8'd200, 32'hDEAD_BEEF);
    send_msg(8'(NS), 32'hDEAD_BEEF);
    repeat (CPB) @(negedge clk);
    checks++; if (n_upd != n0) begin failures++; $display("FAIL out-of-range id updated"); end
    cmp("bad id");
    // framing error in the id byte: the rest of the message is re-synced
    send_byte(8'd5, 1'b0);
    repeat (2 * CPB) @(negedge clk);
    checks++; if (n_ferr != 1) begin failures++; $display("FAIL frame_err count %0d", n_ferr); end
    send_msg(8'd5, 32'h0BAD_F00D);
    repeat (CPB) @(negedge clk);
    cmp("after frame error");
    // random traffic
    for (int k = 0; k < 30; k++) send_msg(8'($urandom_range(0, NS + 2)), $urandom);
    repeat (CPB) @(negedge clk);
    cmp("random");

    // ------------------------------------------------ transmit side
    checks++; if (tx !== 1'b1 || tx_pend !== '0 || n_done != 0) begin
      failures++; $display("FAIL tx not idle after reset");
    end
    for (int i = 0; i < NSRC; i++) tx_write(i, 8'(i + 1), 32'hA000_0000 + 32'(i));
    @(negedge clk);
    tx_we = '0;
    checks++; if (tx_pend !== 4'b1111 || tx !== 1'b1) begin
      failures++; $display("FAIL pend %b tx %b one cycle after the writes", tx_pend, tx);
    end
    @(negedge clk);
    // slot 0 was taken and its start bit is on the line; the others wait
    checks++; if (tx_pend !== 4'b1110 || tx !== 1'b0) begin
      failures++; $display("FAIL pend %b tx %b after the writes", tx_pend, tx);
    end
    // rewrite slot 2 while slot 0 is on the line: only the new value goes out
    repeat (10 * CPB) @(negedge clk);
    tx_write(2, 8'd7, 32'h7777_0002);
    @(negedge clk);
    tx_we = '0;
    // rewrite slot 0 while its first sample is on the line: sent again later
    tx_write(0, 8'd5, 32'h5555_0000);
    @(negedge clk);
    tx_we = '0;
    wait (n_done == 5);
    repeat (2 * CPB) @(negedge clk);
    expect_msg(0, 8'd1, 32'hA000_0000, "round robin");
    expect_msg(1, 8'd2, 32'hA000_0001, "round robin");
    expect_msg(2, 8'd7, 32'h7777_0002, "overwritten sample");
    expect_msg(3, 8'd4, 32'hA000_0003, "round robin");
    expect_msg(4, 8'd5, 32'h5555_0000, "resent slot");
    checks++; if (got_id.size() != 5 || tx_pend !== '0) begin
      failures++; $display("FAIL %0d messages, pend %b", got_id.size(), tx_pend);
    end
    checks++; if (done_gap_bad != 0 || line_bad != 0) begin
      failures++; $display("FAIL tx timing: gaps %0d line %0d", done_gap_bad, line_bad);
    end
    // loopback: the receiver must store what the transmitter sends
    loop = 1;
    for (int i = 0; i < NSRC; i++) tx_write(i, 8'(2 * i), 32'h1000_0000 * 32'(i + 1) + 32'h0123);
    @(negedge clk);
    tx_we = '0;
    for (int i = 0; i < NSRC; i++) model[2 * i] = 32'h1000_0000 * 32'(i + 1) + 32'h0123;
    wait (n_done == 9);
    repeat (2 * CPB) @(negedge clk);
    cmp("loopback");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
