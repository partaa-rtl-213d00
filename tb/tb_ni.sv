// tb_ni - self-checking testbench of the network interface.
//
// Transmit: a destination write then a data write must produce exactly one
// packet {dest, src = NI_ID, data} on the router link, TX_LAT-1 edges after
// the data write (the router's pending register adds the last edge).
// Receive: packets from several channels land in their own sampling
// buffers RX_LAT-1 edges after arriving (the router adds the last edge);
// a newer packet of the same channel overwrites the old sample and pulses
// rx_overwrite if the old one was unread; reading a buffer clears its fresh
// bit; other channels' buffers are untouched.
module tb_ni;
  import partaa_pkg::*;
  localparam int ID = 5, TXL = 4, RXL = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic              mm_we, mm_re, mm_hit, tx_valid, rx_valid, rx_overwrite;
  logic [OFF_W-1:0]  mm_off;
  logic [DATA_W-1:0] mm_wdata, mm_rdata;
  pkt_t              tx_pkt, rx_pkt;
  logic [N_NI-1:0]   fresh;
  logic [31:0]       model [N_NI];
  int                n_ovw = 0;

  ni #(.NI_ID(ID), .N_CH(N_NI), .TX_LAT(TXL), .RX_LAT(RXL)) dut (.*);

  always @(posedge clk) if (rst_n && rx_overwrite) n_ovw++;

  task automatic mm_write(input logic [OFF_W-1:0] o, input logic [31:0] d);
    mm_we = 1; mm_off = o; mm_wdata = d;
    @(negedge clk);
    mm_we = 0;
  endtask

  task automatic mm_read(input logic [OFF_W-1:0] o, output logic [31:0] d);
    mm_re = 1; mm_off = o; #1; d = mm_rdata;
    @(negedge clk);
    mm_re = 0;
  endtask

  task automatic send_and_check(input int dest, input logic [31:0] data);
    int n;
    mm_write(PR_NI_DEST, 32'(dest));
    @(negedge clk);
    mm_write(PR_NI_DATA, data);   // data write taken at the last edge
    n = 1;                        // counts the write edge itself
    while (!tx_valid && n < 20) begin @(negedge clk); n++; end
    checks++;
    if (n != TXL) begin failures++; $display("FAIL tx latency %0d", n); end
    checks++;
    if (tx_pkt.dest != NI_AW'(dest) || tx_pkt.src != NI_AW'(ID) || tx_pkt.data != data) begin
      failures++; $display("FAIL tx pkt %p", tx_pkt);
    end
    @(negedge clk);
    checks++;
    if (tx_valid) begin failures++; $display("FAIL tx valid for more than one cycle"); end
  endtask

  task automatic deliver(input int src, input logic [31:0] data);
    rx_valid = 1; rx_pkt = '{dest: NI_AW'(ID), src: NI_AW'(src), data: data};
    @(negedge clk);
    rx_valid = 0;
    repeat (RXL - 2) @(negedge clk);
    model[src] = data;
  endtask

  logic [31:0] rd;
  initial begin
    mm_we = 0; mm_re = 0; mm_off = 0; mm_wdata = 0; rx_valid = 0; rx_pkt = '0;
    for (int c = 0; c < N_NI; c++) model[c] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 6; i++) send_and_check($urandom_range(0, N_NI - 1), $urandom);

    // reception on channels 0, 3 and 11
    deliver(3, 32'h1111_0003);
    deliver(0, 32'h1111_0000);
    deliver(11, 32'h1111_000B);
    mm_read(PR_NI_STAT, rd);
    checks++;
    if (rd[N_NI-1:0] !== 12'b1000_0000_1001) begin failures++; $display("FAIL fresh %b", rd); end
    for (int c = 0; c < N_NI; c++) begin
      mm_read(PR_NI_RX + OFF_W'(c), rd);
      checks++;
      if (rd !== model[c]) begin failures++; $display("FAIL buf %0d = %h exp %h", c, rd, model[c]); end
    end
    mm_read(PR_NI_STAT, rd);
    checks++; if (rd !== 0) begin failures++; $display("FAIL fresh not cleared %b", rd); end

    // overwrite: two samples of channel 7 before the consumer reads
    deliver(7, 32'hAAAA_0001);
    deliver(7, 32'hAAAA_0002);
    @(negedge clk);
    mm_read(PR_NI_RX + 7, rd);
    checks++; if (rd !== 32'hAAAA_0002) begin failures++; $display("FAIL newest %h", rd); end
    checks++; if (n_ovw != 1) begin failures++; $display("FAIL overwrite count %0d", n_ovw); end
    // reception latency: buffer changes exactly RX_LAT-1 edges after arrival
    rx_valid = 1; rx_pkt = '{dest: NI_AW'(ID), src: NI_AW'(2), data: 32'hCAFE_0002};
    @(negedge clk); rx_valid = 0;
    for (int k = 1; k <= RXL; k++) begin
      mm_re = 0; mm_off = PR_NI_RX + 2; #1;
      checks++;
      if ((mm_rdata == 32'hCAFE_0002) != (k >= RXL - 1)) begin
        failures++; $display("FAIL rx latency at edge %0d", k);
      end
      @(negedge clk);
    end
    checks++; if (!mm_hit) failures++;
    mm_off = PR_STACK; #1;
    checks++; if (mm_hit) failures++;
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
