// tb_noc - self-checking testbench of the NoC (4 routers + hub).
//
// Every channel sends random packets to random destination NIs, never
// faster than one per arbitration cycle (its guaranteed bandwidth). Each
// packet must arrive, unchanged, on the rx link of its destination NI and
// only there (a packet missing after the bound is a failure), within 1 (router in) + L + 1 (router out) cycles, with
// L = (floor((S-1)/Sc)+1)*T_SLOT + 1 the hub bound. A final burst that
// exceeds a channel's bandwidth must show up as an overrun.
module tb_noc;
  import partaa_pkg::*;
  localparam int NC = 12, S = 12, T = 4;
  localparam int L = ((S - 1) / 1 + 1) * T + 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NC-1:0] ni_tx_valid, ni_rx_valid, overrun;
  pkt_t          ni_tx_pkt [NC], ni_rx_pkt [NC];
  logic          gs_grant, be_grant;
  noc dut (.*);

  // one packet in flight per channel
  logic infl [NC];
  pkt_t ip [NC];
  int   t0 [NC], gap [NC];
  int   cyc = 0, sent = 0, recv = 0, worst = 0, n_ovr = 0;

  always @(posedge clk) if (rst_n) n_ovr += $countones(overrun);

  initial begin
    ni_tx_valid = 0;
    for (int c = 0; c < NC; c++) begin ni_tx_pkt[c] = '0; infl[c] = 0; gap[c] = $urandom_range(0, 40); end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (cyc = 0; cyc < 8000; cyc++) begin
      #1;
      // arrivals
      for (int d = 0; d < NC; d++) if (ni_rx_valid[d]) begin
        int s;
        s = int'(ni_rx_pkt[d].src);
        checks++;
        if (!infl[s] || ni_rx_pkt[d] !== ip[s] || int'(ip[s].dest) != d) begin
          failures++; $display("FAIL arrival at %0d from %0d", d, s);
        end else begin
          int lat;
          lat = cyc - t0[s];
          if (lat > worst) worst = lat;
          checks++;
          if (lat > L + 2) begin failures++; $display("FAIL latency %0d > %0d", lat, L + 2); end
          infl[s] = 0; recv++;
          gap[s] = S * T + $urandom_range(0, 60);
        end
      end
      // a packet that has not arrived within the bound is lost or late
      for (int c = 0; c < NC; c++) if (infl[c] && cyc - t0[c] > L + 2) begin
        checks++; failures++; infl[c] = 0;
        $display("FAIL packet from %0d to %0d not delivered", c, ip[c].dest);
      end
      // departures (none in the last L+4 cycles, so that all can arrive)
      ni_tx_valid = '0;
      for (int c = 0; c < NC; c++) begin
        if (!infl[c] && gap[c] > 0) gap[c]--;
        else if (!infl[c] && cyc < 8000 - L - 4) begin
          ni_tx_valid[c] = 1;
          ni_tx_pkt[c]   = '{dest: NI_AW'($urandom_range(0, NC - 1)), src: NI_AW'(c), data: $urandom};
          ip[c] = ni_tx_pkt[c]; infl[c] = 1; t0[c] = cyc; sent++;
        end
      end
      @(negedge clk);
    end
    ni_tx_valid = '0;
    repeat (L + 4) @(negedge clk);
    checks++; if (n_ovr != 0) begin failures++; $display("FAIL overrun within bandwidth"); end
    // burst on channel 4: three packets on consecutive cycles
    for (int k = 0; k < 3; k++) begin
      ni_tx_valid = 12'b0000_0001_0000;
      ni_tx_pkt[4] = '{dest: 0, src: 4, data: 32'(k)};
      @(negedge clk);
    end
    ni_tx_valid = '0;
    repeat (L + 4) @(negedge clk);
    checks++; if (n_ovr == 0) begin failures++; $display("FAIL no overrun on burst"); end
    checks++; if (sent != recv) begin failures++; $display("FAIL lost: sent %0d recv %0d", sent, recv); end
    $display("noc: sent %0d received %0d worst latency %0d (bound %0d) overruns %0d", sent, recv, worst, L + 2, n_ovr);
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
