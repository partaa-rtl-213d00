// tb_router - self-checking testbench of a NoC router (router 2, NIs 6-8).
//
// Random NI traffic and random hub grants against a model of the three
// pending registers: hub_req / hub_pkt must equal the model, a packet that
// arrives while the previous one waits replaces it and pulses 'overrun'.
// Packets from the hub must reach exactly the addressed local NI one edge
// later.
module tb_router;
  import partaa_pkg::*;
  localparam int RID = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [2:0] ni_tx_valid, ni_rx_valid, hub_req, hub_grant, overrun;
  pkt_t       ni_tx_pkt [3], ni_rx_pkt [3], hub_pkt [3];
  logic       hub_in_valid;
  pkt_t       hub_in_pkt;
  router #(.R_ID(RID), .NPR(3)) dut (.*);

  logic [2:0] mv, exp_ovr;
  pkt_t       mp [3];
  logic       prev_v;
  pkt_t       prev_p;
  int         n_ovr = 0, n_del = 0;

  initial begin
    ni_tx_valid = 0; hub_grant = 0; hub_in_valid = 0; hub_in_pkt = '0;
    for (int i = 0; i < 3; i++) begin ni_tx_pkt[i] = '0; mp[i] = '0; end
    mv = 0; prev_v = 0; prev_p = '0; exp_ovr = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      for (int i = 0; i < 3; i++) begin
        ni_tx_valid[i] = ($urandom_range(0, 5) == 0);
        ni_tx_pkt[i]   = '{dest: NI_AW'($urandom_range(0, 11)), src: NI_AW'(RID * 3 + i), data: $urandom};
        hub_grant[i]   = mv[i] && ($urandom_range(0, 2) == 0);
      end
      hub_in_valid = ($urandom_range(0, 2) == 0);
      hub_in_pkt   = '{dest: NI_AW'(RID * 3 + $urandom_range(0, 2)), src: NI_AW'($urandom_range(0, 11)), data: $urandom};
      #1;
      checks++;
      if (hub_req !== mv) begin failures++; $display("FAIL req %b exp %b", hub_req, mv); end
      for (int i = 0; i < 3; i++) if (mv[i]) begin
        checks++; if (hub_pkt[i] !== mp[i]) begin failures++; $display("FAIL pend pkt %0d", i); end
      end
      checks++;
      if (overrun !== exp_ovr) begin failures++; $display("FAIL overrun %b exp %b", overrun, exp_ovr); end
      for (int i = 0; i < 3; i++) begin
        checks++;
        if (ni_rx_valid[i] !== (prev_v && int'(prev_p.dest) == RID * 3 + i)) begin
          failures++; $display("FAIL rx valid %0d", i);
        end else if (ni_rx_valid[i]) begin
          n_del++;
          checks++; if (ni_rx_pkt[i] !== prev_p) failures++;
        end
      end
      // model update at the edge
      for (int i = 0; i < 3; i++) begin
        exp_ovr[i] = ni_tx_valid[i] && mv[i] && !hub_grant[i];
        if (exp_ovr[i]) n_ovr++;
        if (ni_tx_valid[i]) begin mv[i] = 1; mp[i] = ni_tx_pkt[i]; end
        else if (hub_grant[i]) mv[i] = 0;
      end
      prev_v = hub_in_valid; prev_p = hub_in_pkt;
      @(negedge clk);
    end
    checks++; if (n_ovr == 0 || n_del == 0) failures++;
    $display("router: %0d overruns, %0d deliveries", n_ovr, n_del);
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
