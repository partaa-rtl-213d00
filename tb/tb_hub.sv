// tb_hub - self-checking testbench of the hub arbiter.
//
// Slot table: channel 0 owns slots 0, 4 and 8; channels 4 and 8 own none
// (best-effort only); every other channel owns one slot. The testbench
// plays the routers: each channel holds at most one pending packet and
// offers a new random one some time after the last was granted.
// Checked against a model kept here:
//   * grants come only in the first cycle of a slot, at most one at a time;
//   * an owner with a pending packet always gets its slot;
//   * an idle slot goes to the pending channel that has waited longest;
//   * the granted packet appears at its destination router one cycle later;
//   * latency of every slot-owning channel <= (floor((S-1)/Sc)+1)*T + 1;
//   * every packet offered is delivered; both grant kinds occur.
module tb_hub;
  import partaa_pkg::*;
  localparam int NC = 12, NR = 4, S = 12, T = 3;
  localparam int OWN [S] = '{0, 1, 2, 3, 0, 5, 6, 7, 0, 9, 10, 11};
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NC-1:0] req, grant;
  pkt_t          pkt [NC];
  logic [NR-1:0] out_valid;
  pkt_t          out_pkt [NR];
  logic          gs_grant, be_grant;

  hub #(.N_CH(NC), .N_R(NR), .NPR(3), .S_TOTAL(S), .T_SLOT(T), .SLOT_OWNER(OWN)) dut (.*);

  int cyc = 0, age [NC], since [NC], wait_c [NC], n_slots [NC];
  int sent = 0, recv = 0, n_gs = 0, n_be = 0, worst [NC];
  logic exp_v; pkt_t exp_p;
  logic [NC-1:0] g_q;

  function automatic int bound(int c);
    return ((S - 1) / n_slots[c] + 1) * T + 1;
  endfunction

  initial begin
    for (int c = 0; c < NC; c++) begin n_slots[c] = 0; worst[c] = 0; end
    for (int s = 0; s < S; s++) n_slots[OWN[s]]++;
  end

  // drive and check at the negative edge
  initial begin
    req = '0;
    for (int c = 0; c < NC; c++) begin pkt[c] = '0; age[c] = 0; since[c] = 0; wait_c[c] = 0; end
    exp_v = 0; exp_p = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (cyc = 0; cyc < 6000; cyc++) begin
      // new packets (after a random gap, well inside the channel's share)
      for (int c = 0; c < NC; c++) begin
        if (!req[c] && since[c] > 0) since[c]--;
        else if (!req[c] && $urandom_range(0, 3) == 0) begin
          req[c]  = 1;
          pkt[c]  = '{dest: NI_AW'($urandom_range(0, NC - 1)), src: NI_AW'(c), data: $urandom};
          wait_c[c] = 0;
          sent++;
        end
      end
      #1;
      // delivery of the previous grant
      for (int r = 0; r < NR; r++) begin
        checks++;
        if (out_valid[r] != (exp_v && int'(exp_p.dest) / 3 == r)) begin
          failures++; $display("FAIL out_valid[%0d] cyc %0d", r, cyc);
        end else if (out_valid[r]) begin
          checks++;
          if (out_pkt[r] !== exp_p) begin failures++; $display("FAIL pkt"); end
          recv++;
        end
      end
      // grant rules
      checks++;
      if (!$onehot0(grant) || (grant != 0 && (cyc % T) != 0)) begin
        failures++; $display("FAIL grant timing %b cyc %0d", grant, cyc);
      end
      if ((cyc % T) == 0) begin
        int ow, best, besta;
        ow = OWN[(cyc / T) % S];
        best = -1; besta = -1;
        for (int c = 0; c < NC; c++) if (req[c] && age[c] > besta) begin best = c; besta = age[c]; end
        checks++;
        if (req[ow]) begin
          if (!grant[ow] || !gs_grant) begin failures++; $display("FAIL owner %0d not granted", ow); end
        end else if (best >= 0) begin
          if (!grant[best] || !be_grant) begin failures++; $display("FAIL token to %0d got %b", best, grant);
            for (int c = 0; c < NC; c++) $display("  c%0d req %0d tbage %0d dutage %0d", c, req[c], age[c], dut.age[c]); end
        end else if (grant != 0) failures++;
      end
      if (gs_grant) n_gs++;
      if (be_grant) n_be++;
      exp_v = 0;
      for (int c = 0; c < NC; c++) begin
        if (grant[c]) begin
          exp_v = 1; exp_p = pkt[c];
          // latency: pending cycles + delivery cycle
          if (wait_c[c] + 1 > worst[c]) worst[c] = wait_c[c] + 1;
          if (n_slots[c] > 0) begin
            checks++;
            if (wait_c[c] + 1 > bound(c)) begin
              failures++; $display("FAIL latency ch %0d = %0d > %0d", c, wait_c[c] + 1, bound(c));
            end
          end
        end
      end
      g_q = grant;
      @(negedge clk);
      for (int c = 0; c < NC; c++) begin
        if (g_q[c]) begin req[c] = 0; age[c] = 0; since[c] = S * T; end
        else if (req[c]) begin age[c] = (age[c] < 255) ? age[c] + 1 : 255; wait_c[c]++; end
      end
    end
    // every packet is delivered, still pending, or in flight
    checks++;
    if (recv + $countones(req) + (exp_v ? 1 : 0) != sent) begin
      failures++; $display("FAIL lost packets sent %0d recv %0d", sent, recv);
    end
    checks++; if (n_gs == 0 || n_be == 0) begin failures++; $display("FAIL grant kinds %0d %0d", n_gs, n_be); end
    $display("hub: sent %0d delivered %0d guaranteed %0d best-effort %0d; worst ch0 %0d (bound %0d) ch1 %0d (bound %0d)",
             sent, recv, n_gs, n_be, worst[0], bound(0), worst[1], bound(1));
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
