// router - NoC router serving the three NIs of one processor.
//
// Upstream, each attached NI has a one-packet pending register. A packet
// arriving from NI i waits there and is offered to the hub (hub_req[i]);
// the hub's grant removes it. A packet that arrives while the previous one
// from the same NI is still waiting replaces it and raises 'overrun' for a
// cycle: the producer has exceeded the bandwidth of its channel, which is
// the only way a transmission agreement can be broken.
// Downstream, a packet delivered by the hub is registered and handed to the
// NI it is addressed to (local index = dest - R_ID*NPR).
//
// Timing: one edge from NI to pending, one edge from hub output to the NI.
// The star-of-routers/tree-of-NIs structure follows the paper; the single
// pending register per NI and the overrun signal are this design's choice
// (the paper says only that no packet is lost under normal operation).
// Lint note: rst_n also feeds the 'disable iff' of the grant assertion
// (reported as sync and async use); the flip-flops use it asynchronously.
module router
  import partaa_pkg::*;
#(
  parameter int R_ID = 0,
  parameter int NPR  = 3
) (
  input  logic           clk,
  input  logic           rst_n,
  // NIs -> router
  input  logic [NPR-1:0] ni_tx_valid,
  input  pkt_t           ni_tx_pkt  [NPR],
  // router -> NIs
  output logic [NPR-1:0] ni_rx_valid,
  output pkt_t           ni_rx_pkt  [NPR],
  // router <-> hub
  output logic [NPR-1:0] hub_req,
  output pkt_t           hub_pkt    [NPR],
  input  logic [NPR-1:0] hub_grant,
  input  logic           hub_in_valid,
  input  pkt_t           hub_in_pkt,
  output logic [NPR-1:0] overrun
);
  logic [NPR-1:0] pend_v;
  pkt_t           pend [NPR];
  logic [NI_AW-1:0] local_idx;
  assign local_idx = hub_in_pkt.dest - NI_AW'(R_ID * NPR);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_v      <= '0;
      overrun     <= '0;
      ni_rx_valid <= '0;
      for (int i = 0; i < NPR; i++) begin pend[i] <= '0; ni_rx_pkt[i] <= '0; end
    end else begin
      for (int i = 0; i < NPR; i++) begin
        overrun[i] <= ni_tx_valid[i] && pend_v[i] && !hub_grant[i];
        if (ni_tx_valid[i]) begin
          pend_v[i] <= 1'b1;
          pend[i]   <= ni_tx_pkt[i];
        end else if (hub_grant[i]) begin
          pend_v[i] <= 1'b0;
        end
        ni_rx_valid[i] <= hub_in_valid && (local_idx == NI_AW'(i));
        ni_rx_pkt[i]   <= hub_in_pkt;
      end
    end
  end

  assign hub_req = pend_v;
  assign hub_pkt = pend;

  // The hub grants only a waiting packet.
  assert property (@(posedge clk) disable iff (!rst_n) (hub_grant & ~pend_v) == '0);
endmodule
