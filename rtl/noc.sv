// noc - time-predictable network-on-chip of PaRTAA.
//
// A hub in a star with N_R routers; each router serves NPR network
// interfaces (a reverse tree). The NIs themselves sit in the processing
// elements, next to the partitions they are memory-mapped into; this module
// carries their back-end links. Channel c is NI c, which hangs on router
// c / NPR. A packet takes: TX_LAT cycles from the partition's write to the
// router (in the NI), the hub's TDM wait and transfer (see hub), and RX_LAT
// cycles from the hub to the sampling buffer (router register + NI).
//
// From the paper: four routers with three NIs each around one hub, the
// hybrid star/tree topology and the hub's mixed TDM/token arbitration.
// Lint note: the sync/async report on rst_n comes from the assertions in the
// hub and routers below ('disable iff'), not from any flip-flop.
module noc
  import partaa_pkg::*;
#(
  parameter int N_R     = 4,
  parameter int NPR     = 3,
  parameter int S_TOTAL = 12,
  parameter int T_SLOT  = 4,
  parameter int SLOT_OWNER [S_TOTAL] = '{0, 1, 2, 3, 4, 5, 6, 7, 8, 9, 10, 11}
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [N_R*NPR-1:0] ni_tx_valid,
  input  pkt_t               ni_tx_pkt [N_R*NPR],
  output logic [N_R*NPR-1:0] ni_rx_valid,
  output pkt_t               ni_rx_pkt [N_R*NPR],
  output logic [N_R*NPR-1:0] overrun,
  output logic               gs_grant,
  output logic               be_grant
);
  localparam int N_CH = N_R * NPR;

  logic [N_CH-1:0] req, grant;
  pkt_t            req_pkt [N_CH];
  logic [N_R-1:0]  hv;
  pkt_t            hp [N_R];

  for (genvar r = 0; r < N_R; r++) begin : g_router
    pkt_t tx_p [NPR];
    pkt_t rx_p [NPR];
    pkt_t rq_p [NPR];
    for (genvar i = 0; i < NPR; i++) begin : g_port
      assign tx_p[i]               = ni_tx_pkt[r*NPR+i];
      assign ni_rx_pkt[r*NPR+i]    = rx_p[i];
      assign req_pkt[r*NPR+i]      = rq_p[i];
    end
    router #(.R_ID(r), .NPR(NPR)) u_router (
      .clk, .rst_n,
      .ni_tx_valid (ni_tx_valid[r*NPR +: NPR]),
      .ni_tx_pkt   (tx_p),
      .ni_rx_valid (ni_rx_valid[r*NPR +: NPR]),
      .ni_rx_pkt   (rx_p),
      .hub_req     (req[r*NPR +: NPR]),
      .hub_pkt     (rq_p),
      .hub_grant   (grant[r*NPR +: NPR]),
      .hub_in_valid(hv[r]),
      .hub_in_pkt  (hp[r]),
      .overrun     (overrun[r*NPR +: NPR])
    );
  end

  hub #(.N_CH(N_CH), .N_R(N_R), .NPR(NPR), .S_TOTAL(S_TOTAL), .T_SLOT(T_SLOT),
        .SLOT_OWNER(SLOT_OWNER)) u_hub (
    .clk, .rst_n,
    .req, .pkt(req_pkt), .grant,
    .out_valid(hv), .out_pkt(hp),
    .gs_grant, .be_grant
  );
endmodule
