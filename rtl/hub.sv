// hub - centre of the star NoC with TDM / token-passing arbitration.
//
// Time is divided into an arbitration cycle of S_TOTAL slots of T_SLOT
// clock cycles. SLOT_OWNER[s] names the channel (transmitting NI) that owns
// slot s; a channel with more slots gets more bandwidth and a shorter
// worst-case wait. In the first cycle of each slot the hub grants:
//   * the owner, if it has a packet pending (guaranteed service);
//   * otherwise the token passes to the pending channel that has waited
//     longest (dynamic priority that grows with waiting time, lowest index on
//     a tie). This is best-effort service in a slot that would otherwise be
//     idle, and it never delays an owner.
// The granted packet is registered and delivered to its destination router
// one cycle later. One packet moves per slot.
//
// Worst case, router to router: a packet that becomes pending just after
// its channel's slot has started waits until the next owned slot and is
// delivered one cycle after that slot starts. With the owned slots spread
// evenly this is bounded by
//   L = (floor((S_TOTAL-1)/S_channel) + 1) * T_SLOT + 1   clock cycles,
// the bound the paper gives.
//
// From the paper: hub in a star of routers, TDM combined with dynamic-
// priority token passing, guaranteed and best-effort traffic, the latency
// bound, and no software access to the configuration (parameters only).
// Slot count, slot length, the slot table and the waiting-time priority
// rule are this design's choices.
// Lint note: rst_n also feeds the 'disable iff' of the one-hot assertion,
// which verilator reports as a net used both synchronously and
// asynchronously; the flip-flops use it only as an asynchronous reset.
module hub
  import partaa_pkg::*;
#(
  parameter int N_CH    = 12,
  parameter int N_R     = 4,
  parameter int NPR     = 3,
  parameter int S_TOTAL = 12,
  parameter int T_SLOT  = 4,
  parameter int SLOT_OWNER [S_TOTAL] = '{0, 1, 2, 3, 4, 5, 6, 7, 8, 9, 10, 11}
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [N_CH-1:0] req,
  input  pkt_t            pkt      [N_CH],
  output logic [N_CH-1:0] grant,
  output logic [N_R-1:0]  out_valid,
  output pkt_t            out_pkt  [N_R],
  // observation
  output logic            gs_grant,    // owner used its slot
  output logic            be_grant     // idle slot passed on by token
);
  localparam int SW = (S_TOTAL > 1) ? $clog2(S_TOTAL) : 1;
  localparam int TW = (T_SLOT  > 1) ? $clog2(T_SLOT)  : 1;
  localparam int CW = $clog2(N_CH);
  localparam int AW = 8;

  logic [SW-1:0] slot;
  logic [TW-1:0] tick;
  logic [AW-1:0] age [N_CH];

  logic          slot_start;
  logic [CW-1:0] owner, sel, best;
  logic          any_req;
  assign slot_start = (tick == '0);
  assign owner      = CW'(SLOT_OWNER[slot]);

  always_comb begin
    best    = '0;
    any_req = 1'b0;
    for (int i = 0; i < N_CH; i++) begin
      if (req[i] && (!any_req || age[i] > age[best])) begin
        best    = CW'(i);
        any_req = 1'b1;
      end
    end
    grant    = '0;
    gs_grant = 1'b0;
    be_grant = 1'b0;
    sel      = owner;
    if (slot_start) begin
      if (req[owner]) begin
        grant[owner] = 1'b1;
        gs_grant     = 1'b1;
      end else if (any_req) begin
        sel          = best;
        grant[best]  = 1'b1;
        be_grant     = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot      <= '0;
      tick      <= '0;
      out_valid <= '0;
      for (int r = 0; r < N_R; r++)  out_pkt[r] <= '0;
      for (int i = 0; i < N_CH; i++) age[i] <= '0;
    end else begin
      if (tick == TW'(T_SLOT - 1)) begin
        tick <= '0;
        slot <= (slot == SW'(S_TOTAL - 1)) ? '0 : slot + SW'(1);
      end else begin
        tick <= tick + TW'(1);
      end
      for (int i = 0; i < N_CH; i++) begin
        if (!req[i] || grant[i])   age[i] <= '0;
        else if (age[i] != '1)     age[i] <= age[i] + AW'(1);
      end
      out_valid <= '0;
      if (grant != '0) begin
        out_valid[int'(pkt[sel].dest) / NPR] <= 1'b1;
        out_pkt[int'(pkt[sel].dest) / NPR]   <= pkt[sel];
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(grant));
endmodule
