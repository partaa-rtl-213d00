// ni - network interface of one partition.
//
// Front end: memory-mapped into the protected region of the partition it
// belongs to. The partition writes the destination NI id (PR_NI_DEST) and
// then the data word (PR_NI_DATA). The data write fills the single
// transmission buffer, which holds the packet for one cycle. In the next
// cycle the packet, packed with {destination, channel id = NI_ID} in its
// header, moves on towards the router. Reading PR_NI_STAT returns one
// "fresh" bit per reception channel. Reading PR_NI_RX + c returns the
// sampling buffer of channel c and clears its fresh bit.
//
// Back end: one sampling buffer per reception channel (channel = source
// NI). A packet from channel c overwrites buffer c, so a slow consumer
// always reads the newest sample. Packets wait in no queue; the buffers
// keep their data while the owning partition is not scheduled.
//
// Timing: TX_LAT clock edges from the data write to the packet being
// pending in the router. RX_LAT edges from the hub delivering the packet to
// the sampling buffer holding it; one of those edges is the router's
// output register, RX_LAT-1 are here. With the defaults 4 + 4 the NI legs
// add up to 8 cycles. The paper gives this 8-cycle total; the split into two
// equal legs is this design's choice.
//
// From the paper: the front/back ends, the memory mapping, the single
// one-cycle transmission buffer, the channel id, one sampling buffer per
// reception channel with overwrite by fresher data, and the rule that two
// writes of a producer are more than two cycles apart (checked by an
// assertion). Register offsets and the fresh bits are this design's choice.
// Lint notes: the destination field of a received packet is unused here
// (the router already delivered it to the right NI). rst_n also feeds the
// 'disable iff' of the assertion (reported as sync and async use).
module ni
  import partaa_pkg::*;
#(
  parameter int NI_ID  = 0,
  parameter int N_CH   = 12,
  parameter int TX_LAT = 4,
  parameter int RX_LAT = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // memory-mapped front end (offset inside the protected region)
  input  logic              mm_we,
  input  logic              mm_re,
  input  logic [OFF_W-1:0]  mm_off,
  input  logic [DATA_W-1:0] mm_wdata,
  output logic [DATA_W-1:0] mm_rdata,
  output logic              mm_hit,
  // back end to the router
  output logic              tx_valid,
  output pkt_t              tx_pkt,
  input  logic              rx_valid,
  input  pkt_t              rx_pkt,
  // observation
  output logic              rx_overwrite,  // unread sample replaced
  output logic [N_CH-1:0]   fresh
);
  localparam int TXS = TX_LAT - 1;   // stages after the tx buffer
  localparam int RXS = RX_LAT - 2;   // stages before the sampling buffer

  logic [NI_AW-1:0]  dest_q;
  logic              txb_v;
  pkt_t              txb;
  logic              tx_v [TXS];
  pkt_t              tx_p [TXS];
  logic              rx_v [RXS+1];
  pkt_t              rx_p [RXS+1];
  logic [DATA_W-1:0] sbuf [N_CH];

  logic wr_dest, wr_data, rd_rx;
  logic [OFF_W-1:0] rx_idx;
  assign wr_dest = mm_we && (mm_off == PR_NI_DEST);
  assign wr_data = mm_we && (mm_off == PR_NI_DATA);
  assign rx_idx  = mm_off - PR_NI_RX;
  assign rd_rx   = mm_re && (mm_off >= PR_NI_RX) && (rx_idx < OFF_W'(N_CH));

  assign mm_hit = (mm_off == PR_NI_DEST) || (mm_off == PR_NI_DATA) ||
                  (mm_off == PR_NI_STAT) ||
                  ((mm_off >= PR_NI_RX) && (rx_idx < OFF_W'(N_CH)));

  always_comb begin
    mm_rdata = '0;
    if (mm_off == PR_NI_DEST)      mm_rdata = DATA_W'(dest_q);
    else if (mm_off == PR_NI_STAT) mm_rdata = DATA_W'(fresh);
    else if ((mm_off >= PR_NI_RX) && (rx_idx < OFF_W'(N_CH)))
      mm_rdata = sbuf[rx_idx[NI_AW-1:0]];
  end

  // Transmission: one-cycle buffer, then a fixed pipeline to the router.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dest_q <= '0;
      txb_v  <= 1'b0;
      txb    <= '0;
      for (int i = 0; i < TXS; i++) begin tx_v[i] <= 1'b0; tx_p[i] <= '0; end
    end else begin
      if (wr_dest) dest_q <= mm_wdata[NI_AW-1:0];
      txb_v <= wr_data;
      if (wr_data) txb <= '{dest: dest_q, src: NI_AW'(NI_ID), data: mm_wdata};
      tx_v[0] <= txb_v;
      tx_p[0] <= txb;
      for (int i = 1; i < TXS; i++) begin tx_v[i] <= tx_v[i-1]; tx_p[i] <= tx_p[i-1]; end
    end
  end
  assign tx_valid = tx_v[TXS-1];
  assign tx_pkt   = tx_p[TXS-1];

  // Reception: fixed pipeline, then the channel's sampling buffer.
  logic rx_in_v;
  pkt_t rx_in;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i <= RXS; i++) begin rx_v[i] <= 1'b0; rx_p[i] <= '0; end
    end else begin
      rx_v[0] <= rx_valid;
      rx_p[0] <= rx_pkt;
      for (int i = 1; i <= RXS; i++) begin rx_v[i] <= rx_v[i-1]; rx_p[i] <= rx_p[i-1]; end
    end
  end
  // Index RXS-1 is the last pipeline stage (RXS >= 1); rx_v[RXS] is spare
  // storage that keeps the array non-empty when RXS = 0.
  assign rx_in_v = (RXS == 0) ? rx_valid : rx_v[(RXS == 0) ? 0 : RXS-1];
  assign rx_in   = (RXS == 0) ? rx_pkt   : rx_p[(RXS == 0) ? 0 : RXS-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < N_CH; c++) sbuf[c] <= '0;
      fresh        <= '0;
      rx_overwrite <= 1'b0;
    end else begin
      rx_overwrite <= 1'b0;
      if (rd_rx) fresh[rx_idx[NI_AW-1:0]] <= 1'b0;
      if (rx_in_v && int'(rx_in.src) < N_CH) begin
        sbuf[rx_in.src]  <= rx_in.data;
        fresh[rx_in.src] <= 1'b1;
        rx_overwrite     <= fresh[rx_in.src] &&
                            !(rd_rx && rx_idx[NI_AW-1:0] == rx_in.src);
      end
    end
  end

  // A producer writes at most one packet per three cycles.
  assert property (@(posedge clk) disable iff (!rst_n)
                   wr_data |=> !wr_data [*2]);
endmodule
