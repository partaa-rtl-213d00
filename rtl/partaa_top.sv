// partaa_top - PaRTAA: partitioned real-time asymmetric multiprocessor.
//
// Four AEro processing elements, each running three hardware partitions
// under its own time-triggered schedule, joined by a time-predictable NoC
// (hub - 4 routers - 12 NIs, one NI per partition). All processors see the
// same 64-bit global clock and each other's 32-bit processor-flag words in
// their shared regions. A UART sampling port feeds input signals to the
// shared MM-IO of every processor and sends the processors' output samples
// on uart_tx.
//
// Ports: 'hold' is the GPIO pin that forces every active-partition flag to
// 00 (no execution). While it is high, ld_* load the instruction (imem) or
// data (dmem) memory of processor ld_proc. Releasing 'hold' after a reset
// starts all processors at partition 1 with every PC at 0.
// proc_flags / apf / ev_* bring the processor flags and mechanism events
// out for observation.
//
// Structure as in the paper: four processors x three partitions, per-
// processor shared memory, one NI per partition, 4 routers, one hub, global
// clock and flag bus. The default partition budgets of processors 1 and 2
// are the partition times of the paper's avionics use case; the other
// budgets, the slot table, the NI latency split and the UART rate are this
// design's own values.
// Lint note: the sync/async report on rst_n comes from the assertions in the
// processing elements and the NoC ('disable iff'), not from any flip-flop.
module partaa_top
  import partaa_pkg::*;
#(
  // BUDGET[g][i] = cycles of partition i+1 of processor g+1 per round, at
  // 50 MHz: processor 1 partitions 1 and 2 (flight director, autopilot)
  // 2 ms, processor 2 partitions 1 and 3 (EIS, moving map) 1 ms as in the
  // paper's use case; the partitions it leaves unused get 1 ms.
  parameter logic [N_PROC-1:0][2:0][31:0] BUDGET = {
    {32'd50000, 32'd50000, 32'd50000},
    {32'd50000, 32'd50000, 32'd50000},
    {32'd50000, 32'd50000, 32'd50000},
    {32'd50000, 32'd100000, 32'd100000}},
  parameter int TX_LAT       = 4,
  parameter int RX_LAT       = 4,
  parameter int S_TOTAL      = 12,
  parameter int T_SLOT       = 4,
  parameter int SLOT_OWNER [S_TOTAL] = '{0, 1, 2, 3, 4, 5, 6, 7, 8, 9, 10, 11},
  parameter int UART_CLKS    = 434
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              hold,
  // memory load port
  input  logic [1:0]        ld_proc,
  input  logic              ld_imem_we,
  input  logic              ld_dmem_we,
  input  logic [11:0]       ld_addr,
  input  logic [31:0]       ld_data,
  // serial input of the data-concentrator UART
  input  logic              uart_rx,
  // serial output of the same UART (output samples of all processors)
  output logic              uart_tx,
  // observation
  output logic [31:0]       proc_flags [N_PROC],
  output logic [1:0]        apf        [N_PROC],
  output logic [63:0]       gclk,
  output logic [N_PROC-1:0] ev_part_switch,
  output logic [N_PROC-1:0] ev_retire,
  output logic [N_PROC-1:0] ev_branch,
  output logic [N_NI-1:0]   ev_rx_overwrite,
  output logic [N_NI-1:0]   ev_overrun,
  output logic              ev_gs_grant,
  output logic              ev_be_grant,
  output logic              ev_uart_update,
  output logic              ev_uart_frame_err,
  output logic              ev_uart_tx_done
);
  logic [31:0] uart_buf [N_UART_SIG];
  logic [N_PROC-1:0] utx_we, utx_pend;
  logic [7:0]        utx_id   [N_PROC];
  logic [31:0]       utx_data [N_PROC];

  global_clock u_gclk (.clk, .rst_n, .count(gclk));

  uart_sampling_port #(.CLKS_PER_BIT(UART_CLKS), .N_SIG(N_UART_SIG),
                       .N_SRC(N_PROC)) u_uart (
    .clk, .rst_n, .rx(uart_rx), .sbuf(uart_buf), .upd(ev_uart_update),
    .frame_err(ev_uart_frame_err),
    .tx_we(utx_we), .tx_id(utx_id), .tx_data(utx_data), .tx_pend(utx_pend),
    .tx(uart_tx), .tx_done(ev_uart_tx_done)
  );

  logic [N_NI-1:0] tx_v, rx_v;
  pkt_t            tx_p [N_NI];
  pkt_t            rx_p [N_NI];

  for (genvar g = 0; g < N_PROC; g++) begin : g_pe
    pkt_t txp [N_PART];
    pkt_t rxp [N_PART];
    for (genvar k = 0; k < N_PART; k++) begin : g_link
      assign tx_p[g*N_PART+k] = txp[k];
      assign rxp[k]           = rx_p[g*N_PART+k];
    end
    aero_pe #(.PE_ID(g), .BUDGET(BUDGET[g]), .TX_LAT(TX_LAT), .RX_LAT(RX_LAT)) u_pe (
      .clk, .rst_n, .hold,
      .ld_imem_we(ld_imem_we && ld_proc == 2'(g)),
      .ld_dmem_we(ld_dmem_we && ld_proc == 2'(g)),
      .ld_addr, .ld_data,
      .gclk,
      .all_flags  (proc_flags),
      .uart_buf,
      .uart_tx_we  (utx_we[g]),
      .uart_tx_id  (utx_id[g]),
      .uart_tx_data(utx_data[g]),
      .uart_tx_pend(utx_pend[g]),
      .flags      (proc_flags[g]),
      .ni_tx_valid(tx_v[g*N_PART +: N_PART]),
      .ni_tx_pkt  (txp),
      .ni_rx_valid(rx_v[g*N_PART +: N_PART]),
      .ni_rx_pkt  (rxp),
      .apf        (apf[g]),
      .part_switch(ev_part_switch[g]),
      .retire     (ev_retire[g]),
      .br_taken   (ev_branch[g]),
      .ni_overwrite(ev_rx_overwrite[g*N_PART +: N_PART])
    );
  end

  noc #(.N_R(N_PROC), .NPR(N_PART), .S_TOTAL(S_TOTAL), .T_SLOT(T_SLOT),
        .SLOT_OWNER(SLOT_OWNER)) u_noc (
    .clk, .rst_n,
    .ni_tx_valid(tx_v), .ni_tx_pkt(tx_p),
    .ni_rx_valid(rx_v), .ni_rx_pkt(rx_p),
    .overrun(ev_overrun),
    .gs_grant(ev_gs_grant), .be_grant(ev_be_grant)
  );
endmodule
