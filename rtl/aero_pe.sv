// aero_pe - one PaRTAA processing element: a partitioned AEro processor.
//
// Contents: the AEro core, its SwCU (partition schedule), the instruction
// memory shared by the three partitions, two MCUs (data port and stack
// port), the dual-port data memory, the processor-flag unit, and the three
// NIs, one per partition, memory-mapped into that partition's protected
// region.
//
// Data memory map as the core sees it (11-bit word address):
//   1_xxxx_xxxx_xx  protected region of the active partition (MCU: {apf,off})
//     off 0x000        write: set this partition's 10-bit flag (read: flag)
//     off 0x001-0x003  NI: destination, transmit data, fresh bits
//     off 0x010-0x01B  NI: sampling buffers of channels 0..11
//     off 0x020-0x03F  stack (second memory port)
//     above            private data
//   0_xxxx_xxxx_xx  shared region of this processor (MCU: {00,off})
//     0x00 clock_L, 0x04 clock_H, 0x08/0x12/0x16/0x20 processor 1..4 flags
//     (read-only; writes are dropped), 0x30-0x37 UART sampling buffers
//     (read-only), 0x38-0x3F UART output: a write to 0x38+i queues the
//     word as signal i, a read returns 1 while this processor's output
//     sample still waits; everything else shared data.
// A write to a read-only attachment has no effect. Attachment reads and
// writes never reach the data memory.
//
// Loading: while 'hold' (the GPIO pin) is high the SwCU drives apf = 00,
// nothing executes, and ld_imem_we / ld_dmem_we write the instruction and
// data memories at ld_addr (physical addresses).
//
// Timing: all reads complete in the core's M stage; writes take effect at
// the clock edge; flags, NI registers and memory are visible the next cycle.
//
// From the paper: the components and their connection, the four memory
// segments, the MCU rule, the flag and clock mapping of the shared region,
// the flag write at the protected base, and NIs mapped into protected
// space. Offsets other than the paper's table and the UART band are this
// design's choices.
// Lint note: the sync/async report on rst_n comes from the assertions in the
// core and NIs below ('disable iff'), not from any flip-flop.
module aero_pe
  import partaa_pkg::*;
#(
  parameter int          PE_ID  = 0,
  parameter logic [2:0][31:0] BUDGET = {32'd50000, 32'd50000, 32'd50000},
  parameter int          TX_LAT = 4,
  parameter int          RX_LAT = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              hold,
  // memory load port (used while hold = 1)
  input  logic              ld_imem_we,
  input  logic              ld_dmem_we,
  input  logic [11:0]       ld_addr,
  input  logic [31:0]       ld_data,
  // global attachments
  input  logic [63:0]       gclk,
  input  logic [31:0]       all_flags [N_PROC],
  input  logic [31:0]       uart_buf  [N_UART_SIG],
  // UART output slot of this processor
  output logic              uart_tx_we,
  output logic [7:0]        uart_tx_id,
  output logic [31:0]       uart_tx_data,
  input  logic              uart_tx_pend,
  output logic [31:0]       flags,
  // NoC back-end links of the three NIs
  output logic [N_PART-1:0] ni_tx_valid,
  output pkt_t              ni_tx_pkt [N_PART],
  input  logic [N_PART-1:0] ni_rx_valid,
  input  pkt_t              ni_rx_pkt [N_PART],
  // observation
  output logic [1:0]        apf,
  output logic              part_switch,
  output logic              retire,
  output logic              br_taken,
  output logic [N_PART-1:0] ni_overwrite
);
  // ---------------------------------------------------------------- SwCU
  swcu #(.BUDGET(BUDGET)) u_swcu (
    .clk, .rst_n, .hold, .apf, .part_switch
  );

  // ---------------------------------------------------------------- core
  logic [IMEM_AW-1:0] imem_addr;
  logic [31:0]        imem_rdata;
  logic               d_re, d_we;
  logic [VADDR_W-1:0] d_addr;
  logic [DATA_W-1:0]  d_wdata, d_rdata;
  logic               s_we;
  logic [OFF_W-1:0]   s_off;
  logic [DATA_W-1:0]  s_wdata, s_rdata;

  aero_core u_core (
    .clk, .rst_n, .apf,
    .imem_addr, .imem_rdata,
    .d_re, .d_we, .d_addr, .d_wdata, .d_rdata,
    .s_we, .s_off, .s_wdata, .s_rdata,
    .retire, .br_taken
  );

  imem #(.PC_W(PC_W)) u_imem (
    .clk,
    .ld_we  (ld_imem_we && hold),
    .ld_addr(ld_addr[IMEM_AW-1:0]),
    .ld_data,
    .raddr  (imem_addr),
    .rdata  (imem_rdata)
  );

  // ---------------------------------------------------------------- MCUs
  logic [DMEM_AW-1:0] pa, pb;
  mcu #(.N(DMEM_AW)) u_mcu_data  (.apf, .vaddr(d_addr),        .paddr(pa));
  mcu #(.N(DMEM_AW)) u_mcu_stack (.apf, .vaddr({1'b1, s_off}), .paddr(pb));

  logic [1:0]       seg;
  logic [OFF_W-1:0] off;
  assign seg = pa[DMEM_AW-1 -: 2];
  assign off = pa[OFF_W-1:0];

  // ----------------------------------------------------- flags and NIs
  logic [29:0] part_flags;
  logic        flag_we;
  assign flag_we = d_we && (seg != 2'b00) && (off == PR_FLAG);

  proc_flags u_flags (
    .clk, .rst_n, .apf,
    .we(flag_we), .wr_part(seg), .wdata(d_wdata),
    .part_flags, .flags
  );

  logic [DATA_W-1:0] ni_rdata [N_PART];
  logic [N_PART-1:0] ni_hit;
  for (genvar k = 0; k < N_PART; k++) begin : g_ni
    logic sel;
    assign sel = (seg == 2'(k + 1));
    ni #(.NI_ID(PE_ID * N_PART + k), .N_CH(N_NI),
         .TX_LAT(TX_LAT), .RX_LAT(RX_LAT)) u_ni (
      .clk, .rst_n,
      .mm_we   (d_we && sel),
      .mm_re   (d_re && sel),
      .mm_off  (off),
      .mm_wdata(d_wdata),
      .mm_rdata(ni_rdata[k]),
      .mm_hit  (ni_hit[k]),
      .tx_valid(ni_tx_valid[k]),
      .tx_pkt  (ni_tx_pkt[k]),
      .rx_valid(ni_rx_valid[k]),
      .rx_pkt  (ni_rx_pkt[k]),
      .rx_overwrite(ni_overwrite[k]),
      .fresh   ()              // software reads it through PR_NI_STAT
    );
  end

  // ------------------------------------------------- address decoding
  logic              attach;      // address belongs to an attachment
  logic [DATA_W-1:0] attach_rd;
  logic [OFF_W-1:0]  uart_idx;
  assign uart_idx = off - SH_UART_BASE;
  logic              uart_tx_hit;
  logic [OFF_W-1:0]  uart_tx_idx;
  assign uart_tx_idx = off - SH_UART_TX;
  assign uart_tx_hit = (seg == 2'b00) && (off >= SH_UART_TX)
                       && (uart_tx_idx < OFF_W'(N_UART_TX));
  assign uart_tx_we   = d_we && uart_tx_hit;
  assign uart_tx_id   = 8'(uart_tx_idx);
  assign uart_tx_data = d_wdata;

  always_comb begin
    attach    = 1'b0;
    attach_rd = '0;
    if (seg == 2'b00) begin
      unique case (off)
        SH_CLOCK_L: begin attach = 1'b1; attach_rd = gclk[31:0];   end
        SH_CLOCK_H: begin attach = 1'b1; attach_rd = gclk[63:32];  end
        SH_PFLAG1:  begin attach = 1'b1; attach_rd = all_flags[0]; end
        SH_PFLAG2:  begin attach = 1'b1; attach_rd = all_flags[1]; end
        SH_PFLAG3:  begin attach = 1'b1; attach_rd = all_flags[2]; end
        SH_PFLAG4:  begin attach = 1'b1; attach_rd = all_flags[3]; end
        default:
          if (off >= SH_UART_BASE && uart_idx < OFF_W'(N_UART_SIG)) begin
            attach    = 1'b1;
            attach_rd = uart_buf[uart_idx[$clog2(N_UART_SIG)-1:0]];
          end else if (uart_tx_hit) begin
            attach    = 1'b1;
            attach_rd = DATA_W'(uart_tx_pend);
          end
      endcase
    end else if (off == PR_FLAG) begin
      attach    = 1'b1;
      attach_rd = DATA_W'(part_flags[32'(seg - 2'd1) * 10 +: 10]);
    end else if (ni_hit[seg - 2'd1]) begin
      attach    = 1'b1;
      attach_rd = ni_rdata[seg - 2'd1];
    end
  end

  // ------------------------------------------------------- data memory
  logic              a_we;
  logic [DMEM_AW-1:0] a_addr;
  logic [DATA_W-1:0] a_wdata, a_rdata;
  assign a_we    = hold ? ld_dmem_we : (d_we && !attach);
  assign a_addr  = hold ? ld_addr    : pa;
  assign a_wdata = hold ? ld_data    : d_wdata;
  assign d_rdata = attach ? attach_rd : a_rdata;

  dmem #(.N(DMEM_AW), .W(DATA_W)) u_dmem (
    .clk,
    .a_we, .a_addr, .a_wdata, .a_rdata,
    .b_we(s_we), .b_addr(pb), .b_wdata(s_wdata), .b_rdata(s_rdata)
  );
endmodule
