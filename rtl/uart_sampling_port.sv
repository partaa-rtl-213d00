// uart_sampling_port - UART sampling port: a receiver with one sampling
// buffer per input signal, and a transmitter with one sample slot per
// processor.
//
// Mimics an avionics data concentrator: every signal value that arrives on
// the serial line is written into the buffer of that signal, so a value for
// one consumer can never be overwritten by a value of another signal, and
// it stays readable until a newer sample of the same signal arrives (also
// while the consuming partition is not scheduled). The buffers are read by
// all processors in their shared MM-IO band.
//
// Line format: 8 data bits, no parity, 1 stop bit, LSB first, CLKS_PER_BIT
// clock cycles per bit (434 = 115200 baud at the 50 MHz board clock).
// Message: one signal-id byte, then the 32-bit value as 4 bytes, least
// significant first. Ids >= N_SIG are dropped. Bytes are sampled at the
// middle of each bit; a start bit that is low at its middle starts a byte.
//
// Timing: buffer 'id' and its 'upd' pulse change one cycle after the middle
// of the last byte's stop bit.
//
// Transmit side: each of the N_SRC processors has one slot holding an
// output sample {id, value}. A tx_we pulse fills the slot; a newer sample
// written before the old one left replaces it (sampling semantics: the
// newest value is sent). tx_pend shows which slots are still waiting. When
// the line is idle the slots are served round-robin, starting after the
// last one sent, and a sample goes out as one message in the receive
// format: id byte, then the value LSB first, 8N1. The line goes low one
// cycle after a slot is taken, a message is 50 bit times, and tx_done
// pulses in the cycle after its last stop bit ends. A sample therefore
// starts within N_SRC message times (plus one idle cycle each) of being
// written.
//
// The paper describes the receive function (a custom UART IP core storing
// each signal in a separate sampling buffer) and says that outputs go to
// the host over UART. The line format, the message layout, the baud rate,
// the buffer count and the transmit slots and their arbitration are this
// design's choices.
module uart_sampling_port #(
  parameter int CLKS_PER_BIT = 434,
  parameter int N_SIG        = 8,
  parameter int N_SRC        = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             rx,
  output logic [31:0]      sbuf [N_SIG],
  output logic             upd,
  output logic             frame_err,
  // transmit side, one slot per source processor
  input  logic [N_SRC-1:0] tx_we,
  input  logic [7:0]       tx_id   [N_SRC],
  input  logic [31:0]      tx_data [N_SRC],
  output logic [N_SRC-1:0] tx_pend,
  output logic             tx,
  output logic             tx_done
);
  localparam int CW = $clog2(CLKS_PER_BIT + 1);

  typedef enum logic [1:0] {IDLE, START, DATA, STOP} rx_state_t;
  rx_state_t      st;
  logic [CW-1:0]  cnt;
  logic [2:0]     bitn;
  logic [7:0]     sh;
  logic [2:0]     byten;   // 0 = id byte, 1..4 = value bytes
  logic [7:0]     id_q;
  logic [23:0]    val_q;
  logic           rx_s1, rx_s2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_s1 <= 1'b1;
      rx_s2 <= 1'b1;
    end else begin
      rx_s1 <= rx;
      rx_s2 <= rx_s1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= IDLE;
      cnt       <= '0;
      bitn      <= '0;
      sh        <= '0;
      byten     <= '0;
      id_q      <= '0;
      val_q     <= '0;
      upd       <= 1'b0;
      frame_err <= 1'b0;
      for (int i = 0; i < N_SIG; i++) sbuf[i] <= '0;
    end else begin
      upd       <= 1'b0;
      frame_err <= 1'b0;
      unique case (st)
        IDLE: if (!rx_s2) begin st <= START; cnt <= '0; end
        START: begin
          if (cnt == CW'(CLKS_PER_BIT / 2 - 1)) begin
            cnt <= '0;
            st  <= rx_s2 ? IDLE : DATA;
            bitn <= '0;
          end else cnt <= cnt + 1'b1;
        end
        DATA: begin
          if (cnt == CW'(CLKS_PER_BIT - 1)) begin
            cnt <= '0;
            sh  <= {rx_s2, sh[7:1]};
            if (bitn == 3'd7) st <= STOP;
            bitn <= bitn + 1'b1;
          end else cnt <= cnt + 1'b1;
        end
        STOP: begin
          if (cnt == CW'(CLKS_PER_BIT - 1)) begin
            cnt <= '0;
            st  <= IDLE;
            if (!rx_s2) begin
              frame_err <= 1'b1;
              byten     <= '0;
            end else begin
              unique case (byten)
                3'd0: id_q <= sh;
                3'd1: val_q[7:0]   <= sh;
                3'd2: val_q[15:8]  <= sh;
                3'd3: val_q[23:16] <= sh;
                default: begin
                  if (int'(id_q) < N_SIG) begin
                    sbuf[id_q[$clog2(N_SIG)-1:0]] <= {sh, val_q};
                    upd <= 1'b1;
                  end
                end
              endcase
              byten <= (byten == 3'd4) ? 3'd0 : byten + 3'd1;
            end
          end else cnt <= cnt + 1'b1;
        end
        default: st <= IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------ transmit
  localparam int SW = (N_SRC > 1) ? $clog2(N_SRC) : 1;
  logic [7:0]     pid   [N_SRC];
  logic [31:0]    pdat  [N_SRC];
  logic [SW-1:0]  last;          // slot sent most recently
  logic           busy;
  logic [49:0]    frame;         // bits still to send, LSB first
  logic [5:0]     nbits;
  logic [CW-1:0]  tcnt;
  logic           pick_v;
  logic [SW-1:0]  pick;

  // Round-robin choice among the waiting slots, starting after 'last'.
  always_comb begin
    pick_v = 1'b0;
    pick   = '0;
    for (int i = 1; i <= N_SRC; i++) begin
      if (!pick_v && tx_pend[(int'(last) + i) % N_SRC]) begin
        pick_v = 1'b1;
        pick   = SW'((int'(last) + i) % N_SRC);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_pend <= '0;
      last    <= SW'(N_SRC - 1);
      busy    <= 1'b0;
      frame   <= '1;
      nbits   <= '0;
      tcnt    <= '0;
      tx_done <= 1'b0;
      for (int i = 0; i < N_SRC; i++) begin
        pid[i]  <= '0;
        pdat[i] <= '0;
      end
    end else begin
      tx_done <= 1'b0;
      if (!busy && pick_v) begin
        busy  <= 1'b1;
        last  <= pick;
        nbits <= 6'd50;
        tcnt  <= '0;
        frame <= {1'b1, pdat[pick][31:24], 1'b0, 1'b1, pdat[pick][23:16], 1'b0,
                  1'b1, pdat[pick][15:8],  1'b0, 1'b1, pdat[pick][7:0],   1'b0,
                  1'b1, pid[pick], 1'b0};
        tx_pend[pick] <= 1'b0;
      end else if (busy) begin
        if (tcnt == CW'(CLKS_PER_BIT - 1)) begin
          tcnt  <= '0;
          frame <= {1'b1, frame[49:1]};
          nbits <= nbits - 6'd1;
          if (nbits == 6'd1) begin
            busy    <= 1'b0;
            tx_done <= 1'b1;
          end
        end else tcnt <= tcnt + 1'b1;
      end
      // a write in the same cycle as the pick stays pending (it is newer)
      for (int i = 0; i < N_SRC; i++) begin
        if (tx_we[i]) begin
          tx_pend[i] <= 1'b1;
          pid[i]     <= tx_id[i];
          pdat[i]    <= tx_data[i];
        end
      end
    end
  end

  assign tx = busy ? frame[0] : 1'b1;
endmodule
