// Master controller of the USB 3.0 chip in Slave FIFO mode.
//
// The USB chip holds two endpoint buffers: a downstream one filled by the
// host (commands) and an upstream one that the FPGA fills with event data.
// Both are reached over one 32-bit bidirectional bus at 100 MHz (400 MB/s),
// selected by a 2-bit FIFO address, and each has a status flag.
//
// The state machine gives the downstream direction priority, as in the
// paper's flow chart: after initialisation it checks "downlink data?" (the
// downstream flag); if set it receives a word, then checks whether the upload
// buffer is empty; if it is not, it transmits, otherwise it goes back to the
// downlink check. With no downlink data it checks "uplink data?" and
// transmits when there is some. A transmit burst writes up to BURST words
// while the upstream flag allows. When the uplink check finds no data but
// words were written since the last packet end, PKTEND# is pulsed so the
// chip commits the short packet. The reading of the chart's "Empty"
// box as the upload buffer, the return paths, the two-clock read latency,
// the flag polarities and the addresses (0 = downstream, 3 = upstream) are
// this design's assumptions, typical of such chips.
//
// Host words go out on cmd_valid/cmd_word and are held until cmd_ready.
// Upload words come from a first-word-fall-through source (up_valid,
// up_word, up_ready).
module usb_fifo_ctrl #(
  parameter int unsigned BURST   = 256,
  parameter int unsigned RD_LAT  = 2,   // clocks from SLRD# low to data on DQ
  parameter int unsigned SETTLE  = 3    // clocks for a flag to follow an access
) (
  input  logic        clk,
  input  logic        rst,
  // USB chip
  input  logic        flag_rx_rdy,    // downstream buffer not empty
  input  logic        flag_tx_rdy,    // upstream buffer can take a word
  output logic        slcs_n,
  output logic        slrd_n,
  output logic        sloe_n,
  output logic        slwr_n,
  output logic        pktend_n,
  output logic [1:0]  addr,
  output logic [31:0] dq_o,
  output logic        dq_oe,
  input  logic [31:0] dq_i,
  // command side
  output logic        cmd_valid,
  output logic [31:0] cmd_word,
  input  logic        cmd_ready,
  // upload side
  input  logic        up_valid,
  input  logic [31:0] up_word,
  output logic        up_ready,
  output logic [31:0] rx_words,
  output logic [31:0] tx_words
);
  typedef enum logic [2:0] {
    S_INIT, S_DL_CHK, S_UL_CHK, S_RX, S_RX_WAIT, S_EMPTY_CHK, S_TX, S_SETTLE
  } ustate_e;

  ustate_e st;
  logic [$clog2(BURST+1)-1:0] nburst;
  logic [3:0]                 cnt;
  logic                       wr_now;
  logic                       pend;     // words written since the last PKTEND#

  assign slcs_n   = 1'b0;
  assign wr_now   = (st == S_TX) && up_valid && flag_tx_rdy;
  assign up_ready = wr_now;
  assign slwr_n   = !wr_now;
  assign dq_o     = up_word;
  assign dq_oe    = (st == S_TX);

  always_ff @(posedge clk) begin
    if (rst) begin
      st        <= S_INIT;
      slrd_n    <= 1'b1;
      sloe_n    <= 1'b1;
      pktend_n  <= 1'b1;
      addr      <= 2'd0;
      cnt       <= '0;
      nburst    <= '0;
      cmd_valid <= 1'b0;
      cmd_word  <= '0;
      rx_words  <= '0;
      tx_words  <= '0;
      pend      <= 1'b0;
    end else begin
      slrd_n   <= 1'b1;
      pktend_n <= 1'b1;
      if (cmd_valid && cmd_ready) cmd_valid <= 1'b0;
      if (wr_now) begin
        tx_words <= tx_words + 1'b1;
        pend     <= 1'b1;
      end
      unique case (st)
        S_INIT: begin
          addr <= 2'd0;
          st   <= S_DL_CHK;
        end
        S_DL_CHK: begin
          if (flag_rx_rdy && !cmd_valid) begin   // Downlink data? yes
            addr   <= 2'd0;
            sloe_n <= 1'b0;
            slrd_n <= 1'b0;
            cnt    <= 4'(RD_LAT);
            st     <= S_RX_WAIT;
          end else st <= S_UL_CHK;                // no
        end
        S_UL_CHK: begin
          if (up_valid) begin                      // Uplink data? yes
            addr   <= 2'd3;
            nburst <= '0;
            st     <= S_TX;
          end else begin                           // no
            if (pend) begin                        // commit a short packet
              addr     <= 2'd3;
              pktend_n <= 1'b0;
              pend     <= 1'b0;
            end
            st <= S_DL_CHK;
          end
        end
        S_RX_WAIT: begin                           // Receive data
          if (cnt == 4'd1) begin
            cmd_word  <= dq_i;
            cmd_valid <= 1'b1;
            rx_words  <= rx_words + 1'b1;
            sloe_n    <= 1'b1;
            st        <= S_EMPTY_CHK;
          end else cnt <= cnt - 1'b1;
        end
        S_EMPTY_CHK: begin                         // Empty? (upload buffer)
          if (up_valid) begin                      // no
            addr   <= 2'd3;
            nburst <= '0;
            st     <= S_TX;
          end else begin
            cnt <= 4'(SETTLE);
            st  <= S_SETTLE;
          end
        end
        S_TX: begin                                // Transmit
          if (wr_now) nburst <= nburst + 1'b1;
          if (!up_valid || (wr_now && 32'(nburst) == BURST - 1) || !flag_tx_rdy) begin
            cnt <= 4'(SETTLE);
            st  <= S_SETTLE;
          end
        end
        S_SETTLE: begin
          addr <= 2'd0;
          if (cnt <= 4'd1) st <= S_DL_CHK;
          else cnt <= cnt - 1'b1;
        end
        default: st <= S_INIT;
      endcase
    end
  end
endmodule
