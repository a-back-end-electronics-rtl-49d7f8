// Back-end readout logic: top level.
//
// One FPGA connects up to N_FIBER front-end boards over normal-IO fiber links
// (100 Mbps Manchester downlink, 400 Mbps scrambled uplink) and up to N_GTX
// boards over GTX fiber links (16-bit words at 2.4 Gbps), distributes
// triggers to all of them, runs a trigger logic unit for test-beam devices,
// and exchanges commands and data with a host PC through a USB 3.0 chip in
// Slave FIFO mode.
//
// Clock domains: clk (100 MHz system; links, trigger control, USB), tlu_clk
// (40 MHz, TLU and its CLK outputs) and gt_clk (120 MHz GT user clock).
// Vendor primitives stay outside: fib_rx_bits come from 1:4 input
// deserializers behind input delay lines (tap value fib_dly_tap, 78 ps steps),
// fib_tx_sym go to 2:1 output serializers, gt_tx_word/gt_rx_word to the GT
// transceivers. The CLK pair of the HDMI ports is tlu_clk itself, forwarded
// outside; the SPARE pair is idle.
//
// Data flow: host word -> usb_fifo_ctrl -> cmd_parser -> registers or
// forwarded to link command/data channels. Uplink trigger requests ->
// trig_ctrl (self trigger); SMA input and TLU triggers -> trig_ctrl (external
// trigger); trig_ctrl -> trigger channel of every link. Uplink data words and
// command replies -> data_collector -> usb_fifo_ctrl -> host.
module backend_top
  import be_pkg::*;
#(
  parameter int unsigned N_FIBER = N_FIBER_DEF,
  parameter int unsigned N_GTX   = N_GTX_DEF
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     tlu_clk,
  input  logic                     tlu_rst,
  input  logic                     gt_clk,
  input  logic                     gt_rst,
  // normal-IO fiber links
  input  logic [N_FIBER-1:0][3:0]  fib_rx_bits,
  output logic [N_FIBER-1:0][1:0]  fib_tx_sym,
  output logic [N_FIBER-1:0][4:0]  fib_dly_tap,
  // GTX links
  output logic [N_GTX-1:0][15:0]   gt_tx_word,
  input  logic [N_GTX-1:0][15:0]   gt_rx_word,
  // external trigger input (SMA), asynchronous
  input  logic                     sma_trig,
  // TLU
  input  logic [9:0]               lemo_in,
  input  logic [7:0]               hdmi_busy,
  output logic                     hdmi_trig,
  output logic                     hdmi_trig_id,
  output logic [3:0]               rj45_o,      // pairs: 0 CLK, 1 TRIG, 2 BUSY, 3 TRIG-ID
  output logic [3:0]               rj45_oe,
  input  logic [3:0]               rj45_i,
  // threshold DAC
  output logic                     dac_sync_n,
  output logic                     dac_sclk,
  output logic                     dac_din,
  // USB chip, Slave FIFO
  input  logic                     usb_flag_rx_rdy,
  input  logic                     usb_flag_tx_rdy,
  output logic                     usb_slcs_n,
  output logic                     usb_slrd_n,
  output logic                     usb_sloe_n,
  output logic                     usb_slwr_n,
  output logic                     usb_pktend_n,
  output logic [1:0]               usb_addr,
  output logic [31:0]              usb_dq_o,
  output logic                     usb_dq_oe,
  input  logic [31:0]              usb_dq_i,
  // status
  output logic [31:0]              up_drop_cnt
);
  localparam int unsigned NLINK = N_FIBER + N_GTX;
  localparam int unsigned N_SRC = 2 * NLINK + 1;

  // ---------------- host side ----------------
  logic        hc_valid, hc_ready;
  logic [31:0] hc_word;
  logic        up_valid, up_ready;
  logic [31:0] up_word, usb_rx_words, usb_tx_words;

  logic        fwd_valid, fwd_is_data, fwd_ready;
  logic [5:0]  fwd_link;
  logic [23:0] fwd_msg;
  logic        rd_valid;
  logic [31:0] rd_word;

  trig_mode_e  trig_mode;
  logic [31:0] test_period;
  logic [7:0]  self_mult, self_win;
  logic [9:0]  tlu_in_en;
  logic [8:0]  tlu_busy_en;
  logic [3:0]  tlu_level, rj45_dir;
  logic        prbs_dl_en, prbs_ul_en, prbs_clr;
  logic [1:0]  ext_src;
  logic [N_FIBER-1:0][1:0]  slip;
  logic [N_FIBER-1:0][15:0] prbs_err;
  logic        dac_valid, dac_ready;
  logic [3:0]  dac_ch;
  logic [11:0] dac_val;
  logic [31:0] trig_cnt, trig_drop;
  logic [15:0] tlu_cnt_sys;

  usb_fifo_ctrl u_usb (
    .clk, .rst,
    .flag_rx_rdy(usb_flag_rx_rdy), .flag_tx_rdy(usb_flag_tx_rdy),
    .slcs_n(usb_slcs_n), .slrd_n(usb_slrd_n), .sloe_n(usb_sloe_n), .slwr_n(usb_slwr_n),
    .pktend_n(usb_pktend_n), .addr(usb_addr), .dq_o(usb_dq_o), .dq_oe(usb_dq_oe), .dq_i(usb_dq_i),
    .cmd_valid(hc_valid), .cmd_word(hc_word), .cmd_ready(hc_ready),
    .up_valid, .up_word, .up_ready, .rx_words(usb_rx_words), .tx_words(usb_tx_words));

  cmd_parser #(.N_FIBER(N_FIBER)) u_cmd (
    .clk, .rst,
    .cmd_valid(hc_valid), .cmd_word(hc_word), .cmd_ready(hc_ready),
    .fwd_valid, .fwd_is_data, .fwd_link, .fwd_msg, .fwd_ready,
    .rd_valid, .rd_word, .rd_ready(1'b1),
    .trig_mode, .test_period, .self_mult, .self_win, .tlu_in_en, .tlu_busy_en,
    .tlu_level, .rj45_dir, .prbs_dl_en, .prbs_ul_en, .prbs_clr, .ext_src,
    .dly_tap(fib_dly_tap), .slip,
    .dac_valid, .dac_ch, .dac_val, .dac_ready,
    .st_trig_cnt(trig_cnt[15:0]), .st_trig_drop(trig_drop[15:0]), .st_tlu_cnt(tlu_cnt_sys),
    .st_prbs_err(prbs_err));

  dac_ctrl u_dac (
    .clk, .rst, .wr_valid(dac_valid), .wr_ch(dac_ch), .wr_val(dac_val), .wr_ready(dac_ready),
    .sync_n(dac_sync_n), .sclk(dac_sclk), .din(dac_din));

  // ---------------- link fan-out of triggers and forwarded words ----------------
  logic                  tc_valid, tc_ready;
  logic [TRIG_MSG_W-1:0] tc_msg;
  logic [NLINK-1:0]      l_trig_ready, l_cmd_ready, l_data_ready, l_sel;
  logic [NLINK-1:0]      l_ul_trig, l_ul_cmd_v, l_ul_data_v;
  logic [NLINK-1:0][UCMD_MSG_W-1:0] l_ul_cmd;
  logic [NLINK-1:0][UDAT_MSG_W-1:0] l_ul_data;
  logic [NLINK-1:0][UTRG_MSG_W-1:0] l_ul_tmsg;

  assign tc_ready = &l_trig_ready;

  always_comb begin
    fwd_ready = 1'b1;
    for (int i = 0; i < NLINK; i++) begin
      l_sel[i] = (fwd_link == 6'(i)) || (fwd_link == LINK_ALL);
      if (l_sel[i] && !(fwd_is_data ? l_data_ready[i] : l_cmd_ready[i])) fwd_ready = 1'b0;
    end
  end

  // ---------------- normal-IO fiber links ----------------
  for (genvar i = 0; i < N_FIBER; i++) begin : g_fib
    logic unused_lock;
    fiber_dl_link u_dl (
      .clk, .rst,
      .trig_valid(tc_valid && tc_ready), .trig_msg(tc_msg), .trig_ready(l_trig_ready[i]),
      .cmd_valid(fwd_valid && fwd_ready && l_sel[i] && !fwd_is_data), .cmd_msg(fwd_msg),
      .cmd_ready(l_cmd_ready[i]),
      .data_valid(fwd_valid && fwd_ready && l_sel[i] && fwd_is_data), .data_msg(fwd_msg),
      .data_ready(l_data_ready[i]),
      .prbs_en(prbs_dl_en), .sym_o(fib_tx_sym[i]));
    fiber_ul_link u_ul (
      .clk, .rst, .rx_bits(fib_rx_bits[i]), .slip(slip[i]),
      .trig_valid(l_ul_trig[i]), .trig_msg(l_ul_tmsg[i]),
      .cmd_valid(l_ul_cmd_v[i]), .cmd_msg(l_ul_cmd[i]),
      .data_valid(l_ul_data_v[i]), .data_msg(l_ul_data[i]),
      .prbs_en(prbs_ul_en), .prbs_clr(prbs_clr), .prbs_err(prbs_err[i]),
      .prbs_locked(unused_lock));
  end

  // ---------------- GTX links ----------------
  for (genvar j = 0; j < N_GTX; j++) begin : g_gtx
    localparam int unsigned L = N_FIBER + j;
    logic [15:0] unused_drop;
    gtx_link u_gtx (
      .clk, .rst,
      .trig_valid(tc_valid && tc_ready), .trig_msg(tc_msg), .trig_ready(l_trig_ready[L]),
      .cmd_valid(fwd_valid && fwd_ready && l_sel[L] && !fwd_is_data), .cmd_msg(fwd_msg),
      .cmd_ready(l_cmd_ready[L]),
      .data_valid(fwd_valid && fwd_ready && l_sel[L] && fwd_is_data), .data_msg(fwd_msg),
      .data_ready(l_data_ready[L]),
      .ul_trig_valid(l_ul_trig[L]), .ul_trig_msg(l_ul_tmsg[L]),
      .ul_cmd_valid(l_ul_cmd_v[L]), .ul_cmd_msg(l_ul_cmd[L]),
      .ul_data_valid(l_ul_data_v[L]), .ul_data_msg(l_ul_data[L]),
      .ul_drop_cnt(unused_drop),
      .gt_clk, .gt_rst, .gt_tx_word(gt_tx_word[j]), .gt_rx_word(gt_rx_word[j]));
  end

  // ---------------- external trigger sources ----------------
  logic [2:0] sma_s;
  logic       sma_pulse, tlu_pulse_sys, ext_trig;

  always_ff @(posedge clk) begin
    if (rst) sma_s <= '0;
    else     sma_s <= {sma_s[1:0], sma_trig};
  end
  assign sma_pulse = sma_s[1] && !sma_s[2];

  // TLU trigger pulses cross from tlu_clk by a toggle synchroniser
  logic        tlu_pulse, tlu_tog;
  logic [2:0]  tlu_tog_s;
  logic [15:0] unused_tlu_id;
  logic [31:0] unused_tlu_cnt, unused_tlu_veto;
  logic        unused_tlu_busy;
  logic [9:0]  tlu_in_en_t1, tlu_in_en_t;
  logic [8:0]  tlu_busy_en_t1, tlu_busy_en_t;
  logic [3:0]  tlu_level_t1, tlu_level_t, rj45_dir_t1, rj45_dir_t;
  logic        rj45_trig_o, rj45_busy_o, rj45_id_o;

  // quasi-static configuration into the TLU clock domain
  always_ff @(posedge tlu_clk) begin
    if (tlu_rst) begin
      {tlu_in_en_t1, tlu_in_en_t} <= '0;
      {tlu_busy_en_t1, tlu_busy_en_t} <= '0;
      {tlu_level_t1, tlu_level_t} <= {4'd1, 4'd1};
      {rj45_dir_t1, rj45_dir_t} <= '0;
      tlu_tog <= 1'b0;
    end else begin
      tlu_in_en_t1 <= tlu_in_en;   tlu_in_en_t <= tlu_in_en_t1;
      tlu_busy_en_t1 <= tlu_busy_en; tlu_busy_en_t <= tlu_busy_en_t1;
      tlu_level_t1 <= tlu_level;   tlu_level_t <= tlu_level_t1;
      rj45_dir_t1 <= rj45_dir;     rj45_dir_t <= rj45_dir_t1;
      if (tlu_pulse) tlu_tog <= ~tlu_tog;
    end
  end

  tlu u_tlu (
    .clk(tlu_clk), .rst(tlu_rst), .lemo_in, .in_en(tlu_in_en_t), .level(tlu_level_t),
    .hdmi_busy, .busy_en(tlu_busy_en_t), .rj45_dir(rj45_dir_t), .rj45_i,
    .hdmi_trig, .hdmi_trig_id, .rj45_trig_o, .rj45_busy_o, .rj45_id_o, .rj45_oe,
    .trig_pulse(tlu_pulse), .trig_id(unused_tlu_id), .busy(unused_tlu_busy),
    .trig_cnt(unused_tlu_cnt), .veto_cnt(unused_tlu_veto));

  // pair 0 carries the clock, forwarded outside; its data value is unused
  assign rj45_o = {rj45_id_o, rj45_busy_o, rj45_trig_o, 1'b0};

  always_ff @(posedge clk) begin
    if (rst) begin
      tlu_tog_s   <= '0;
      tlu_cnt_sys <= '0;
    end else begin
      tlu_tog_s <= {tlu_tog_s[1:0], tlu_tog};
      if (tlu_pulse_sys) tlu_cnt_sys <= tlu_cnt_sys + 1'b1;
    end
  end
  assign tlu_pulse_sys = tlu_tog_s[2] ^ tlu_tog_s[1];

  assign ext_trig = (ext_src[0] && sma_pulse) || (ext_src[1] && tlu_pulse_sys);

  // ---------------- trigger control ----------------
  trig_ctrl #(.NLINK(NLINK)) u_trig (
    .clk, .rst, .mode(trig_mode), .test_period, .self_mult, .self_win,
    .ul_trig(l_ul_trig), .ext_trig,
    .trig_valid(tc_valid), .trig_msg(tc_msg), .trig_ready(tc_ready),
    .trig_cnt, .drop_cnt(trig_drop));

  // ---------------- upload data ----------------
  logic [N_SRC-1:0]       src_v;
  logic [N_SRC-1:0][31:0] src_w;

  always_comb begin
    for (int i = 0; i < NLINK; i++) begin
      src_v[i]         = l_ul_data_v[i];
      src_w[i]         = {UT_DATA, 6'(i), 8'h00, l_ul_data[i]};
      src_v[NLINK + i] = l_ul_cmd_v[i];
      src_w[NLINK + i] = {UT_CREP, 6'(i), l_ul_cmd[i]};
    end
    src_v[2*NLINK] = rd_valid;
    src_w[2*NLINK] = rd_word;
  end

  data_collector #(.N_SRC(N_SRC)) u_col (
    .clk, .rst, .in_valid(src_v), .in_word(src_w),
    .out_valid(up_valid), .out_word(up_word), .out_ready(up_ready), .drop_cnt(up_drop_cnt));
endmodule
