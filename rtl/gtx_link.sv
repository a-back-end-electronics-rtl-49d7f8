// Framing logic of one GTX high-speed fiber link.
//
// The GT transceiver (outside, vendor IP) carries one 16-bit user word per
// 120 MHz clock with 8B/10B coding, i.e. 2.4 Gbps on the fiber. As in the
// paper the 16 bits are split into an 8-bit data channel, a 4-bit command
// channel and a 4-bit trigger channel; here word = {data[7:0], cmd[3:0],
// trig[3:0]} (the bit positions are this design's choice). Each channel
// carries framed messages (lane_tx / lane_rx: a start word of value 1, then the
// payload MSB first).
//
// The back-end logic runs on the 100 MHz system clock, so each message stream
// crosses clock domains through a small asynchronous FIFO: three towards the
// transceiver (trigger, command, downlink data) and three back (self-trigger
// request, command reply, data word). System-side inputs use valid/ready
// (ready = FIFO not full); system-side outputs are one-clock valid pulses.
// An uplink message that finds its FIFO full is dropped and counted.
module gtx_link
  import be_pkg::*;
#(
  parameter int unsigned AW = 3
) (
  // system side (100 MHz)
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  trig_valid,
  input  logic [TRIG_MSG_W-1:0] trig_msg,
  output logic                  trig_ready,
  input  logic                  cmd_valid,
  input  logic [CMD_MSG_W-1:0]  cmd_msg,
  output logic                  cmd_ready,
  input  logic                  data_valid,
  input  logic [DDAT_MSG_W-1:0] data_msg,
  output logic                  data_ready,
  output logic                  ul_trig_valid,
  output logic [UTRG_MSG_W-1:0] ul_trig_msg,
  output logic                  ul_cmd_valid,
  output logic [UCMD_MSG_W-1:0] ul_cmd_msg,
  output logic                  ul_data_valid,
  output logic [UDAT_MSG_W-1:0] ul_data_msg,
  output logic [15:0]           ul_drop_cnt,   // gt_clk domain counter
  // transceiver side (120 MHz user clock)
  input  logic                  gt_clk,
  input  logic                  gt_rst,
  output logic [15:0]           gt_tx_word,
  input  logic [15:0]           gt_rx_word
);
  // ---------------- downlink: system -> transceiver ----------------
  logic                  t_full, c_full, d_full, t_empty, c_empty, d_empty;
  logic [TRIG_MSG_W-1:0] t_q;
  logic [CMD_MSG_W-1:0]  c_q;
  logic [DDAT_MSG_W-1:0] d_q;
  logic                  t_rdy, c_rdy, d_rdy;
  logic [3:0]            t_lane, c_lane;
  logic [7:0]            d_lane;

  assign trig_ready = !t_full;
  assign cmd_ready  = !c_full;
  assign data_ready = !d_full;

  async_fifo #(.W(TRIG_MSG_W), .AW(AW)) u_dt (
    .wr_clk(clk), .wr_rst(rst), .wr_en(trig_valid), .wr_data(trig_msg), .full(t_full),
    .rd_clk(gt_clk), .rd_rst(gt_rst), .rd_en(t_rdy), .rd_data(t_q), .empty(t_empty));
  async_fifo #(.W(CMD_MSG_W), .AW(AW)) u_dc (
    .wr_clk(clk), .wr_rst(rst), .wr_en(cmd_valid), .wr_data(cmd_msg), .full(c_full),
    .rd_clk(gt_clk), .rd_rst(gt_rst), .rd_en(c_rdy), .rd_data(c_q), .empty(c_empty));
  async_fifo #(.W(DDAT_MSG_W), .AW(AW)) u_dd (
    .wr_clk(clk), .wr_rst(rst), .wr_en(data_valid), .wr_data(data_msg), .full(d_full),
    .rd_clk(gt_clk), .rd_rst(gt_rst), .rd_en(d_rdy), .rd_data(d_q), .empty(d_empty));

  lane_tx #(.LANE_W(4), .MSG_W(TRIG_MSG_W)) u_ttx (
    .clk(gt_clk), .rst(gt_rst), .adv(1'b1), .msg_valid(!t_empty), .msg(t_q),
    .msg_ready(t_rdy), .lane(t_lane));
  lane_tx #(.LANE_W(4), .MSG_W(CMD_MSG_W)) u_ctx (
    .clk(gt_clk), .rst(gt_rst), .adv(1'b1), .msg_valid(!c_empty), .msg(c_q),
    .msg_ready(c_rdy), .lane(c_lane));
  lane_tx #(.LANE_W(8), .MSG_W(DDAT_MSG_W)) u_dtx (
    .clk(gt_clk), .rst(gt_rst), .adv(1'b1), .msg_valid(!d_empty), .msg(d_q),
    .msg_ready(d_rdy), .lane(d_lane));

  always_ff @(posedge gt_clk) begin
    if (gt_rst) gt_tx_word <= '0;
    else        gt_tx_word <= {d_lane, c_lane, t_lane};
  end

  // ---------------- uplink: transceiver -> system ----------------
  logic                  rt_v, rc_v, rd_v;
  logic [UTRG_MSG_W-1:0] rt_m;
  logic [UCMD_MSG_W-1:0] rc_m;
  logic [UDAT_MSG_W-1:0] rd_m;
  logic                  ut_full, uc_full, ud_full, ut_empty, uc_empty, ud_empty;

  lane_rx #(.LANE_W(4), .MSG_W(UTRG_MSG_W)) u_trx (
    .clk(gt_clk), .rst(gt_rst), .adv(1'b1), .lane(gt_rx_word[3:0]), .msg_valid(rt_v), .msg(rt_m));
  lane_rx #(.LANE_W(4), .MSG_W(UCMD_MSG_W)) u_crx (
    .clk(gt_clk), .rst(gt_rst), .adv(1'b1), .lane(gt_rx_word[7:4]), .msg_valid(rc_v), .msg(rc_m));
  lane_rx #(.LANE_W(8), .MSG_W(UDAT_MSG_W)) u_drx (
    .clk(gt_clk), .rst(gt_rst), .adv(1'b1), .lane(gt_rx_word[15:8]), .msg_valid(rd_v), .msg(rd_m));

  async_fifo #(.W(UTRG_MSG_W), .AW(AW)) u_ut (
    .wr_clk(gt_clk), .wr_rst(gt_rst), .wr_en(rt_v), .wr_data(rt_m), .full(ut_full),
    .rd_clk(clk), .rd_rst(rst), .rd_en(1'b1), .rd_data(ul_trig_msg), .empty(ut_empty));
  async_fifo #(.W(UCMD_MSG_W), .AW(AW)) u_uc (
    .wr_clk(gt_clk), .wr_rst(gt_rst), .wr_en(rc_v), .wr_data(rc_m), .full(uc_full),
    .rd_clk(clk), .rd_rst(rst), .rd_en(1'b1), .rd_data(ul_cmd_msg), .empty(uc_empty));
  async_fifo #(.W(UDAT_MSG_W), .AW(AW)) u_ud (
    .wr_clk(gt_clk), .wr_rst(gt_rst), .wr_en(rd_v), .wr_data(rd_m), .full(ud_full),
    .rd_clk(clk), .rd_rst(rst), .rd_en(1'b1), .rd_data(ul_data_msg), .empty(ud_empty));

  assign ul_trig_valid = !ut_empty;
  assign ul_cmd_valid  = !uc_empty;
  assign ul_data_valid = !ud_empty;

  always_ff @(posedge gt_clk) begin
    if (gt_rst) ul_drop_cnt <= '0;
    else if (((rt_v && ut_full) || (rc_v && uc_full) || (rd_v && ud_full)) && ul_drop_cnt != '1)
      ul_drop_cnt <= ul_drop_cnt + 1'b1;
  end
endmodule
