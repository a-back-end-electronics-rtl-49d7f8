// Downlink of one normal-IO fiber link, back-end to front-end.
//
// The 100 Mbps downlink is shared by three channels in fixed time slots, one
// bit per 100 MHz clock and four slots per frame: trigger, command, trigger,
// data. That gives the paper's split of 50 Mbps trigger, 25 Mbps command and
// 25 Mbps downlink data (the slot order is this design's choice). Each channel
// carries framed messages (lane_tx: start bit then payload, MSB first). The
// multiplexed stream, or a PRBS31 test pattern when prbs_en is set, is
// Manchester coded; sym_o holds the two line symbols of one bit (sym_o[1]
// first) for the external 2:1 output serializer.
//
// Interface: valid/ready per channel; a message is accepted only while its
// channel is idle. Timing: a trigger message of TRIG_W bits occupies
// 2*(TRIG_W+2) clocks of the link, start bit and idle bit included; the
// symbols of a bit leave one clock after the bit is selected.
module fiber_dl_link
  import be_pkg::*;
#(
  parameter int unsigned TRIG_W = TRIG_MSG_W,
  parameter int unsigned CMD_W  = CMD_MSG_W,
  parameter int unsigned DATA_W = DDAT_MSG_W
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              trig_valid,
  input  logic [TRIG_W-1:0] trig_msg,
  output logic              trig_ready,
  input  logic              cmd_valid,
  input  logic [CMD_W-1:0]  cmd_msg,
  output logic              cmd_ready,
  input  logic              data_valid,
  input  logic [DATA_W-1:0] data_msg,
  output logic              data_ready,
  input  logic              prbs_en,
  output logic [1:0]        sym_o
);
  typedef enum logic [1:0] {S_TRIG0, S_CMD, S_TRIG1, S_DATA} slot_e;

  slot_e slot;
  logic  t_lane, c_lane, d_lane, mux_bit, prbs_bit, line_bit;

  always_ff @(posedge clk) begin
    if (rst) slot <= S_TRIG0;
    else     slot <= slot_e'(slot + 2'd1);
  end

  lane_tx #(.LANE_W(1), .MSG_W(TRIG_W)) u_trig (
    .clk, .rst, .adv(slot == S_TRIG0 || slot == S_TRIG1),
    .msg_valid(trig_valid), .msg(trig_msg), .msg_ready(trig_ready), .lane(t_lane));
  lane_tx #(.LANE_W(1), .MSG_W(CMD_W)) u_cmd (
    .clk, .rst, .adv(slot == S_CMD),
    .msg_valid(cmd_valid), .msg(cmd_msg), .msg_ready(cmd_ready), .lane(c_lane));
  lane_tx #(.LANE_W(1), .MSG_W(DATA_W)) u_data (
    .clk, .rst, .adv(slot == S_DATA),
    .msg_valid(data_valid), .msg(data_msg), .msg_ready(data_ready), .lane(d_lane));

  always_comb begin
    unique case (slot)
      S_TRIG0, S_TRIG1: mux_bit = t_lane;
      S_CMD:            mux_bit = c_lane;
      default:          mux_bit = d_lane;
    endcase
  end

  prbs31_gen #(.W(1)) u_prbs (.clk, .rst, .en(prbs_en), .dout(prbs_bit));

  assign line_bit = prbs_en ? prbs_bit : mux_bit;

  manchester_enc u_man (.clk, .rst, .bit_i(line_bit), .sym_o);
endmodule
