// Uplink of one normal-IO fiber link, front-end to back-end.
//
// The front end runs on the back-end's clock, so no clock recovery is needed:
// the input pin is delayed by the FPGA's input delay line (outside this module)
// and deserialized 1:4, giving rx_bits, four bits per 100 MHz clock (400 Mbps),
// rx_bits[3] first. This module
//   1. aligns the 4-bit words: `slip` picks which of the four bit offsets
//      starts a word (set by software; how the paper aligns words is not given),
//   2. descrambles (self-synchronous, x^58+x^39+1),
//   3. splits each word into the three channels: bit 3 trigger (100 Mbps),
//      bit 2 command (100 Mbps), bits 1:0 data (200 Mbps), as the paper's rates
//      require; the bit assignment is this design's choice,
//   4. deframes each channel (lane_rx) into messages,
//   5. counts PRBS31 errors on the descrambled stream when prbs_en is set;
//      during the PRBS test the message decoders see idle words, so the
//      pattern cannot produce false messages.
// Latency from a word on rx_bits to the descrambled word: two clocks; a
// message is reported one clock after its last word.
module fiber_ul_link
  import be_pkg::*;
#(
  parameter int unsigned TRIG_W = UTRG_MSG_W,
  parameter int unsigned CMD_W  = UCMD_MSG_W,
  parameter int unsigned DATA_W = UDAT_MSG_W
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [3:0]        rx_bits,
  input  logic [1:0]        slip,
  output logic              trig_valid,
  output logic [TRIG_W-1:0] trig_msg,
  output logic              cmd_valid,
  output logic [CMD_W-1:0]  cmd_msg,
  output logic              data_valid,
  output logic [DATA_W-1:0] data_msg,
  input  logic              prbs_en,
  input  logic              prbs_clr,
  output logic [15:0]       prbs_err,
  output logic              prbs_locked
);
  logic [3:0] prev, aligned, aligned_q, word, msg_word;
  logic [7:0] two;

  assign two     = {prev, rx_bits};
  assign aligned = two[7 - slip -: 4];

  always_ff @(posedge clk) begin
    if (rst) begin
      prev      <= '0;
      aligned_q <= '0;
    end else begin
      prev      <= rx_bits;
      aligned_q <= aligned;
    end
  end

  descrambler #(.W(4)) u_descr (.clk, .rst, .din(aligned_q), .dout(word));

  assign msg_word = prbs_en ? 4'b0000 : word;

  lane_rx #(.LANE_W(1), .MSG_W(TRIG_W)) u_trig (
    .clk, .rst, .adv(1'b1), .lane(msg_word[3]), .msg_valid(trig_valid), .msg(trig_msg));
  lane_rx #(.LANE_W(1), .MSG_W(CMD_W)) u_cmd (
    .clk, .rst, .adv(1'b1), .lane(msg_word[2]), .msg_valid(cmd_valid), .msg(cmd_msg));
  lane_rx #(.LANE_W(2), .MSG_W(DATA_W)) u_data (
    .clk, .rst, .adv(1'b1), .lane(msg_word[1:0]), .msg_valid(data_valid), .msg(data_msg));

  prbs31_chk #(.W(4)) u_chk (
    .clk, .rst, .en(prbs_en), .clr(prbs_clr), .din(word), .err_cnt(prbs_err), .locked(prbs_locked));
endmodule
