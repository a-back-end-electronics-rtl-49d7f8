// Channel message serializer.
//
// One channel of a time-multiplexed link carries LANE_W bits each time `adv`
// is high. The channel idles at zero. A message is sent as one start word
// (value 1) followed by the MSG_W payload bits, most significant first, packed
// LANE_W bits per word (the last word is padded with zeros). A new message is
// taken (valid & ready) only when the channel is idle, so back-to-back messages
// are separated by at least one idle word, which the receiver needs to find the
// next start word. The framing is this design's own choice: the paper gives
// only the channel rates.
module lane_tx #(
  parameter int unsigned LANE_W = 1,
  parameter int unsigned MSG_W  = 16
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              adv,        // channel slot this clock
  input  logic              msg_valid,
  input  logic [MSG_W-1:0]  msg,
  output logic              msg_ready,
  output logic [LANE_W-1:0] lane        // word for the current slot
);
  localparam int unsigned NW = (MSG_W + LANE_W - 1) / LANE_W;  // payload words
  localparam int unsigned SW = NW * LANE_W;
  localparam int unsigned CW = $clog2(NW + 2);

  logic [SW-1:0] sreg;
  logic [CW-1:0] left;     // words still to send, including start word
  logic          gap;      // one idle word after each message

  assign msg_ready = (left == '0) && !gap;

  always_comb begin
    if (left == CW'(NW + 1)) lane = LANE_W'(1);
    else if (left != '0)     lane = sreg[SW-1 -: LANE_W];
    else                     lane = '0;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      sreg <= '0;
      left <= '0;
      gap  <= 1'b0;
    end else begin
      if (msg_valid && msg_ready) begin
        sreg <= {msg, {(SW-MSG_W){1'b0}}};
        left <= CW'(NW + 1);
      end else if (adv) begin
        if (left != '0) begin
          if (left != CW'(NW + 1)) sreg <= sreg << LANE_W;
          left <= left - 1'b1;
          if (left == CW'(1)) gap <= 1'b1;
        end else begin
          gap <= 1'b0;
        end
      end
    end
  end
endmodule
