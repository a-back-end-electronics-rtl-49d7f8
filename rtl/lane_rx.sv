// Channel message deserializer, the inverse of lane_tx.
//
// Watches the channel words (LANE_W bits each time `adv` is high). A non-zero
// word while idle is a start word; the next ceil(MSG_W/LANE_W) words are the
// payload, most significant first. `msg_valid` pulses for one clock with the
// message the clock after its last word.
module lane_rx #(
  parameter int unsigned LANE_W = 1,
  parameter int unsigned MSG_W  = 16
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              adv,
  input  logic [LANE_W-1:0] lane,
  output logic              msg_valid,
  output logic [MSG_W-1:0]  msg
);
  localparam int unsigned NW = (MSG_W + LANE_W - 1) / LANE_W;
  localparam int unsigned SW = NW * LANE_W;
  localparam int unsigned CW = $clog2(NW + 1);

  logic [SW-1:0] sreg;
  logic [CW-1:0] left;

  assign msg = sreg[SW-1 -: MSG_W];

  always_ff @(posedge clk) begin
    if (rst) begin
      sreg      <= '0;
      left      <= '0;
      msg_valid <= 1'b0;
    end else begin
      msg_valid <= 1'b0;
      if (adv) begin
        if (left == '0) begin
          if (lane != '0) left <= CW'(NW);
        end else begin
          sreg <= (sreg << LANE_W) | SW'(lane);
          left <= left - 1'b1;
          if (left == CW'(1)) msg_valid <= 1'b1;
        end
      end
    end
  end
endmodule
