// Trigger control of the back-end.
//
// Three trigger modes, as in the paper, plus off:
//  * self trigger: front-end boards report trigger requests on their uplink
//    trigger channels (ul_trig, one pulse per request and link). Each request
//    keeps its link "hit" for `self_win` clocks; when the number of hit links
//    reaches `self_mult` a trigger is issued and all hits are cleared. The
//    paper says the back-end "determines the number of triggered front-end
//    boards"; the sliding window and threshold are this design's reading.
//  * external trigger: a synchronous pulse on ext_trig (SMA input or the TLU).
//  * test trigger: a periodic trigger every `test_period` clocks (100 MHz:
//    10 Hz to kHz rates need up to 2**24 clocks, hence 32 bits).
// Every trigger gets a 16-bit number, counted from 0. The trigger message
// {type[3:0], number[15:0]} (type = mode) is offered on trig_valid until
// trig_ready, which is the AND of the trigger channels of all links, so all
// front-end boards receive it together. A trigger arriving while a message is
// still pending is dropped and counted in drop_cnt.
module trig_ctrl
  import be_pkg::*;
#(
  parameter int unsigned NLINK = N_FIBER_DEF + N_GTX_DEF
) (
  input  logic                  clk,
  input  logic                  rst,
  input  trig_mode_e            mode,
  input  logic [31:0]           test_period,
  input  logic [7:0]            self_mult,
  input  logic [7:0]            self_win,
  input  logic [NLINK-1:0]      ul_trig,
  input  logic                  ext_trig,
  output logic                  trig_valid,
  output logic [TRIG_MSG_W-1:0] trig_msg,
  input  logic                  trig_ready,
  output logic [31:0]           trig_cnt,
  output logic [31:0]           drop_cnt
);
  // ---- self trigger ----
  logic [7:0] hit_t [NLINK];
  logic [$clog2(NLINK+1)-1:0] nhit;
  logic self_fire;

  always_comb begin
    nhit = '0;
    for (int i = 0; i < NLINK; i++) if (hit_t[i] != '0) nhit++;
  end
  assign self_fire = (mode == TM_SELF) && (self_mult != '0) && (32'(nhit) >= 32'(self_mult));

  always_ff @(posedge clk) begin
    for (int i = 0; i < NLINK; i++) begin
      if (rst || self_fire || mode != TM_SELF) hit_t[i] <= '0;
      else if (ul_trig[i])                     hit_t[i] <= self_win;
      else if (hit_t[i] != '0)                 hit_t[i] <= hit_t[i] - 1'b1;
    end
  end

  // ---- test trigger ----
  logic [31:0] tcnt;
  logic        test_fire;

  always_ff @(posedge clk) begin
    if (rst || mode != TM_TEST || test_period == '0) tcnt <= '0;
    else if (tcnt >= test_period - 1)                 tcnt <= '0;
    else                                              tcnt <= tcnt + 1'b1;
  end
  assign test_fire = (mode == TM_TEST) && (test_period != '0) && (tcnt >= test_period - 1);

  // ---- issue ----
  logic        fire;
  logic [15:0] num;

  assign fire = self_fire || test_fire || (mode == TM_EXT && ext_trig);
  assign trig_msg[TRIG_MSG_W-1 -: 4] = {2'b00, mode};

  always_ff @(posedge clk) begin
    if (rst) begin
      trig_valid <= 1'b0;
      num        <= '0;
      trig_cnt   <= '0;
      drop_cnt   <= '0;
      trig_msg[15:0] <= '0;
    end else begin
      if (trig_valid && trig_ready) begin
        trig_valid <= 1'b0;
        num        <= num + 1'b1;
        trig_cnt   <= trig_cnt + 1'b1;
      end
      if (fire) begin
        if (!trig_valid || trig_ready) begin
          trig_valid     <= 1'b1;
          trig_msg[15:0] <= (trig_valid && trig_ready) ? num + 1'b1 : num;
        end else begin
          drop_cnt <= drop_cnt + 1'b1;
        end
      end
    end
  end
endmodule
