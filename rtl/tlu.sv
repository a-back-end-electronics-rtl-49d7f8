// Trigger logic unit (TLU).
//
// Runs on the 40 MHz TLU clock that is also sent to every device under test
// on the CLK pair of the HDMI and RJ45 connectors. Inputs:
//  * lemo_in[9:0]: six analog LEMO inputs after the threshold comparators
//    (bits 5:0) and four digital LEMO inputs (bits 9:6), asynchronous pulses;
//  * BUSY from each of the 8 HDMI ports and, when its pair is an input, from
//    the RJ45 port.
// Each input passes a two-flip-flop synchroniser and a rising-edge detector.
// A trigger is formed when at least `level` enabled inputs (in_en) rise in
// the same clock (level 1 = OR, level = number of enabled inputs = full
// coincidence) and no enabled BUSY is high and no trigger ID is being sent.
// Otherwise the coincidence is counted in veto_cnt.
//
// Output timing, following the paper's HDMI and RJ45 timing diagrams: TRIG is
// high for one clock; after ID_GAP clocks the 16-bit trigger ID (the count of
// earlier triggers, MSB first) follows, on the TRIG-ID line for HDMI and on
// the TRIG line itself for RJ45, one bit per clock (16 T). The one-clock pulse
// and gap are read from the diagrams; bit order is this design's choice.
// The four RJ45 pairs are CLK, TRIG, BUSY and TRIG-ID; each may be turned
// round by rj45_dir (1 = output) because the port sits behind a
// bidirectional buffer. rj45_trig_o / rj45_busy_o / rj45_id_o are the values
// driven when the pair is an output (the CLK pair carries the clock itself,
// supplied outside). trig_pulse/trig_id give each trigger to the back-end.
module tlu #(
  parameter int unsigned N_IN   = 10,
  parameter int unsigned N_HDMI = 8,
  parameter int unsigned ID_W   = 16,
  parameter int unsigned ID_GAP = 1
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [N_IN-1:0]   lemo_in,
  input  logic [N_IN-1:0]   in_en,
  input  logic [3:0]        level,
  input  logic [N_HDMI-1:0] hdmi_busy,
  input  logic [N_HDMI:0]   busy_en,     // [N_HDMI] = RJ45 BUSY
  input  logic [3:0]        rj45_dir,    // 1 = pair is an output
  input  logic [3:0]        rj45_i,
  output logic              hdmi_trig,
  output logic              hdmi_trig_id,
  output logic              rj45_trig_o,
  output logic              rj45_busy_o,
  output logic              rj45_id_o,
  output logic [3:0]        rj45_oe,
  output logic              trig_pulse,
  output logic [ID_W-1:0]   trig_id,
  output logic              busy,
  output logic [31:0]       trig_cnt,
  output logic [31:0]       veto_cnt
);
  // ---- synchronisers and edge detection ----
  logic [N_IN-1:0]   in_s1, in_s2, in_s3;
  logic [N_HDMI:0]   busy_raw, busy_s1, busy_s2;
  logic [N_IN-1:0]   rise;
  logic [$clog2(N_IN+1)-1:0] nrise;
  logic              coinc, ext_busy;

  assign busy_raw = {(!rj45_dir[2] && rj45_i[2]), hdmi_busy};

  always_ff @(posedge clk) begin
    if (rst) begin
      in_s1 <= '0; in_s2 <= '0; in_s3 <= '0;
      busy_s1 <= '0; busy_s2 <= '0;
    end else begin
      in_s1 <= lemo_in; in_s2 <= in_s1; in_s3 <= in_s2;
      busy_s1 <= busy_raw; busy_s2 <= busy_s1;
    end
  end

  assign rise = in_s2 & ~in_s3 & in_en;

  always_comb begin
    nrise = '0;
    for (int i = 0; i < N_IN; i++) nrise += rise[i];
  end

  assign coinc    = (nrise != '0) && (32'(nrise) >= 32'(level));
  assign ext_busy = |(busy_s2 & busy_en);

  // ---- trigger / ID sequencer ----
  typedef enum logic [1:0] {T_IDLE, T_GAP, T_ID} tstate_e;
  tstate_e           st;
  logic [7:0]        cnt;
  logic [ID_W-1:0]   id_cnt, id_sr;
  logic              id_bit_active;

  assign busy = (st != T_IDLE) || hdmi_trig;

  always_ff @(posedge clk) begin
    if (rst) begin
      st         <= T_IDLE;
      cnt        <= '0;
      id_cnt     <= '0;
      id_sr      <= '0;
      hdmi_trig  <= 1'b0;
      trig_pulse <= 1'b0;
      trig_id    <= '0;
      trig_cnt   <= '0;
      veto_cnt   <= '0;
    end else begin
      hdmi_trig  <= 1'b0;
      trig_pulse <= 1'b0;
      if (coinc && (ext_busy || busy)) veto_cnt <= veto_cnt + 1'b1;
      unique case (st)
        T_IDLE: if (coinc && !ext_busy && !hdmi_trig) begin
          hdmi_trig  <= 1'b1;
          trig_pulse <= 1'b1;
          trig_id    <= id_cnt;
          id_sr      <= id_cnt;
          id_cnt     <= id_cnt + 1'b1;
          trig_cnt   <= trig_cnt + 1'b1;
          cnt        <= 8'(ID_GAP + 1);   // TRIG clock plus the gap
          st         <= T_GAP;
        end
        T_GAP: begin
          if (cnt == 8'd1) begin
            st  <= T_ID;
            cnt <= 8'(ID_W);
          end else cnt <= cnt - 1'b1;
        end
        T_ID: begin
          // the first ID bit is on the line during the first T_ID clock
          id_sr <= id_sr << 1;
          cnt   <= cnt - 1'b1;
          if (cnt == 8'd1) st <= T_IDLE;
        end
        default: st <= T_IDLE;
      endcase
    end
  end

  assign id_bit_active = (st == T_ID);
  assign hdmi_trig_id  = id_bit_active && id_sr[ID_W-1];
  assign rj45_trig_o   = hdmi_trig || hdmi_trig_id;
  assign rj45_id_o     = hdmi_trig_id;
  assign rj45_busy_o   = busy;
  assign rj45_oe       = rj45_dir;
endmodule
