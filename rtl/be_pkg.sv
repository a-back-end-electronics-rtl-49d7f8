// Shared constants and types of the back-end readout logic.
//
// The system clock is 100 MHz. At that rate one normal-IO fiber link moves one
// downlink bit (100 Mbps, Manchester coded to 200 Mbaud outside) and one 4-bit
// uplink word (400 Mbps) per clock, and the USB slave FIFO moves one 32-bit word.
// Channel rates follow the paper: downlink trigger/command/data 50/25/25 Mbps,
// uplink trigger/command/data 100/100/200 Mbps, GTX word 16 bits = 8 data +
// 4 command + 4 trigger. Message widths inside each channel, the command word
// format and the register map are this design's own choices.
package be_pkg;

  // ---- link counts (paper: 32 normal-IO fibers, 16 GTX fibers) ----
  localparam int unsigned N_FIBER_DEF = 32;
  localparam int unsigned N_GTX_DEF   = 16;

  // ---- message widths inside the time-multiplexed channels (assumed) ----
  localparam int unsigned TRIG_MSG_W = 20;  // {type[3:0], trigger number[15:0]}
  localparam int unsigned CMD_MSG_W  = 24;  // {reg address[7:0], value[15:0]}
  localparam int unsigned DDAT_MSG_W = 24;  // downlink data packet word
  localparam int unsigned UTRG_MSG_W = 8;   // uplink self-trigger request
  localparam int unsigned UCMD_MSG_W = 24;  // uplink command reply
  localparam int unsigned UDAT_MSG_W = 16;  // uplink data word
  localparam int unsigned TNUM_W     = 16;  // trigger number (16 bits, HDMI/RJ45 figures)

  // ---- trigger modes ----
  typedef enum logic [1:0] {
    TM_OFF  = 2'd0,
    TM_SELF = 2'd1,
    TM_EXT  = 2'd2,
    TM_TEST = 2'd3
  } trig_mode_e;

  // ---- host command word ----
  typedef enum logic [1:0] {
    HC_WRITE = 2'b00,   // local register write
    HC_FCMD  = 2'b01,   // forward command to front-end link(s)
    HC_FDAT  = 2'b10,   // forward downlink data word to front-end link(s)
    HC_READ  = 2'b11    // local register read, reply goes up
  } host_op_e;

  typedef struct packed {
    host_op_e    op;
    logic [5:0]  link;     // 63 = all links
    logic [23:0] payload;  // for local registers: {addr[7:0], value[15:0]}
  } host_cmd_t;

  localparam logic [5:0] LINK_ALL = 6'd63;

  // ---- upload word tags ----
  typedef enum logic [1:0] {
    UT_DATA  = 2'b01,   // {tag, link[5:0], 8'h00, data[15:0]}
    UT_CREP  = 2'b10,   // {tag, link[5:0], reply[23:0]}
    UT_RREG  = 2'b11    // {tag, 6'd0, addr[7:0], value[15:0]}
  } up_tag_e;

  // ---- local register addresses ----
  localparam logic [7:0] R_TRIG_MODE  = 8'h00; // [1:0] trig_mode_e
  localparam logic [7:0] R_TEST_PER_L = 8'h01; // test trigger period, low 16 bits (100 MHz clocks)
  localparam logic [7:0] R_TEST_PER_H = 8'h02; // high 16 bits
  localparam logic [7:0] R_SELF_MULT  = 8'h03; // self-trigger multiplicity threshold
  localparam logic [7:0] R_SELF_WIN   = 8'h04; // self-trigger coincidence window (clocks)
  localparam logic [7:0] R_TLU_INEN   = 8'h05; // [9:0] LEMO input enables
  localparam logic [7:0] R_TLU_BUSYEN = 8'h06; // [8:0] BUSY enables (8 HDMI + RJ45)
  localparam logic [7:0] R_TLU_LEVEL  = 8'h07; // [3:0] coincidence level
  localparam logic [7:0] R_RJ45_DIR   = 8'h08; // [3:0] 1 = output
  localparam logic [7:0] R_PRBS       = 8'h09; // [0] downlink PRBS, [1] uplink check
  localparam logic [7:0] R_DAC        = 8'h0A; // {ch[3:0], value[11:0]}: write DAC
  localparam logic [7:0] R_EXT_SRC    = 8'h0B; // [0] SMA input, [1] TLU trigger
  localparam logic [7:0] R_TRIG_CNT   = 8'h10; // read: triggers issued (low 16 bits)
  localparam logic [7:0] R_TRIG_DROP  = 8'h11; // read: triggers dropped
  localparam logic [7:0] R_TLU_CNT    = 8'h12; // read: TLU triggers
  localparam logic [7:0] R_LINK_BASE  = 8'h40; // 0x40+L write {slip[1:0],tap[4:0]} of fiber link L
  localparam logic [7:0] R_PERR_BASE  = 8'h80; // 0x80+L read PRBS error count of fiber link L

endpackage
