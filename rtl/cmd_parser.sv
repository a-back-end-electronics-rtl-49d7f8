// Host command decoder.
//
// Every 32-bit word from the host is {op[1:0], link[5:0], payload[23:0]}:
//   op 00  write local register: payload = {address[7:0], value[15:0]}
//   op 01  forward payload as a command to front-end link `link` (63 = all)
//   op 10  forward payload as a downlink data word to link `link` (63 = all)
//   op 11  read local register `address`; the reply {2'b11, 6'd0, address,
//          value} is offered on rd_valid/rd_word for the upload stream
// The format and the register map (be_pkg) are this design's own; the paper
// only says that host commands go to a command parsing module.
// A word is taken (cmd_ready) when its forward or reply output is free.
// Writing R_DAC issues a DAC write; writing R_PRBS with bit 2 set clears
// the PRBS error counters for one clock.
module cmd_parser
  import be_pkg::*;
#(
  parameter int unsigned N_FIBER = N_FIBER_DEF
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  cmd_valid,
  input  logic [31:0]           cmd_word,
  output logic                  cmd_ready,
  // forwarding to the front-end links
  output logic                  fwd_valid,
  output logic                  fwd_is_data,
  output logic [5:0]            fwd_link,
  output logic [23:0]           fwd_msg,
  input  logic                  fwd_ready,
  // register reply
  output logic                  rd_valid,
  output logic [31:0]           rd_word,
  input  logic                  rd_ready,
  // configuration registers
  output trig_mode_e            trig_mode,
  output logic [31:0]           test_period,
  output logic [7:0]            self_mult,
  output logic [7:0]            self_win,
  output logic [9:0]            tlu_in_en,
  output logic [8:0]            tlu_busy_en,
  output logic [3:0]            tlu_level,
  output logic [3:0]            rj45_dir,
  output logic                  prbs_dl_en,
  output logic                  prbs_ul_en,
  output logic                  prbs_clr,
  output logic [1:0]            ext_src,
  output logic [N_FIBER-1:0][4:0] dly_tap,
  output logic [N_FIBER-1:0][1:0] slip,
  output logic                  dac_valid,
  output logic [3:0]            dac_ch,
  output logic [11:0]           dac_val,
  input  logic                  dac_ready,
  // status for reads
  input  logic [15:0]           st_trig_cnt,
  input  logic [15:0]           st_trig_drop,
  input  logic [15:0]           st_tlu_cnt,
  input  logic [N_FIBER-1:0][15:0] st_prbs_err
);
  host_cmd_t  c;
  logic [7:0] a;
  logic [15:0] v, rv;
  logic       busy_fwd, busy_rd, busy_dac;

  assign c = host_cmd_t'(cmd_word);
  assign a = c.payload[23:16];
  assign v = c.payload[15:0];

  assign busy_fwd = fwd_valid && !fwd_ready;
  assign busy_rd  = rd_valid && !rd_ready;
  assign busy_dac = dac_valid && !dac_ready;
  assign cmd_ready = !busy_fwd && !busy_rd && !busy_dac;

  always_comb begin
    rv = '0;
    unique case (a)
      R_TRIG_MODE:  rv = {14'd0, trig_mode};
      R_TEST_PER_L: rv = test_period[15:0];
      R_TEST_PER_H: rv = test_period[31:16];
      R_SELF_MULT:  rv = {8'd0, self_mult};
      R_SELF_WIN:   rv = {8'd0, self_win};
      R_TLU_INEN:   rv = {6'd0, tlu_in_en};
      R_TLU_BUSYEN: rv = {7'd0, tlu_busy_en};
      R_TLU_LEVEL:  rv = {12'd0, tlu_level};
      R_RJ45_DIR:   rv = {12'd0, rj45_dir};
      R_PRBS:       rv = {14'd0, prbs_ul_en, prbs_dl_en};
      R_EXT_SRC:    rv = {14'd0, ext_src};
      R_TRIG_CNT:   rv = st_trig_cnt;
      R_TRIG_DROP:  rv = st_trig_drop;
      R_TLU_CNT:    rv = st_tlu_cnt;
      default: begin
        if (a >= R_PERR_BASE && a < R_PERR_BASE + 8'(N_FIBER))
          rv = st_prbs_err[a - R_PERR_BASE];
        else if (a >= R_LINK_BASE && a < R_LINK_BASE + 8'(N_FIBER))
          rv = {9'd0, slip[a - R_LINK_BASE], dly_tap[a - R_LINK_BASE]};
      end
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      fwd_valid <= 1'b0; fwd_is_data <= 1'b0; fwd_link <= '0; fwd_msg <= '0;
      rd_valid  <= 1'b0; rd_word <= '0;
      trig_mode <= TM_OFF; test_period <= '0; self_mult <= 8'd1; self_win <= 8'd10;
      tlu_in_en <= '0; tlu_busy_en <= '0; tlu_level <= 4'd1; rj45_dir <= 4'b1011;
      prbs_dl_en <= 1'b0; prbs_ul_en <= 1'b0; prbs_clr <= 1'b0; ext_src <= 2'b01;
      dly_tap <= '0; slip <= '0;
      dac_valid <= 1'b0; dac_ch <= '0; dac_val <= '0;
    end else begin
      prbs_clr <= 1'b0;
      if (fwd_valid && fwd_ready) fwd_valid <= 1'b0;
      if (rd_valid && rd_ready)   rd_valid  <= 1'b0;
      if (dac_valid && dac_ready) dac_valid <= 1'b0;
      if (cmd_valid && cmd_ready) begin
        unique case (c.op)
          HC_FCMD, HC_FDAT: begin
            fwd_valid   <= 1'b1;
            fwd_is_data <= (c.op == HC_FDAT);
            fwd_link    <= c.link;
            fwd_msg     <= c.payload;
          end
          HC_READ: begin
            rd_valid <= 1'b1;
            rd_word  <= {UT_RREG, 6'd0, a, rv};
          end
          default: begin
            unique case (a)
              R_TRIG_MODE:  trig_mode   <= trig_mode_e'(v[1:0]);
              R_TEST_PER_L: test_period[15:0]  <= v;
              R_TEST_PER_H: test_period[31:16] <= v;
              R_SELF_MULT:  self_mult   <= v[7:0];
              R_SELF_WIN:   self_win    <= v[7:0];
              R_TLU_INEN:   tlu_in_en   <= v[9:0];
              R_TLU_BUSYEN: tlu_busy_en <= v[8:0];
              R_TLU_LEVEL:  tlu_level   <= v[3:0];
              R_RJ45_DIR:   rj45_dir    <= v[3:0];
              R_PRBS: begin
                prbs_dl_en <= v[0];
                prbs_ul_en <= v[1];
                prbs_clr   <= v[2];
              end
              R_DAC: begin
                dac_valid <= 1'b1;
                dac_ch    <= v[15:12];
                dac_val   <= v[11:0];
              end
              R_EXT_SRC:    ext_src     <= v[1:0];
              default: begin
                if (a >= R_LINK_BASE && a < R_LINK_BASE + 8'(N_FIBER)) begin
                  dly_tap[a - R_LINK_BASE] <= v[4:0];
                  slip[a - R_LINK_BASE]    <= v[6:5];
                end
              end
            endcase
          end
        endcase
      end
    end
  end
endmodule
