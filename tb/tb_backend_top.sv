// End-to-end test of the whole back-end at its default size (32 normal-IO
// fiber links, 16 GTX links). Every fiber link has a front-end model whose
// uplink bit offset is link % 4, so word alignment is exercised on all four
// offsets. A model of the USB chip stands in for the host computer: the test
// only talks to the design through host command words and reads everything
// back from the upload stream.
//
// Phases: register set-up and read-back, command broadcast and single-link
// commands with their replies, downlink data words, a DAC write, periodic
// test triggers, SMA external triggers including a dropped one, TLU triggers
// with ID decoding, input coincidence and BUSY veto, self triggers from
// front-end requests, PRBS tests of both fiber directions with injected
// errors, and finally a data burst that overflows the upload buffers while
// the host drains slowly. Each mechanism is counted; one that never happened
// is a failure.
module tb_backend_top;
  import be_pkg::*;
  timeunit 1ns;
  timeprecision 100ps;

  localparam int NF = N_FIBER_DEF;
  localparam int NG = N_GTX_DEF;
  localparam int NL = NF + NG;
  localparam int NW = 4;          // data words per trigger per board

  int checks = 0, failures = 0;

`define CHK(c, m) begin checks++; if (!(c)) begin failures++; $display("FAIL at line %0d: %s", `__LINE__, m); end end

  // ---------------- clocks and resets ----------------
  logic clk = 0, tlu_clk = 0, gt_clk = 0;
  logic rst = 1, tlu_rst = 1, gt_rst = 1;
  always #5    clk = ~clk;       // 100 MHz
  always #12.5 tlu_clk = ~tlu_clk; // 40 MHz
  always #4.2  gt_clk = ~gt_clk;   // ~120 MHz

  // ---------------- design ----------------
  logic [NF-1:0][3:0]  fib_rx_bits, fe_rx;
  logic [NF-1:0][1:0]  fib_tx_sym;
  logic [NF-1:0][4:0]  fib_dly_tap;
  logic [NG-1:0][15:0] gt_tx_word, gt_rx_word;
  logic        sma_trig = 0;
  logic [9:0]  lemo_in = '0;
  logic [7:0]  hdmi_busy = '0;
  logic        hdmi_trig, hdmi_trig_id;
  logic [3:0]  rj45_o, rj45_oe;
  logic [3:0]  rj45_i = '0;
  logic        dac_sync_n, dac_sclk, dac_din;
  logic        usb_flag_rx_rdy, usb_flag_tx_rdy, usb_slcs_n, usb_slrd_n, usb_sloe_n;
  logic        usb_slwr_n, usb_pktend_n, usb_dq_oe;
  logic [1:0]  usb_addr;
  logic [31:0] usb_dq_o, usb_dq_i, up_drop_cnt;

  backend_top dut (
    .clk, .rst, .tlu_clk, .tlu_rst, .gt_clk, .gt_rst,
    .fib_rx_bits, .fib_tx_sym, .fib_dly_tap, .gt_tx_word, .gt_rx_word,
    .sma_trig, .lemo_in, .hdmi_busy, .hdmi_trig, .hdmi_trig_id, .rj45_o, .rj45_oe, .rj45_i,
    .dac_sync_n, .dac_sclk, .dac_din,
    .usb_flag_rx_rdy, .usb_flag_tx_rdy, .usb_slcs_n, .usb_slrd_n, .usb_sloe_n, .usb_slwr_n,
    .usb_pktend_n, .usb_addr, .usb_dq_o, .usb_dq_oe, .usb_dq_i, .up_drop_cnt);

  usb_chip_model #(.CAP(64), .DRAIN(1)) usb (
    .clk, .flag_rx_rdy(usb_flag_rx_rdy), .flag_tx_rdy(usb_flag_tx_rdy),
    .slcs_n(usb_slcs_n), .slrd_n(usb_slrd_n), .sloe_n(usb_sloe_n), .slwr_n(usb_slwr_n),
    .pktend_n(usb_pktend_n), .addr(usb_addr), .dq_o(usb_dq_o), .dq_oe(usb_dq_oe), .dq_i(usb_dq_i));

  // ---------------- front-end boards ----------------
  logic [NF-1:0] fhit = '0;
  logic [NG-1:0] ghit = '0;
  logic fprbs_dl = 0, fprbs_ul = 0, fclr = 0, inj_dl = 0, inj_ul = 0;
  int   fburst = 0;
  int   ntrig [NL], ncmd [NL], nddat [NL];
  logic [19:0] ltrig [NL];
  logic [23:0] lcmd [NL], lddat [NL];
  int   nbadsym [NF], dlperr [NF];

  for (genvar i = 0; i < NF; i++) begin : g_fib
    logic [1:0] sym;
    assign sym = fib_tx_sym[i] ^ ((i == 0 && inj_dl) ? 2'b11 : 2'b00);
    assign fib_rx_bits[i] = fe_rx[i] ^ ((i == 0 && inj_ul) ? 4'b0001 : 4'b0000);
    fe_fiber_model #(.LINK(i), .OFFSET(i % 4), .NWORDS(NW)) u_fe (
      .clk, .rst, .sym, .rx_bits(fe_rx[i]), .hit(fhit[i]), .prbs_dl(fprbs_dl), .prbs_ul(fprbs_ul),
      .burst(fburst), .pace(0), .clr(fclr),
      .n_trig(ntrig[i]), .n_cmd(ncmd[i]), .n_ddat(nddat[i]), .n_bad_sym(nbadsym[i]),
      .dl_prbs_err(dlperr[i]), .last_trig(ltrig[i]), .last_cmd(lcmd[i]), .last_ddat(lddat[i]));
  end

  for (genvar j = 0; j < NG; j++) begin : g_gtx
    fe_gtx_model #(.LINK(NF + j), .NWORDS(NW)) u_fe (
      .clk(gt_clk), .rst(gt_rst), .tx_word(gt_tx_word[j]), .rx_word(gt_rx_word[j]), .hit(ghit[j]),
      .n_trig(ntrig[NF + j]), .n_cmd(ncmd[NF + j]), .n_ddat(nddat[NF + j]),
      .last_trig(ltrig[NF + j]), .last_cmd(lcmd[NF + j]), .last_ddat(lddat[NF + j]));
  end

  // ---------------- mechanism counters ----------------
  int m_reg_wr = 0, m_reg_rd = 0, m_dly_tap = 0, m_slip = 0;
  int m_cmd_bcast = 0, m_cmd_one = 0, m_crep = 0, m_dfwd = 0, m_dac = 0;
  int m_trig_test = 0, m_trig_sma = 0, m_trig_tlu = 0, m_trig_self = 0, m_self_below = 0;
  int m_trig_drop = 0, m_gtx_trig = 0, m_fib_trig = 0, m_up_data = 0, m_gtx_data = 0;
  int m_tlu_hdmi = 0, m_tlu_rj45 = 0, m_tlu_coinc = 0, m_tlu_below = 0, m_tlu_veto = 0;
  int m_prbs_dl = 0, m_prbs_ul = 0, m_prbs_dl_err = 0, m_prbs_ul_err = 0;
  int m_up_drop = 0, m_usb_bp = 0, m_pktend = 0;

  // ---------------- host side: decode the upload stream ----------------
  int   ndata [NL], ncrep [NL];
  logic [23:0] lcrep [NL];
  logic [23:0] rq [$];            // register replies {addr, value}
  bit   tseen [4096];             // trigger numbers (low 12 bits) sent so far
  int   ndata_tot = 0, bad_words = 0;

  initial begin
    for (int l = 0; l < NL; l++) begin ndata[l] = 0; ncrep[l] = 0; lcrep[l] = '0; end
    for (int t = 0; t < 4096; t++) tseen[t] = 0;
  end

  always @(negedge clk) begin
    while (usb.host_rx.size() != 0) begin
      logic [31:0] w;
      int l;
      w = usb.host_rx.pop_front();
      l = int'(w[29:24]);
      unique case (w[31:30])
        UT_DATA: begin
          if (l >= NL || w[23:16] != 8'h00 || !tseen[w[15:4]] ||
              int'(w[3:0]) >= ((fburst > 0 && l < NF) ? fburst : NW)) begin
            bad_words++;
            $display("FAIL bad data word %h", w);
          end else begin
            ndata[l]++;
            ndata_tot++;
          end
        end
        UT_CREP: begin
          if (l >= NL) begin bad_words++; $display("FAIL bad reply word %h", w); end
          else begin ncrep[l]++; lcrep[l] = w[23:0]; end
        end
        UT_RREG: rq.push_back(w[23:0]);
        default: begin bad_words++; $display("FAIL bad upload word %h", w); end
      endcase
    end
  end

  always @(posedge clk) if (!rst && !usb_flag_tx_rdy) m_usb_bp++;

  // trigger numbers leaving the trigger control, for checking data words
  always @(posedge clk) if (!rst && dut.tc_valid && dut.tc_ready) tseen[dut.tc_msg[11:0]] = 1;

  // ---------------- DAC serial decoder ----------------
  logic [23:0] dac_sr;
  int          dac_nb = 0;
  logic [23:0] dac_q [$];
  always @(negedge dac_sync_n) dac_nb = 0;
  always @(negedge dac_sclk) if (!dac_sync_n) begin dac_sr = {dac_sr[22:0], dac_din}; dac_nb++; end
  always @(posedge dac_sync_n) if (!rst) begin
    `CHK(dac_nb == 24, "DAC frame length")
    dac_q.push_back(dac_sr);
  end

  // ---------------- TLU output decoder (HDMI and RJ45) ----------------
  logic [15:0] hdmi_ids [$], rj45_ids [$];
  initial begin
    forever begin
      @(posedge tlu_clk); #1;
      if (!tlu_rst && hdmi_trig) begin
        logic [15:0] h, r;
        `CHK(rj45_o[1] && rj45_oe[1], "RJ45 TRIG with HDMI TRIG")
        @(posedge tlu_clk); #1;
        `CHK(!hdmi_trig && !hdmi_trig_id, "gap before ID")
        for (int i = 15; i >= 0; i--) begin
          @(posedge tlu_clk); #1;
          h[i] = hdmi_trig_id;
          r[i] = rj45_o[1];
        end
        hdmi_ids.push_back(h);
        rj45_ids.push_back(r);
      end
    end
  end

  // ---------------- host tasks ----------------
  task automatic clocks(int n);
    repeat (n) @(posedge clk);
  endtask

  task automatic hsend(logic [31:0] w);
    usb.down_q.push_back(w);
  endtask

  task automatic wr(logic [7:0] a, logic [15:0] v);
    hsend({HC_WRITE, 6'd0, a, v});
    m_reg_wr++;
  endtask

  task automatic rd(logic [7:0] a, output logic [15:0] v);
    int t = 0;
    hsend({HC_READ, 6'd0, a, 16'd0});
    while (rq.size() == 0 && t < 5000) begin @(posedge clk); t++; end
    if (rq.size() == 0) begin
      checks++; failures++; $display("FAIL no reply to read of %h", a); v = '0;
    end else begin
      logic [23:0] r;
      r = rq.pop_front();
      `CHK(r[23:16] == a, "read reply address")
      v = r[15:0];
      m_reg_rd++;
    end
  endtask

  // wait until every board has seen n triggers (or time out)
  task automatic wait_trig(int n, int tmo);
    int t = 0;
    bit done = 0;
    while (!done && t < tmo) begin
      done = 1;
      for (int l = 0; l < NL; l++) if (ntrig[l] < n) done = 0;
      @(posedge clk); t++;
    end
  endtask

  // every board has exactly n triggers, all with the same last number and type
  task automatic check_trig(int n, trig_mode_e ty, string what);
    for (int l = 0; l < NL; l++) begin
      `CHK(ntrig[l] == n, what)
      `CHK(ltrig[l] == ltrig[0] && ltrig[l][19:16] == {2'b00, ty}, what)
      if (ntrig[l] == n) begin
        if (l < NF) m_fib_trig++; else m_gtx_trig++;
      end
    end
  endtask

  // every board has sent NW words per trigger and all have arrived
  task automatic check_data(int n);
    for (int l = 0; l < NL; l++) begin
      `CHK(ndata[l] == NW * n, "data words per link")
      if (ndata[l] == NW * n && n > 0) begin
        m_up_data++;
        if (l >= NF) m_gtx_data++;
      end
    end
  endtask

  task automatic pulse_sma();
    sma_trig = 1; clocks(2); sma_trig = 0;
  endtask

  task automatic pulse_lemo(logic [9:0] m);
    @(posedge tlu_clk); #2; lemo_in = m;
    repeat (3) @(posedge tlu_clk);
    #2; lemo_in = '0;
  endtask

  task automatic mech(string name, int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", name); end
    else $display("  %-28s %0d", name, n);
  endtask

  // ---------------- watchdog ----------------
  initial begin
    #5ms;
    $display("FAIL watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- test sequence ----------------
  int exp_trig = 0;
  initial begin
    logic [15:0] v;
    int d0, nw0, pk0;

    repeat (20) @(posedge clk);
    rst = 0; tlu_rst = 0; gt_rst = 0;
    clocks(20);

    // ---- 1: link set-up, register write and read-back ----
    $display("phase 1: registers, delay taps, word alignment");
    for (int i = 0; i < NF; i++) wr(R_LINK_BASE + 8'(i), {9'd0, 2'(i % 4), 5'((3 * i) % 32)});
    clocks(300);
    for (int i = 0; i < NF; i++) begin
      `CHK(fib_dly_tap[i] == 5'((3 * i) % 32), "delay tap")
      if (fib_dly_tap[i] == 5'((3 * i) % 32)) m_dly_tap++;
    end
    rd(R_LINK_BASE + 8'd5, v);
    `CHK(v == {9'd0, 2'd1, 5'd15}, "link register read-back")
    wr(R_SELF_WIN, 16'd20);
    rd(R_SELF_WIN, v);
    `CHK(v == 16'd20, "self window read-back")

    // ---- 2: commands and replies ----
    $display("phase 2: commands");
    hsend({HC_FCMD, LINK_ALL, 24'hC0FFEE});
    clocks(800);
    for (int l = 0; l < NL; l++) begin
      `CHK(ncmd[l] == 1 && lcmd[l] == 24'hC0FFEE, "broadcast command at board")
      `CHK(ncrep[l] == 1 && lcrep[l] == 24'hC0FFEE, "broadcast command reply")
      if (ncmd[l] == 1) m_cmd_bcast++;
      if (ncrep[l] == 1 && lcrep[l] == 24'hC0FFEE) begin
        m_crep++;
        if (l < NF && l % 4 != 0) m_slip++;
      end
    end
    hsend({HC_FCMD, 6'd7, 24'h123456});
    hsend({HC_FCMD, 6'd40, 24'h654321});
    clocks(800);
    `CHK(ncmd[7] == 2 && lcmd[7] == 24'h123456 && ncrep[7] == 2 && lcrep[7] == 24'h123456, "command to link 7")
    `CHK(ncmd[40] == 2 && lcmd[40] == 24'h654321 && ncrep[40] == 2 && lcrep[40] == 24'h654321, "command to link 40")
    `CHK(ncmd[8] == 1 && ncmd[41] == 1, "command only to its link")
    if (ncrep[7] == 2) m_cmd_one++;
    if (ncrep[40] == 2) m_cmd_one++;

    // ---- 3: downlink data words ----
    $display("phase 3: downlink data");
    hsend({HC_FDAT, 6'd3, 24'hABCDEF});
    hsend({HC_FDAT, 6'd45, 24'h0F0F0F});
    clocks(800);
    `CHK(nddat[3] == 1 && lddat[3] == 24'hABCDEF, "data word link 3")
    `CHK(nddat[45] == 1 && lddat[45] == 24'h0F0F0F, "data word link 45")
    `CHK(nddat[4] == 0 && nddat[44] == 0, "data only to its link")
    if (nddat[3] == 1) m_dfwd++;
    if (nddat[45] == 1) m_dfwd++;

    // ---- 4: DAC threshold write ----
    $display("phase 4: DAC");
    wr(R_DAC, {4'd5, 12'hABC});
    clocks(400);
    `CHK(dac_q.size() == 1, "one DAC frame")
    if (dac_q.size() == 1) begin
      logic [23:0] f;
      f = dac_q.pop_front();
      `CHK(f == {4'b0000, 4'd5, 2'b11, 12'hABC, 2'b00}, "DAC frame content")
      if (f == {4'b0000, 4'd5, 2'b11, 12'hABC, 2'b00}) m_dac++;
    end

    // ---- 5: periodic test trigger ----
    $display("phase 5: test trigger");
    wr(R_TEST_PER_L, 16'd3000);
    wr(R_TEST_PER_H, 16'd0);
    wr(R_TRIG_MODE, 16'(TM_TEST));
    wait_trig(3, 20000);
    wr(R_TRIG_MODE, 16'(TM_OFF));
    clocks(2500);
    exp_trig = ntrig[0];
    `CHK(exp_trig >= 3, "test triggers issued")
    m_trig_test = exp_trig;
    check_trig(exp_trig, TM_TEST, "test trigger at every board");
    check_data(exp_trig);
    rd(R_TRIG_CNT, v);
    `CHK(int'(v) == exp_trig, "trigger count register")

    // ---- 6: SMA external trigger, then a burst that drops one ----
    $display("phase 6: SMA trigger and drop");
    wr(R_EXT_SRC, 16'd1);
    wr(R_TRIG_MODE, 16'(TM_EXT));
    clocks(50);
    pulse_sma();
    clocks(1500);
    exp_trig++;
    check_trig(exp_trig, TM_EXT, "SMA trigger at every board");
    if (ntrig[0] == exp_trig) m_trig_sma++;
    // three pulses 6 clocks apart: one sent, one waits, one dropped
    pulse_sma(); clocks(4);
    pulse_sma(); clocks(4);
    pulse_sma();
    clocks(2000);
    exp_trig += 2;
    check_trig(exp_trig, TM_EXT, "closely spaced SMA triggers");
    rd(R_TRIG_DROP, v);
    `CHK(v == 16'd1, "one trigger dropped")
    m_trig_drop = int'(v);
    check_data(exp_trig);

    // ---- 7: TLU ----
    $display("phase 7: TLU");
    wr(R_TLU_INEN, 16'b11);
    wr(R_TLU_LEVEL, 16'd1);
    wr(R_EXT_SRC, 16'd2);
    clocks(100);
    pulse_lemo(10'b01);
    clocks(1500);
    exp_trig++;
    `CHK(hdmi_ids.size() == 1 && rj45_ids.size() == 1, "TLU trigger on HDMI and RJ45")
    if (hdmi_ids.size() == 1 && rj45_ids.size() == 1) begin
      logic [15:0] h, r;
      h = hdmi_ids.pop_front();
      r = rj45_ids.pop_front();
      `CHK(h == 16'd0 && r == 16'd0, "first TLU trigger ID")
      if (h == 16'd0) m_tlu_hdmi++;
      if (r == 16'd0) m_tlu_rj45++;
    end
    check_trig(exp_trig, TM_EXT, "TLU trigger at every board");
    if (ntrig[0] == exp_trig) m_trig_tlu++;
    // coincidence of two inputs required
    wr(R_TLU_LEVEL, 16'd2);
    clocks(100);
    pulse_lemo(10'b01);
    clocks(800);
    `CHK(hdmi_ids.size() == 0 && ntrig[0] == exp_trig, "one input below coincidence level")
    if (hdmi_ids.size() == 0) m_tlu_below++;
    pulse_lemo(10'b11);
    clocks(1500);
    exp_trig++;
    `CHK(hdmi_ids.size() == 1, "coincidence trigger")
    if (hdmi_ids.size() == 1) begin
      logic [15:0] h;
      h = hdmi_ids.pop_front();
      void'(rj45_ids.pop_front());
      `CHK(h == 16'd1, "second TLU trigger ID")
      if (h == 16'd1) m_tlu_coinc++;
    end
    check_trig(exp_trig, TM_EXT, "TLU coincidence at every board");
    if (ntrig[0] == exp_trig) m_trig_tlu++;
    // BUSY veto
    wr(R_TLU_BUSYEN, 16'b1);
    hdmi_busy[0] = 1;
    clocks(100);
    pulse_lemo(10'b11);
    clocks(800);
    `CHK(hdmi_ids.size() == 0 && ntrig[0] == exp_trig, "BUSY vetoes the TLU")
    if (hdmi_ids.size() == 0 && ntrig[0] == exp_trig) m_tlu_veto++;
    hdmi_busy[0] = 0;
    rd(R_TLU_CNT, v);
    `CHK(v == 16'd2, "TLU trigger count")
    check_data(exp_trig);

    // ---- 8: self trigger from front-end requests ----
    $display("phase 8: self trigger");
    wr(R_SELF_MULT, 16'd3);
    wr(R_TRIG_MODE, 16'(TM_SELF));
    clocks(50);
    @(posedge clk); #1;
    fhit[2] = 1; fhit[20] = 1; ghit[1] = 1;
    @(posedge clk); #1;
    fhit = '0;
    clocks(3);
    ghit = '0;
    clocks(1500);
    exp_trig++;
    check_trig(exp_trig, TM_SELF, "self trigger at every board");
    if (ntrig[0] == exp_trig) m_trig_self++;
    // two requests are below the multiplicity of three
    @(posedge clk); #1;
    fhit[4] = 1; fhit[9] = 1;
    @(posedge clk); #1;
    fhit = '0;
    clocks(1000);
    `CHK(ntrig[0] == exp_trig, "two requests give no self trigger")
    if (ntrig[0] == exp_trig) m_self_below++;
    wr(R_TRIG_MODE, 16'(TM_OFF));
    clocks(1000);
    check_data(exp_trig);

    // ---- 9: PRBS tests of both directions ----
    $display("phase 9: PRBS");
    fprbs_dl = 1;
    clocks(5);
    wr(R_PRBS, 16'b011);
    clocks(100);
    fprbs_ul = 1;
    clocks(1000);
    @(posedge clk); #1; fclr = 1;
    @(posedge clk); #1; fclr = 0;
    wr(R_PRBS, 16'b111);           // clear the error counters
    clocks(2000);
    for (int i = 0; i < NF; i++) begin
      rd(R_PERR_BASE + 8'(i), v);
      `CHK(v == 16'd0, "no uplink PRBS errors")
      `CHK(dlperr[i] == 0, "no downlink PRBS errors")
      if (v == 16'd0) m_prbs_ul++;
      if (dlperr[i] == 0) m_prbs_dl++;
    end
    @(posedge clk); #1; inj_dl = 1; inj_ul = 1;
    @(posedge clk); #1; inj_dl = 0; inj_ul = 0;
    clocks(200);
    rd(R_PERR_BASE, v);
    `CHK(v != 16'd0, "injected uplink error counted")
    if (v != 16'd0) m_prbs_ul_err++;
    `CHK(dlperr[0] != 0, "injected downlink error seen by the board")
    if (dlperr[0] != 0) m_prbs_dl_err++;
    rd(R_PERR_BASE + 8'd1, v);
    `CHK(v == 16'd0 && dlperr[1] == 0, "other links unaffected")
    fprbs_ul = 0;
    clocks(100);
    wr(R_PRBS, 16'b000);
    clocks(100);
    fprbs_dl = 0;
    clocks(100);
    // links still carry messages afterwards
    hsend({HC_FCMD, LINK_ALL, 24'h00BEEF});
    clocks(800);
    for (int l = 0; l < NL; l++) `CHK(lcrep[l] == 24'h00BEEF, "command after PRBS test")

    // ---- 10: upload overflow under a slow host ----
    $display("phase 10: overflow and USB back-pressure");
    d0 = ndata_tot;
    nw0 = int'(up_drop_cnt);
    pk0 = usb.npktend;
    fburst = 40;
    usb.drain = 4;
    wr(R_EXT_SRC, 16'd1);
    wr(R_TRIG_MODE, 16'(TM_EXT));
    clocks(50);
    pulse_sma();
    clocks(12000);
    exp_trig++;
    check_trig(exp_trig, TM_EXT, "burst trigger at every board");
    `CHK(int'(up_drop_cnt) > nw0, "upload overflow drops words")
    m_up_drop = int'(up_drop_cnt) - nw0;
    `CHK((ndata_tot - d0) + m_up_drop == NF * 40 + NG * NW, "words received + dropped = words sent")
    m_pktend = usb.npktend - pk0;
    `CHK(usb.up_q.size() == 0 && usb.down_q.size() == 0, "USB buffers drained")

    // ---- summary ----
    for (int i = 0; i < NF; i++) `CHK(nbadsym[i] == 0, "Manchester symbols valid")
    `CHK(usb.nbad == 0, "USB protocol")
    `CHK(bad_words == 0, "upload words valid")
    $display("mechanisms:");
    mech("register write", m_reg_wr);
    mech("register read", m_reg_rd);
    mech("input delay tap setting", m_dly_tap);
    mech("uplink word alignment", m_slip);
    mech("command broadcast", m_cmd_bcast);
    mech("command to one link", m_cmd_one);
    mech("command reply uploaded", m_crep);
    mech("downlink data word", m_dfwd);
    mech("DAC write", m_dac);
    mech("test trigger", m_trig_test);
    mech("SMA external trigger", m_trig_sma);
    mech("TLU external trigger", m_trig_tlu);
    mech("self trigger", m_trig_self);
    mech("self trigger below mult.", m_self_below);
    mech("trigger dropped", m_trig_drop);
    mech("trigger on fiber link", m_fib_trig);
    mech("trigger on GTX link", m_gtx_trig);
    mech("data upload complete", m_up_data);
    mech("GTX data upload", m_gtx_data);
    mech("TLU HDMI trigger+ID", m_tlu_hdmi);
    mech("TLU RJ45 trigger+ID", m_tlu_rj45);
    mech("TLU coincidence", m_tlu_coinc);
    mech("TLU below coincidence", m_tlu_below);
    mech("TLU BUSY veto", m_tlu_veto);
    mech("PRBS downlink clean", m_prbs_dl);
    mech("PRBS uplink clean", m_prbs_ul);
    mech("PRBS downlink error", m_prbs_dl_err);
    mech("PRBS uplink error", m_prbs_ul_err);
    mech("upload overflow drop", m_up_drop);
    mech("USB back-pressure clocks", m_usb_bp);
    mech("USB packet end", m_pktend);
    $display("triggers %0d, data words %0d, upload drops %0d", exp_trig, ndata_tot, up_drop_cnt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
