// Readout-rate test of the whole back-end at its default size, after the
// experiments the original board served.
//
// Step 1, PandaX-III-like load: 26 front-end boards on fiber links answer each
// periodic test trigger (every 40 us) with 100 data words, sent one every
// 400 ns, so that the boards stream at a steady 5 MB/s each: 130 MB/s of
// payload in all, above the experiment's 102 MB/s. Every word must reach the host,
// none may be dropped, and the measured payload rate must be at least
// 102 MB/s.
//
// Step 2, saturation: all 32 fiber boards answer one trigger with 100 words
// each at full link speed (640 MB/s offered for 5 us). The host side then runs flat out; its
// payload rate, measured over 8 us in the middle of the burst, must lie
// between 190 and 200 MB/s. That is one 32-bit upload word per clock minus the
// USB controller's turn-around clocks, each word carrying 16 payload bits.
// Words that do not fit are dropped and counted, and received plus dropped
// must equal sent.
module tb_readout_rate;
  import be_pkg::*;
  timeunit 1ns;
  timeprecision 100ps;

  localparam int NF = N_FIBER_DEF;
  localparam int NG = N_GTX_DEF;
  localparam int NL = NF + NG;
  localparam int N_PANDAX = 26;    // boards in the PandaX-III electronics test
  localparam int WPT = 100;        // words per trigger per board
  localparam int NTRIG = 10;

  int checks = 0, failures = 0;

  logic clk = 0, tlu_clk = 0, gt_clk = 0;
  logic rst = 1, tlu_rst = 1, gt_rst = 1;
  always #5    clk = ~clk;
  always #12.5 tlu_clk = ~tlu_clk;
  always #4.2  gt_clk = ~gt_clk;

  logic [NF-1:0][3:0]  fib_rx_bits;
  logic [NF-1:0][1:0]  fib_tx_sym;
  logic [NF-1:0][4:0]  fib_dly_tap;
  logic [NG-1:0][15:0] gt_tx_word, gt_rx_word;
  logic        hdmi_trig, hdmi_trig_id;
  logic [3:0]  rj45_o, rj45_oe;
  logic        dac_sync_n, dac_sclk, dac_din;
  logic        usb_flag_rx_rdy, usb_flag_tx_rdy, usb_slcs_n, usb_slrd_n, usb_sloe_n;
  logic        usb_slwr_n, usb_pktend_n, usb_dq_oe;
  logic [1:0]  usb_addr;
  logic [31:0] usb_dq_o, usb_dq_i, up_drop_cnt;

  backend_top dut (
    .clk, .rst, .tlu_clk, .tlu_rst, .gt_clk, .gt_rst,
    .fib_rx_bits, .fib_tx_sym, .fib_dly_tap, .gt_tx_word, .gt_rx_word,
    .sma_trig(1'b0), .lemo_in(10'd0), .hdmi_busy(8'd0), .hdmi_trig, .hdmi_trig_id,
    .rj45_o, .rj45_oe, .rj45_i(4'd0), .dac_sync_n, .dac_sclk, .dac_din,
    .usb_flag_rx_rdy, .usb_flag_tx_rdy, .usb_slcs_n, .usb_slrd_n, .usb_sloe_n, .usb_slwr_n,
    .usb_pktend_n, .usb_addr, .usb_dq_o, .usb_dq_oe, .usb_dq_i, .up_drop_cnt);

  usb_chip_model #(.CAP(64), .DRAIN(1)) usb (
    .clk, .flag_rx_rdy(usb_flag_rx_rdy), .flag_tx_rdy(usb_flag_tx_rdy),
    .slcs_n(usb_slcs_n), .slrd_n(usb_slrd_n), .sloe_n(usb_sloe_n), .slwr_n(usb_slwr_n),
    .pktend_n(usb_pktend_n), .addr(usb_addr), .dq_o(usb_dq_o), .dq_oe(usb_dq_oe), .dq_i(usb_dq_i));

  int fburst [NF];
  int fpace = 40;                  // step 1: one word per 400 ns per board
  int ntrig [NL], unused_i [NL];
  logic [19:0] unused_t [NL];
  logic [23:0] unused_c [NL], unused_d [NL];
  int unused_b [NF], unused_p [NF];

  for (genvar i = 0; i < NF; i++) begin : g_fib
    fe_fiber_model #(.LINK(i), .OFFSET(0), .NWORDS(0)) u_fe (
      .clk, .rst, .sym(fib_tx_sym[i]), .rx_bits(fib_rx_bits[i]), .hit(1'b0),
      .prbs_dl(1'b0), .prbs_ul(1'b0), .burst(fburst[i]), .pace(fpace), .clr(1'b0),
      .n_trig(ntrig[i]), .n_cmd(unused_i[i]), .n_ddat(unused_b[i]), .n_bad_sym(unused_p[i]),
      .dl_prbs_err(), .last_trig(unused_t[i]), .last_cmd(unused_c[i]), .last_ddat(unused_d[i]));
  end
  for (genvar j = 0; j < NG; j++) begin : g_gtx
    fe_gtx_model #(.LINK(NF + j), .NWORDS(0)) u_fe (
      .clk(gt_clk), .rst(gt_rst), .tx_word(gt_tx_word[j]), .rx_word(gt_rx_word[j]), .hit(1'b0),
      .n_trig(ntrig[NF + j]), .n_cmd(unused_i[NF + j]), .n_ddat(),
      .last_trig(unused_t[NF + j]), .last_cmd(unused_c[NF + j]), .last_ddat(unused_d[NF + j]));
  end

  // host: count data words
  int ndata = 0, nother = 0;
  time t_last = 0;
  always @(negedge clk) begin
    while (usb.host_rx.size() != 0) begin
      logic [31:0] w;
      w = usb.host_rx.pop_front();
      if (w[31:30] == UT_DATA && int'(w[29:24]) < NF) begin
        ndata++;
        t_last = $time;
      end else begin
        nother++;
        $display("FAIL stray upload word %h", w);
      end
    end
  end

  int ntrig_sent = 0;
  time t_first = 0;
  always @(posedge clk) if (!rst && dut.tc_valid && dut.tc_ready) begin
    if (ntrig_sent == 0) t_first = $time;
    ntrig_sent++;
  end

  task automatic clocks(int n);
    repeat (n) @(posedge clk);
  endtask

  task automatic wr(logic [7:0] a, logic [15:0] v);
    usb.down_q.push_back({HC_WRITE, 6'd0, a, v});
  endtask

  initial begin
    #3ms;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real mbps;
    int  d0, dr0, n0;
    for (int i = 0; i < NF; i++) fburst[i] = (i < N_PANDAX) ? WPT : 0;
    clocks(20);
    rst = 0; tlu_rst = 0; gt_rst = 0;
    clocks(50);

    // ---- step 1: PandaX-III-like load ----
    wr(R_TEST_PER_L, 16'd4000);
    wr(R_TEST_PER_H, 16'd0);
    wr(R_TRIG_MODE, 16'(TM_TEST));
    while (ntrig_sent < NTRIG) clocks(1);
    wr(R_TRIG_MODE, 16'(TM_OFF));
    clocks(6000);
    checks++;
    if (ntrig_sent != NTRIG) begin failures++; $display("FAIL at line %0d: %0d triggers", `__LINE__, ntrig_sent); end
    checks++;
    if (ndata != N_PANDAX * WPT * NTRIG || up_drop_cnt != 0) begin
      failures++;
      $display("FAIL at line %0d: %0d words received, %0d dropped", `__LINE__, ndata, up_drop_cnt);
    end
    // payload bytes over the time from the first trigger to the last word
    mbps = 2.0 * real'(ndata) / (real'(t_last - t_first) * 1.0e-9) / 1.0e6;
    $display("step 1: %0d boards, %0d words, %0.1f MB/s payload, %0d dropped",
             N_PANDAX, ndata, mbps, up_drop_cnt);
    checks++;
    if (mbps < 102.0) begin failures++; $display("FAIL at line %0d: below 102 MB/s", `__LINE__); end

    // ---- step 2: saturation ----
    for (int i = 0; i < NF; i++) fburst[i] = WPT;
    fpace = 0;
    d0 = ndata;
    dr0 = int'(up_drop_cnt);
    n0 = ntrig_sent;
    wr(R_TRIG_MODE, 16'(TM_TEST));
    while (ntrig_sent == n0) clocks(1);
    wr(R_TRIG_MODE, 16'(TM_OFF));
    clocks(200);
    begin
      int a;
      a = ndata;
      clocks(800);
      mbps = 2.0 * real'(ndata - a) / 8.0e-6 / 1.0e6;
    end
    clocks(3000);
    $display("step 2: %0d words offered, %0d received, %0d dropped, %0.1f MB/s payload at saturation",
             NF * WPT, ndata - d0, int'(up_drop_cnt) - dr0, mbps);
    checks++;
    if (mbps < 190.0 || mbps > 200.0) begin failures++; $display("FAIL at line %0d: saturation rate", `__LINE__); end
    checks++;
    if ((ndata - d0) + (int'(up_drop_cnt) - dr0) != NF * WPT) begin
      failures++;
      $display("FAIL at line %0d: received + dropped != sent", `__LINE__);
    end
    checks++;
    if (nother != 0 || usb.nbad != 0) begin failures++; $display("FAIL at line %0d: stray words or bus errors", `__LINE__); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
