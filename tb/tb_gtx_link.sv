// Testbench of gtx_link with a 100 MHz system clock and a 120 MHz GT clock.
// Downlink: random trigger, command and data messages offered on the system
// side must appear framed in gt_tx_word (trigger in bits 3:0, command 7:4,
// data 15:8; start word 1, payload MSB first), decoded here by the
// testbench's own deframer. Uplink: the testbench frames random messages into
// gt_rx_word and each must come out once, in order, on the system side.
module tb_gtx_link;
  timeunit 1ns; timeprecision 10ps;
  import be_pkg::*;
  logic clk = 0, rst = 1, gt_clk = 0, gt_rst = 1;
  always #5 clk = ~clk;
  always #4.1667 gt_clk = ~gt_clk;
  int checks = 0, failures = 0;

  logic trig_valid = 0, cmd_valid = 0, data_valid = 0;
  logic [TRIG_MSG_W-1:0] trig_msg;
  logic [CMD_MSG_W-1:0]  cmd_msg;
  logic [DDAT_MSG_W-1:0] data_msg;
  logic trig_ready, cmd_ready, data_ready;
  logic ul_trig_valid, ul_cmd_valid, ul_data_valid;
  logic [UTRG_MSG_W-1:0] ul_trig_msg;
  logic [UCMD_MSG_W-1:0] ul_cmd_msg;
  logic [UDAT_MSG_W-1:0] ul_data_msg;
  logic [15:0] ul_drop_cnt, gt_tx_word, gt_rx_word = '0;

  gtx_link dut (.*);

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] exp_t [$], exp_c [$], exp_d [$], exp_ut [$], exp_uc [$], exp_ud [$];
  int n_t = 0, n_c = 0, n_d = 0, n_ut = 0, n_uc = 0, n_ud = 0;

  // ---- downlink deframers on gt_tx_word ----
  typedef struct { int left; logic [31:0] sr; } deframer_t;
  deframer_t ft = '{0, 0}, fc = '{0, 0}, fd = '{0, 0};
  function automatic void feed(ref deframer_t f, input logic [7:0] v, input int lw, input int mw,
                               ref logic [31:0] q[$], ref int cnt);
    if (f.left == 0) begin
      if (v != 0) begin f.left = (mw + lw - 1) / lw; f.sr = 0; end
    end else begin
      f.sr = (f.sr << lw) | 32'(v);
      f.left--;
      if (f.left == 0) begin
        logic [31:0] m;
        m = f.sr >> ((mw + lw - 1) / lw * lw - mw);
        checks++; cnt++;
        if (q.size() == 0 || q[0] != m) begin failures++; $display("FAIL dl msg %h", m); end
        if (q.size()) void'(q.pop_front());
      end
    end
  endfunction

  always @(posedge gt_clk) if (!gt_rst) begin
    feed(ft, 8'(gt_tx_word[3:0]), 4, TRIG_MSG_W, exp_t, n_t);
    feed(fc, 8'(gt_tx_word[7:4]), 4, CMD_MSG_W, exp_c, n_c);
    feed(fd, gt_tx_word[15:8], 8, DDAT_MSG_W, exp_d, n_d);
  end

  // ---- downlink stimulus ----
  always @(posedge clk) if (!rst) begin
    if (trig_valid && trig_ready) begin exp_t.push_back(32'(trig_msg)); trig_msg <= TRIG_MSG_W'($urandom); trig_valid <= 1'($urandom); end
    else if (!trig_valid) trig_valid <= ($urandom_range(20) == 0);
    if (cmd_valid && cmd_ready) begin exp_c.push_back(32'(cmd_msg)); cmd_msg <= CMD_MSG_W'($urandom); cmd_valid <= 1'($urandom); end
    else if (!cmd_valid) cmd_valid <= ($urandom_range(20) == 0);
    if (data_valid && data_ready) begin exp_d.push_back(32'(data_msg)); data_msg <= DDAT_MSG_W'($urandom); data_valid <= 1'($urandom); end
    else if (!data_valid) data_valid <= ($urandom_range(5) == 0);
  end

  // ---- uplink: frame words into gt_rx_word ----
  logic [7:0] qt [$], qc [$], qd [$];
  function automatic void add(ref logic [7:0] q[$], input int lw, input int mw, ref logic [31:0] e[$]);
    logic [31:0] m;
    int nw;
    m = $urandom & ((32'd1 << mw) - 1);
    e.push_back(m);
    nw = (mw + lw - 1) / lw;
    repeat ($urandom_range(1, 30)) q.push_back(0);
    q.push_back(1);
    for (int i = nw - 1; i >= 0; i--) q.push_back(8'((m << (nw * lw - mw)) >> (i * lw)) & 8'((1 << lw) - 1));
  endfunction

  always @(posedge clk) if (!rst) begin
    if (ul_trig_valid) begin checks++; n_ut++;
      if (exp_ut.size() == 0 || exp_ut[0] != 32'(ul_trig_msg)) begin failures++; $display("FAIL ul trig %h", ul_trig_msg); end
      if (exp_ut.size()) void'(exp_ut.pop_front()); end
    if (ul_cmd_valid) begin checks++; n_uc++;
      if (exp_uc.size() == 0 || exp_uc[0] != 32'(ul_cmd_msg)) begin failures++; $display("FAIL ul cmd %h", ul_cmd_msg); end
      if (exp_uc.size()) void'(exp_uc.pop_front()); end
    if (ul_data_valid) begin checks++; n_ud++;
      if (exp_ud.size() == 0 || exp_ud[0] != 32'(ul_data_msg)) begin failures++; $display("FAIL ul data %h", ul_data_msg); end
      if (exp_ud.size()) void'(exp_ud.pop_front()); end
  end

  initial begin
    trig_msg = TRIG_MSG_W'($urandom); cmd_msg = CMD_MSG_W'($urandom); data_msg = DDAT_MSG_W'($urandom);
    while (qt.size() < 8000) add(qt, 4, UTRG_MSG_W, exp_ut);
    while (qc.size() < 8000) add(qc, 4, UCMD_MSG_W, exp_uc);
    while (qd.size() < 8000) add(qd, 8, UDAT_MSG_W, exp_ud);
    repeat (4) @(posedge clk);
    rst <= 0;
    @(posedge gt_clk);
    gt_rst <= 0;
    repeat (5) @(posedge gt_clk);
    while (qt.size() || qc.size() || qd.size()) begin
      gt_rx_word <= {qd.size() ? qd.pop_front() : 8'd0, 4'(qc.size() ? qc.pop_front() : 8'd0),
                     4'(qt.size() ? qt.pop_front() : 8'd0)};
      @(posedge gt_clk);
    end
    gt_rx_word <= '0;
    trig_valid <= 0; cmd_valid <= 0; data_valid <= 0;
    force trig_valid = 0; force cmd_valid = 0; force data_valid = 0;
    repeat (200) @(posedge clk);
    checks++;
    if (exp_t.size() || exp_c.size() || exp_d.size() || exp_ut.size() || exp_uc.size() || exp_ud.size()) begin
      failures++;
      $display("FAIL left %0d %0d %0d %0d %0d %0d", exp_t.size(), exp_c.size(), exp_d.size(), exp_ut.size(), exp_uc.size(), exp_ud.size());
    end
    checks++;
    if (n_t < 50 || n_c < 50 || n_d < 50 || n_ut < 50 || n_uc < 50 || n_ud < 50) begin failures++; $display("FAIL at line %0d", `__LINE__); end
    checks++;
    if (ul_drop_cnt != 0) begin failures++; $display("FAIL at line %0d", `__LINE__); end
    $display("dl %0d %0d %0d ul %0d %0d %0d", n_t, n_c, n_d, n_ut, n_uc, n_ud);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
