// Testbench of fiber_dl_link. The testbench plays the front end: it decodes
// the Manchester symbols (every bit must be 01 or 10), splits the bit stream
// by its own slot count (trigger, command, trigger, data, starting with the
// first clock after reset), deframes each channel (idle 0, start bit 1,
// payload MSB first) and compares the messages with those sent. With
// messages offered back to back it checks the channel rates: one trigger
// message per 2*(20+2) = 44 clocks (50 Mbps), one command or data message per
// 4*(24+2) = 104 clocks (25 Mbps). Then PRBS mode: the decoded bits must obey
// b[n] = b[n-31] ^ b[n-28].
module tb_fiber_dl_link;
  timeunit 1ns; timeprecision 100ps;
  import be_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic trig_valid = 0, cmd_valid = 0, data_valid = 0, prbs_en = 0;
  logic [TRIG_MSG_W-1:0] trig_msg;
  logic [CMD_MSG_W-1:0]  cmd_msg;
  logic [DDAT_MSG_W-1:0] data_msg;
  logic trig_ready, cmd_ready, data_ready;
  logic [1:0] sym_o;

  fiber_dl_link dut (.*);

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- expected messages ----
  logic [31:0] exp_t [$], exp_c [$], exp_d [$];
  int n_t = 0, n_c = 0, n_d = 0;
  int acc_t [$], acc_c [$];

  // ---- receiver model ----
  typedef struct { int left; logic [31:0] sr; } deframer_t;
  deframer_t ft, fc, fd;
  int  k = 0;
  logic rx_on = 0;
  logic bits [$];

  function automatic void feed(ref deframer_t f, input logic b, input int w, ref logic [31:0] q[$], ref int cnt);
    if (f.left == 0) begin
      if (b) begin f.left = w; f.sr = 0; end
    end else begin
      f.sr = {f.sr[30:0], b};
      f.left--;
      if (f.left == 0) begin
        checks++;
        cnt++;
        if (q.size() == 0 || q[0] != f.sr) begin
          failures++;
          $display("FAIL msg %h expected %h", f.sr, q.size() ? q[0] : 0);
        end
        if (q.size()) void'(q.pop_front());
      end
    end
  endfunction

  always @(posedge clk) if (rx_on) begin
    logic b;
    #1;
    checks++;
    if (sym_o != 2'b01 && sym_o != 2'b10) begin failures++; $display("FAIL at line %0d", `__LINE__); end
    b = (sym_o == 2'b10);
    bits.push_back(b);
    if (!prbs_en) begin
      unique case (k % 4)
        0, 2: feed(ft, b, TRIG_MSG_W, exp_t, n_t);
        1:    feed(fc, b, CMD_MSG_W, exp_c, n_c);
        default: feed(fd, b, DDAT_MSG_W, exp_d, n_d);
      endcase
    end
    k++;
  end

  // ---- record accepted messages ----
  int cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst && trig_valid && trig_ready) begin exp_t.push_back(32'(trig_msg)); acc_t.push_back(cyc); end
    if (!rst && cmd_valid && cmd_ready)   begin exp_c.push_back(32'(cmd_msg));  acc_c.push_back(cyc); end
    if (!rst && data_valid && data_ready) exp_d.push_back(32'(data_msg));
  end

  // ---- stimulus ----
  always @(posedge clk) begin
    if (trig_valid && trig_ready) trig_msg <= TRIG_MSG_W'($urandom);
    if (cmd_valid && cmd_ready)   cmd_msg  <= CMD_MSG_W'($urandom);
    if (data_valid && data_ready) data_msg <= DDAT_MSG_W'($urandom);
  end

  initial begin
    trig_msg = TRIG_MSG_W'($urandom); cmd_msg = CMD_MSG_W'($urandom); data_msg = DDAT_MSG_W'($urandom);
    ft = '{0, 0}; fc = '{0, 0}; fd = '{0, 0};
    repeat (3) @(posedge clk);
    rst <= 0;
    rx_on <= 1;
    // back-to-back traffic on all channels
    trig_valid <= 1; cmd_valid <= 1; data_valid <= 1;
    repeat (3000) @(posedge clk);
    trig_valid <= 0; cmd_valid <= 0; data_valid <= 0;
    repeat (300) @(posedge clk);
    checks++;
    if (exp_t.size() || exp_c.size() || exp_d.size()) begin
      failures++;
      $display("FAIL undelivered %0d %0d %0d", exp_t.size(), exp_c.size(), exp_d.size());
    end
    checks++;
    if (n_t < 60 || n_c < 25 || n_d < 25) begin failures++; $display("FAIL at line %0d", `__LINE__); end
    // rates
    for (int i = 2; i < acc_t.size(); i++) begin
      checks++;
      if (acc_t[i] - acc_t[i-1] != 2 * (TRIG_MSG_W + 2)) begin
        failures++;
        $display("FAIL trigger period %0d", acc_t[i] - acc_t[i-1]);
      end
    end
    for (int i = 2; i < acc_c.size(); i++) begin
      checks++;
      if (acc_c[i] - acc_c[i-1] != 4 * (CMD_MSG_W + 2)) begin failures++; $display("FAIL at line %0d", `__LINE__); end
    end
    $display("messages: trig %0d cmd %0d data %0d", n_t, n_c, n_d);
    // PRBS
    prbs_en <= 1;
    repeat (3) @(posedge clk);
    bits.delete();
    repeat (500) @(posedge clk);
    for (int i = 31; i < bits.size(); i++) begin
      checks++;
      if (bits[i] != (bits[i-31] ^ bits[i-28])) begin failures++; $display("FAIL at line %0d", `__LINE__); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
