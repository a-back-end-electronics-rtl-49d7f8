// Testbench of trig_ctrl with 48 links.
//  * test mode, period 1000: triggers exactly 1000 clocks apart, numbers
//    counting up, type field = mode;
//  * external mode: one trigger per ext_trig pulse;
//  * self mode, multiplicity 3 within 10 clocks: two hit links give nothing,
//    three hits spread over more than the window give nothing, three hits
//    within the window give exactly one trigger;
//  * with trig_ready held low a second trigger is dropped and counted.
module tb_trig_ctrl;
  timeunit 1ns; timeprecision 100ps;
  import be_pkg::*;
  localparam int NLINK = 48;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  trig_mode_e mode = TM_OFF;
  logic [31:0] test_period = 0, trig_cnt, drop_cnt;
  logic [7:0] self_mult = 3, self_win = 10;
  logic [NLINK-1:0] ul_trig = '0;
  logic ext_trig = 0, trig_valid, trig_ready = 1;
  logic [TRIG_MSG_W-1:0] trig_msg;

  trig_ctrl #(.NLINK(NLINK)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0, ntrig = 0, last = -1;
  int intervals [$];
  logic [15:0] exp_num = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst && trig_valid && trig_ready) begin
      ntrig++;
      checks++;
      if (trig_msg[15:0] != exp_num || trig_msg[19:16] != {2'b00, mode}) begin
        failures++;
        $display("FAIL msg %h expected num %0d", trig_msg, exp_num);
      end
      exp_num++;
      if (last >= 0) intervals.push_back(cyc - last);
      last = cyc;
    end
  end

  task automatic hit(int link);
    ul_trig[link] <= 1'b1;
    @(posedge clk);
    ul_trig <= '0;
  endtask

  initial begin
    int n0;
    repeat (3) @(posedge clk);
    rst <= 0;
    // ---- test trigger ----
    test_period <= 1000;
    mode <= TM_TEST;
    repeat (10500) @(posedge clk);
    mode <= TM_OFF;
    checks++;
    if (ntrig != 10) begin failures++; $display("FAIL test triggers %0d", ntrig); end
    foreach (intervals[i]) begin
      checks++;
      if (intervals[i] != 1000) begin failures++; $display("FAIL interval %0d", intervals[i]); end
    end
    // ---- external ----
    @(posedge clk);
    mode <= TM_EXT;
    n0 = ntrig;
    repeat (7) begin
      ext_trig <= 1; @(posedge clk); ext_trig <= 0;
      repeat (50) @(posedge clk);
    end
    checks++;
    if (ntrig - n0 != 7) begin failures++; $display("FAIL external %0d", ntrig - n0); end
    // back-to-back external triggers: each must carry the next number
    n0 = ntrig;
    ext_trig <= 1; repeat (3) @(posedge clk); ext_trig <= 0;
    repeat (10) @(posedge clk);
    checks++;
    if (ntrig - n0 != 3) begin failures++; $display("FAIL back-to-back %0d", ntrig - n0); end
    // ---- self ----
    mode <= TM_SELF;
    repeat (5) @(posedge clk);
    n0 = ntrig;
    hit(3); repeat (3) @(posedge clk); hit(40);
    repeat (30) @(posedge clk);
    checks++;
    if (ntrig != n0) begin failures++; $display("FAIL self fired with 2 hits"); end
    hit(1); repeat (12) @(posedge clk); hit(2); repeat (12) @(posedge clk); hit(5);
    repeat (30) @(posedge clk);
    checks++;
    if (ntrig != n0) begin failures++; $display("FAIL self fired outside window"); end
    hit(7); repeat (2) @(posedge clk); hit(20); repeat (4) @(posedge clk); hit(47);
    repeat (30) @(posedge clk);
    checks++;
    if (ntrig != n0 + 1) begin failures++; $display("FAIL self multiplicity, %0d", ntrig - n0); end
    // ---- drop ----
    mode <= TM_EXT;
    trig_ready <= 0;
    @(posedge clk);
    ext_trig <= 1; @(posedge clk); ext_trig <= 0; repeat (3) @(posedge clk);
    ext_trig <= 1; @(posedge clk); ext_trig <= 0; repeat (3) @(posedge clk);
    trig_ready <= 1;
    repeat (5) @(posedge clk);
    checks++;
    if (drop_cnt != 1) begin failures++; $display("FAIL drop_cnt %0d", drop_cnt); end
    checks++;
    if (trig_cnt != 32'(ntrig)) begin failures++; $display("FAIL trig_cnt %0d vs %0d", trig_cnt, ntrig); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
