// Testbench of tlu on a 40 MHz clock. For every trigger the testbench checks
// the output waveform clock by clock against the HDMI/RJ45 timing: TRIG high
// one clock, ID_GAP (1) clock low, then the 16-bit trigger ID, MSB first, one
// bit per clock on TRIG-ID (HDMI) and on TRIG itself (RJ45); IDs count 0,1,2...
// Cases: single inputs at level 1 (OR); level 2 needs two coincident inputs;
// an enabled HDMI BUSY or RJ45 BUSY vetoes, a disabled one does not; inputs
// arriving while an ID is sent are vetoed; rj45_oe follows rj45_dir.
module tb_tlu;
  timeunit 1ns; timeprecision 100ps;
  logic clk = 0, rst = 1;
  always #12.5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [9:0] lemo_in = '0, in_en = '1;
  logic [3:0] level = 4'd1, rj45_dir = 4'b1011, rj45_i = '0, rj45_oe;
  logic [7:0] hdmi_busy = '0;
  logic [8:0] busy_en = '1;
  logic hdmi_trig, hdmi_trig_id, rj45_trig_o, rj45_busy_o, rj45_id_o, trig_pulse, busy;
  logic [15:0] trig_id;
  logic [31:0] trig_cnt, veto_cnt;

  tlu dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- waveform checker ----
  int ntrig = 0;
  logic [15:0] exp_id = 0;
  initial begin
    forever begin
      @(posedge clk); #1;
      if (!rst && hdmi_trig) begin
        logic [15:0] got_h, got_r;
        ntrig++;
        checks++;
        if (!rj45_trig_o || hdmi_trig_id || trig_id != exp_id) begin failures++; $display("FAIL trig cycle"); end
        @(posedge clk); #1;                       // gap
        checks++;
        if (hdmi_trig || hdmi_trig_id || rj45_trig_o) begin failures++; $display("FAIL gap"); end
        for (int i = 15; i >= 0; i--) begin
          @(posedge clk); #1;
          got_h[i] = hdmi_trig_id;
          got_r[i] = rj45_trig_o;
          checks++;
          if (hdmi_trig || rj45_id_o != hdmi_trig_id || !busy) begin failures++; $display("FAIL at line %0d", `__LINE__); end
        end
        checks++;
        if (got_h != exp_id || got_r != exp_id) begin
          failures++;
          $display("FAIL id %h/%h expected %h", got_h, got_r, exp_id);
        end
        exp_id++;
        @(posedge clk); #1;
        checks++;
        if (hdmi_trig_id || rj45_trig_o) begin failures++; $display("FAIL at line %0d", `__LINE__); end
      end
    end
  end

  task automatic pulse(logic [9:0] m);
    #3 lemo_in = m;
    #60 lemo_in = '0;
    #(200 + 25 * 20);
  endtask

  initial begin
    int n0;
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (3) @(posedge clk);
    for (int i = 0; i < 10; i++) pulse(10'(1 << i));
    checks++; if (ntrig != 10) begin failures++; $display("FAIL OR mode %0d", ntrig); end
    // level 2
    level = 2;
    n0 = ntrig;
    pulse(10'b0000000100);
    checks++; if (ntrig != n0) begin failures++; $display("FAIL at line %0d", `__LINE__); end
    pulse(10'b0001000100);
    checks++; if (ntrig != n0 + 1) begin failures++; $display("FAIL coincidence"); end
    level = 1;
    // HDMI busy enabled: veto
    n0 = ntrig;
    hdmi_busy[3] = 1;
    #100;
    pulse(10'b1);
    checks++; if (ntrig != n0) begin failures++; $display("FAIL busy veto"); end
    checks++; if (veto_cnt == 0) begin failures++; $display("FAIL at line %0d", `__LINE__); end
    busy_en[3] = 0;
    #100;
    pulse(10'b1);
    checks++; if (ntrig != n0 + 1) begin failures++; $display("FAIL disabled busy"); end
    hdmi_busy[3] = 0; busy_en[3] = 1;
    // RJ45 busy as input
    rj45_dir = 4'b1011;  // pair 2 (BUSY) is an input
    rj45_i[2] = 1;
    #100;
    n0 = ntrig;
    pulse(10'b10);
    checks++; if (ntrig != n0) begin failures++; $display("FAIL rj45 busy veto"); end
    rj45_i[2] = 0;
    checks++; if (rj45_oe != 4'b1011) begin failures++; $display("FAIL at line %0d", `__LINE__); end
    // two triggers closer than one ID: second vetoed
    n0 = ntrig;
    #3 lemo_in = 10'b1; #60 lemo_in = '0; #150 lemo_in = 10'b10; #60 lemo_in = '0;
    #1000;
    checks++; if (ntrig != n0 + 1) begin failures++; $display("FAIL overlap %0d", ntrig - n0); end
    checks++; if (trig_cnt != 32'(ntrig)) begin failures++; $display("FAIL at line %0d", `__LINE__); end
    $display("triggers %0d vetoes %0d", ntrig, veto_cnt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
