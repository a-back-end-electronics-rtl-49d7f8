// Trigger-rate test of the TLU, after the bench test of the original board:
// a pulse generator drives one LEMO input at 100 Hz, 1 kHz, 10 kHz, 100 kHz
// and 1 MHz, and every pulse must give exactly one trigger with the next ID on
// the HDMI TRIG-ID line. Pulses are 50 ns wide and not aligned to the 40 MHz
// clock. The pulse counts per rate are scaled down from the bench test to keep
// the run short. A last step at 2.5 MHz goes past the unit's limit (one
// trigger and its ID take 18 clocks, 450 ns): there some pulses must be
// vetoed, and triggers plus vetoes must still equal pulses.
module tb_tlu_rate;
  timeunit 1ns; timeprecision 100ps;
  logic clk = 0, rst = 1;
  always #12.5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [9:0] lemo_in = '0, in_en = 10'b1;
  logic [3:0] level = 4'd1, rj45_dir = 4'b1011, rj45_i = '0, rj45_oe;
  logic [7:0] hdmi_busy = '0;
  logic [8:0] busy_en = '1;
  logic hdmi_trig, hdmi_trig_id, rj45_trig_o, rj45_busy_o, rj45_id_o, trig_pulse, busy;
  logic [15:0] trig_id;
  logic [31:0] trig_cnt, veto_cnt;

  tlu dut (.*);

  initial begin
    #120ms;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // decode every HDMI trigger and its ID
  int nseen = 0, id_err = 0;
  logic [15:0] exp_id = 0;
  initial begin
    forever begin
      @(posedge clk); #1;
      if (!rst && hdmi_trig) begin
        logic [15:0] h;
        @(posedge clk); #1;                 // gap clock
        for (int i = 15; i >= 0; i--) begin
          @(posedge clk); #1;
          h[i] = hdmi_trig_id;
        end
        nseen++;
        if (h != exp_id) id_err++;
        exp_id++;
      end
    end
  end

  task automatic burst(real period_ns, int n, output int got, output int vetoed);
    int t0, v0;
    t0 = int'(trig_cnt);
    v0 = int'(veto_cnt);
    repeat (n) begin
      #(period_ns - 50.0);
      lemo_in[0] = 1;
      #50;
      lemo_in[0] = 0;
    end
    #2000;
    got = int'(trig_cnt) - t0;
    vetoed = int'(veto_cnt) - v0;
  endtask

  initial begin
    real  rate [5] = '{100.0, 1.0e3, 1.0e4, 1.0e5, 1.0e6};
    int   npulse [5] = '{3, 20, 80, 650, 2000};
    int   got, vetoed, seen0;
    repeat (10) @(posedge clk);
    rst = 0;
    repeat (10) @(posedge clk);
    #3.7;
    for (int r = 0; r < 5; r++) begin
      seen0 = nseen;
      burst(1.0e9 / rate[r], npulse[r], got, vetoed);
      checks++;
      if (got != npulse[r] || vetoed != 0 || nseen - seen0 != npulse[r]) begin
        failures++;
        $display("FAIL at line %0d: %0.0f Hz: %0d pulses, %0d triggers, %0d vetoed, %0d decoded",
                 `__LINE__, rate[r], npulse[r], got, vetoed, nseen - seen0);
      end else
        $display("%9.0f Hz: %0d pulses, %0d triggers, no errors", rate[r], npulse[r], got);
    end
    checks++;
    if (id_err != 0) begin failures++; $display("FAIL at line %0d: %0d wrong IDs", `__LINE__, id_err); end
    // beyond the limit
    burst(400.0, 200, got, vetoed);
    $display("2.5 MHz: 200 pulses, %0d triggers, %0d vetoed", got, vetoed);
    checks++;
    if (vetoed == 0 || got + vetoed != 200) begin
      failures++;
      $display("FAIL at line %0d: over-rate accounting", `__LINE__);
    end
    checks++;
    if (id_err != 0 || int'(exp_id) != int'(trig_cnt)) begin
      failures++;
      $display("FAIL at line %0d: IDs after over-rate step", `__LINE__);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
