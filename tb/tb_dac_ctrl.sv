// Testbench of dac_ctrl: the testbench acts as the DAC, shifting DIN in on
// each SCLK falling edge while SYNC is low. Every write must deliver exactly
// 24 bits equal to {0,0,00, channel, 11, value, 00}, SCLK must idle high, and
// SYNC must stay low for 49*DIV clocks.
module tb_dac_ctrl;
  timeunit 1ns; timeprecision 100ps;
  localparam int DIV = 4;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_valid = 0, wr_ready, sync_n, sclk, din;
  logic [3:0] wr_ch;
  logic [11:0] wr_val;

  dac_ctrl #(.DIV(DIV)) dut (.*);

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [23:0] sr;
  int nbits = 0, lowcyc = 0;
  always @(negedge sclk) if (!sync_n) begin sr = {sr[22:0], din}; nbits++; end
  always @(posedge clk) if (!rst && !sync_n) lowcyc++;

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    checks++; if (!sclk || !sync_n || !wr_ready) begin failures++; $display("FAIL at line %0d", `__LINE__); end
    for (int n = 0; n < 40; n++) begin
      logic [3:0] ch;
      logic [11:0] v;
      ch = 4'($urandom); v = 12'($urandom);
      nbits = 0; lowcyc = 0;
      wr_ch <= ch; wr_val <= v; wr_valid <= 1;
      @(posedge clk);
      wr_valid <= 0;
      @(posedge clk);
      wait (wr_ready);
      @(posedge clk);
      #1;
      checks++;
      if (nbits != 24 || sr != {4'b0000, ch, 2'b11, v, 2'b00}) begin
        failures++;
        $display("FAIL n=%0d bits=%0d word=%h", n, nbits, sr);
      end
      checks++;
      if (lowcyc != 49 * DIV) begin failures++; $display("FAIL sync low %0d clocks", lowcyc); end
      checks++;
      if (!sclk || !sync_n) begin failures++; $display("FAIL at line %0d", `__LINE__); end
      repeat ($urandom_range(0, 5)) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
