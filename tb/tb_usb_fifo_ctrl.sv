// Testbench of usb_fifo_ctrl against a behavioural Slave FIFO chip model.
// The host sends 200 random command words, the FPGA side offers 2000 random
// upload words; every command must reach cmd_word once and in order, every
// upload word must reach the host once and in order, no bus rule of the model
// may be broken. Checked as well: downstream priority (with both directions
// pending, the first access is a read), at most BURST words per write burst,
// one word per clock inside a burst (400 MB/s at 100 MHz), a packet end when
// the upload source runs dry, and back-pressure from a slowly draining host.
module tb_usb_fifo_ctrl;
  timeunit 1ns; timeprecision 100ps;
  localparam int BURST = 16;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic flag_rx_rdy, flag_tx_rdy, slcs_n, slrd_n, sloe_n, slwr_n, pktend_n, dq_oe;
  logic [1:0] addr;
  logic [31:0] dq_o, dq_i, cmd_word, up_word, rx_words, tx_words;
  logic cmd_valid, cmd_ready = 0, up_valid, up_ready;

  usb_fifo_ctrl #(.BURST(BURST)) dut (.*);
  usb_chip_model #(.CAP(64), .DRAIN(3)) chip (.*);

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] up_src [$], up_exp [$], cmd_exp [$];
  assign up_valid = (up_src.size() != 0) && !rst;
  assign up_word  = up_src.size() ? up_src[0] : 32'd0;
  always @(posedge clk) if (up_valid && up_ready) begin #1 void'(up_src.pop_front()); end

  int ncmd = 0, run = 0, maxrun = 0, first_access = 0;
  always @(posedge clk) begin
    cmd_ready <= 1'($urandom);
    if (cmd_valid && cmd_ready) begin
      checks++;
      ncmd++;
      if (cmd_exp.size() == 0 || cmd_word != cmd_exp[0]) begin failures++; $display("FAIL cmd %h", cmd_word); end
      if (cmd_exp.size()) void'(cmd_exp.pop_front());
    end
    if (!slwr_n) begin run++; if (run > maxrun) maxrun = run; end
    else run = 0;
    if (first_access == 0 && !slrd_n) first_access = 1;
    if (first_access == 0 && !slwr_n) first_access = 2;
  end

  initial begin
    for (int i = 0; i < 200; i++) begin
      logic [31:0] w = $urandom;
      chip.down_q.push_back(w);
      cmd_exp.push_back(w);
    end
    for (int i = 0; i < 2000; i++) begin
      logic [31:0] w = $urandom;
      up_src.push_back(w);
      up_exp.push_back(w);
    end
    repeat (3) @(posedge clk);
    rst <= 0;
    // host sends more commands while data flows
    repeat (3000) @(posedge clk);
    for (int i = 0; i < 20; i++) begin
      logic [31:0] w = $urandom;
      chip.down_q.push_back(w);
      cmd_exp.push_back(w);
    end
    wait (up_src.size() == 0);
    repeat (400) @(posedge clk);
    checks++;
    if (cmd_exp.size() != 0 || ncmd != 220) begin failures++; $display("FAIL commands left %0d", cmd_exp.size()); end
    checks++;
    if (chip.host_rx.size() != 2000) begin failures++; $display("FAIL host got %0d", chip.host_rx.size()); end
    foreach (chip.host_rx[i]) begin
      checks++;
      if (i < up_exp.size() && chip.host_rx[i] != up_exp[i]) begin failures++; $display("FAIL upload word %0d", i); end
    end
    checks++; if (chip.nbad != 0) begin failures++; $display("FAIL bus rule %0d", chip.nbad); end
    checks++; if (first_access != 1) begin failures++; $display("FAIL first access %0d", first_access); end
    checks++; if (maxrun != BURST) begin failures++; $display("FAIL longest burst %0d", maxrun); end
    checks++; if (chip.npktend == 0) begin failures++; $display("FAIL no packet end"); end
    checks++; if (rx_words != 220 || tx_words != 2000) begin failures++; $display("FAIL counters %0d %0d", rx_words, tx_words); end
    $display("longest burst %0d, packet ends %0d", maxrun, chip.npktend);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
