// Testbench of prbs31_gen: the first 31 bits after reset must be the output
// of a reference Fibonacci LFSR kept in the testbench, and every later bit
// must obey b[n] = b[n-31] ^ b[n-28] (x^31 + x^28 + 1). With en low the
// output must hold.
module tb_prbs31_gen;
  timeunit 1ns; timeprecision 100ps;
  logic clk = 0, rst = 1, en = 0;
  logic dout;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  prbs31_gen #(.W(1)) dut (.clk, .rst, .en, .dout);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic b [$];
    logic [30:0] ref_s;
    logic        rb, held;
    ref_s = '1;
    repeat (3) @(posedge clk);
    rst <= 0;
    en  <= 1;
    for (int n = 0; n < 3000; n++) begin
      @(posedge clk);
      #1;
      b.push_back(dout);
      rb = ref_s[30] ^ ref_s[27];
      ref_s = {ref_s[29:0], rb};
      checks++;
      if (dout != rb) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d", n);
      end
      if (n >= 31) begin
        checks++;
        if (b[n] != (b[n-31] ^ b[n-28])) begin failures++; $display("FAIL at line %0d", `__LINE__); end
      end
    end
    // period is not trivially short: the sequence is not constant
    checks++;
    if (b.sum() with (int'(item)) < 1000) begin failures++; $display("FAIL at line %0d", `__LINE__); end
    en <= 0;
    @(posedge clk);
    #1 held = dout;
    repeat (5) @(posedge clk);
    #1;
    checks++;
    if (dout != held) begin failures++; $display("FAIL at line %0d", `__LINE__); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
