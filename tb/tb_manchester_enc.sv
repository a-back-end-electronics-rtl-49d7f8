// Testbench of manchester_enc: random bits; each bit must come out, at the clock
// edge that samples it, as symbols 01 (bit 0) or 10 (bit 1), sym_o[1] first, i.e. one
// mid-bit transition per bit.
module tb_manchester_enc;
  timeunit 1ns; timeprecision 100ps;
  logic clk = 0, rst = 1, bit_i = 0;
  logic [1:0] sym_o;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  manchester_enc dut (.clk, .rst, .bit_i, .sym_o);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic prev;
    int ones;
    ones = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    prev = 0;
    for (int n = 0; n < 1000; n++) begin
      bit_i <= 1'($urandom);
      @(posedge clk);
      #1;
      // the bit was sampled at this edge; sym_o shows its code
      prev = bit_i;
      begin
        checks++;
        if (sym_o != (prev ? 2'b10 : 2'b01)) begin
          failures++;
          $display("FAIL n=%0d bit=%0d sym=%b", n, prev, sym_o);
        end
        checks++;
        if (sym_o[1] == sym_o[0]) begin failures++; $display("FAIL at line %0d", `__LINE__); end   // transition inside every bit
        ones += sym_o[1] + sym_o[0];
      end
    end
    // DC balance: exactly one high symbol per bit
    checks++;
    if (ones != 1000) begin failures++; $display("FAIL at line %0d", `__LINE__); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
