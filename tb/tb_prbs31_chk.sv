// Testbench of prbs31_chk: a PRBS31 stream from a testbench LFSR, started at
// a random state, 4 bits per clock. Without errors the counter must stay 0;
// each injected single-bit error must add 3 (the bit and the two predictions
// that use it); clr must zero the counter.
module tb_prbs31_chk;
  timeunit 1ns; timeprecision 100ps;
  localparam int W = 4;
  logic clk = 0, rst = 1, en = 0, clr = 0;
  logic [W-1:0] din;
  logic [15:0] err_cnt;
  logic locked;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  prbs31_chk #(.W(W)) dut (.clk, .rst, .en, .clr, .din, .err_cnt, .locked);

  logic [30:0] s;
  function automatic logic [W-1:0] nextw();
    logic [W-1:0] o;
    for (int i = W - 1; i >= 0; i--) begin
      o[i] = s[30] ^ s[27];
      s = {s[29:0], o[i]};
    end
    return o;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nerr;
    s = 31'($urandom) | 31'd1;
    din = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    en  <= 1;
    for (int n = 0; n < 500; n++) begin
      din <= nextw();
      @(posedge clk);
    end
    #1;
    checks++; if (err_cnt != 0) begin failures++; $display("FAIL clean count %0d", err_cnt); end
    checks++; if (!locked) begin failures++; $display("FAIL at line %0d", `__LINE__); end
    nerr = 0;
    for (int n = 0; n < 2000; n++) begin
      logic [W-1:0] w;
      w = nextw();
      if (n % 100 == 50) begin
        w[$urandom_range(W-1)] ^= 1'b1;
        nerr++;
      end
      din <= w;
      @(posedge clk);
    end
    repeat (2) begin din <= nextw(); @(posedge clk); end
    #1;
    checks++;
    if (err_cnt != 16'(3 * nerr)) begin
      failures++;
      $display("FAIL err_cnt=%0d expected %0d", err_cnt, 3 * nerr);
    end
    clr <= 1; din <= nextw(); @(posedge clk); clr <= 0; din <= nextw(); @(posedge clk);
    #1;
    checks++; if (err_cnt != 0) begin failures++; $display("FAIL at line %0d", `__LINE__); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
