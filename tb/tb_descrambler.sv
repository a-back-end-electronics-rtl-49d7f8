// Testbench of descrambler: the testbench holds its own self-synchronous
// scrambler (x^58 + x^39 + 1) that starts from a random state. After the
// descrambler has seen 58 bits its output must equal the original data bits,
// on the clock after the scrambled word is applied. One flipped
// line bit must produce exactly three wrong output bits.
module tb_descrambler;
  timeunit 1ns; timeprecision 100ps;
  localparam int W = 4;
  logic clk = 0, rst = 1;
  logic [W-1:0] din, dout;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  descrambler #(.W(W)) dut (.clk, .rst, .din, .dout);

  logic [57:0] s;
  logic [W-1:0] hist [$];

  function automatic logic [W-1:0] scramble(logic [W-1:0] d);
    logic [W-1:0] o;
    for (int i = W - 1; i >= 0; i--) begin
      o[i] = d[i] ^ s[38] ^ s[57];
      s = {s[56:0], o[i]};
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
    logic [W-1:0] d, exp;
    int nbad;
    s = {$urandom, $urandom};
    din = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 2000; n++) begin
      d = W'($urandom);
      hist.push_back(d);
      din <= scramble(d);
      @(posedge clk);
      #1;
      if (n >= 16) begin      // 58 bits seen by the descrambler
        exp = hist[n];
        checks++;
        if (dout != exp) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d dout=%h exp=%h", n, dout, exp);
        end
      end
    end
    // single line error -> three output errors
    nbad = 0;
    for (int n = 0; n < 40; n++) begin
      d = W'($urandom);
      hist.push_back(d);
      din <= scramble(d) ^ ((n == 2) ? W'(1 << (W - 1)) : W'(0));
      @(posedge clk);
      #1;
      exp = hist[2000 + n];
      nbad += $countones(dout ^ exp);
    end
    checks++;
    if (nbad != 3) begin
      failures++;
      $display("FAIL error multiplication %0d", nbad);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
