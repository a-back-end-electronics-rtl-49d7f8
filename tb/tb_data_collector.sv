// Testbench of data_collector with 9 sources of 4-word FIFOs. Random words
// arrive on random sources (several in one clock) and the output is drained
// with random back-pressure. Every word must leave exactly once and, per
// source, in order. With all sources loaded the arbiter must serve them in
// rotation (no source served twice before another waiting one) and move one
// word per clock. A burst into one source beyond its FIFO must be counted as
// dropped.
module tb_data_collector;
  timeunit 1ns; timeprecision 100ps;
  localparam int N = 9, AW = 2;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] in_valid = '0;
  logic [N-1:0][31:0] in_word;
  logic out_valid, out_ready = 0;
  logic [31:0] out_word, drop_cnt;

  data_collector #(.N_SRC(N), .AW(AW)) dut (.*);

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] exp [N][$];
  int nout = 0;
  int seq [N];
  always @(posedge clk) if (!rst && out_valid && out_ready) begin
    int s;
    s = int'(out_word[31:24]);
    nout++;
    checks++;
    if (s >= N || exp[s].size() == 0 || exp[s][0] != out_word) begin
      failures++;
      $display("FAIL out %h", out_word);
    end else void'(exp[s].pop_front());
  end

  initial begin
    int last, order [$];
    logic [N-1:0] v;
    for (int i = 0; i < N; i++) seq[i] = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    // random traffic, never more than the FIFOs hold
    for (int c = 0; c < 3000; c++) begin
      v = '0;
      for (int i = 0; i < N; i++)
        if ($urandom_range(30) == 0 && exp[i].size() < 2) begin
          v[i] = 1;
          in_word[i] <= {8'(i), 24'(seq[i]++)};
          exp[i].push_back({8'(i), 24'(seq[i] - 1)});
        end
      in_valid <= v;
      out_ready <= ($urandom_range(3) != 0);
      @(posedge clk);
    end
    in_valid <= '0;
    out_ready <= 1;
    repeat (50) @(posedge clk);
    checks++;
    for (int i = 0; i < N; i++) if (exp[i].size()) begin failures++; $display("FAIL left in %0d", i); break; end
    checks++; if (drop_cnt != 0) begin failures++; $display("FAIL at line %0d", `__LINE__); end
    // fairness and rate: load every source with 3 words, then drain
    out_ready <= 0;
    for (int k = 0; k < 3; k++) begin
      for (int i = 0; i < N; i++) begin
        in_word[i] <= {8'(i), 24'(seq[i]++)};
        exp[i].push_back({8'(i), 24'(seq[i] - 1)});
      end
      in_valid <= '1;
      @(posedge clk);
    end
    in_valid <= '0;
    @(posedge clk);
    out_ready <= 1;
    begin
      int t0;
      t0 = nout;
      @(posedge clk);
      for (int c = 0; c < 3 * N; c++) begin
        @(posedge clk);
        #1;
        if (out_valid) order.push_back(int'(out_word[31:24]));
      end
      checks++;
      if (nout - t0 < 3 * N - 1) begin failures++; $display("FAIL rate %0d words", nout - t0); end
    end
    for (int i = N; i < order.size(); i++) begin
      checks++;
      if (order[i] != order[i - N]) begin failures++; $display("FAIL rotation at %0d", i); end
    end
    repeat (10) @(posedge clk);
    // overflow: 6 words into source 2 (FIFO holds 4, plus one in the output stage)
    out_ready <= 0;
    for (int k = 0; k < 6; k++) begin
      in_word[2] <= {8'd2, 24'(seq[2]++)};
      if (k < 5) exp[2].push_back({8'd2, 24'(seq[2] - 1)});
      in_valid <= 3'b100;
      @(posedge clk);
    end
    in_valid <= '0;
    repeat (3) @(posedge clk);
    checks++;
    if (drop_cnt != 1) begin failures++; $display("FAIL drop_cnt %0d", drop_cnt); end
    out_ready <= 1;
    repeat (20) @(posedge clk);
    checks++;
    if (exp[2].size() != 0) begin failures++; $display("FAIL at line %0d", `__LINE__); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
