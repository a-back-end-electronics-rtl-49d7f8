// Testbench of fiber_ul_link. The testbench plays the front end: it builds
// the three channel streams (trigger, command: 1 bit per word; data: 2 bits
// per word) from random messages with random idle gaps, packs them into 4-bit
// words (bit 3 trigger, bit 2 command, bits 1:0 data), scrambles them with its
// own x^58+x^39+1 scrambler started at a random state, and shifts the bit
// stream by a random 0-3 bit offset which `slip` must undo. Every message must
// come out once, in order. With the tightest spacing the data channel must
// deliver a 16-bit word every 10 clocks (200 Mbps incl. framing). Then a
// PRBS31 stream with injected errors must give three counts per error,
// counted from a clear issued once the checker has filled its history.
module tb_fiber_ul_link;
  timeunit 1ns; timeprecision 100ps;
  import be_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [3:0] rx_bits = '0;
  logic [1:0] slip;
  logic trig_valid, cmd_valid, data_valid, prbs_en = 0, prbs_clr = 0, prbs_locked;
  logic [UTRG_MSG_W-1:0] trig_msg;
  logic [UCMD_MSG_W-1:0] cmd_msg;
  logic [UDAT_MSG_W-1:0] data_msg;
  logic [15:0] prbs_err;

  fiber_ul_link dut (.*);

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NWORD = 6000;
  logic [31:0] exp_t [$], exp_c [$], exp_d [$];
  logic [1:0]  lt [$], lc [$], ld [$];   // lane words

  // append idle words and one message to a lane, lane width lw (1 or 2)
  function automatic void add_msg(ref logic [1:0] q[$], input int lw, input int mw,
                                  input int idle, ref logic [31:0] e[$]);
    logic [31:0] m;
    m = $urandom & ((32'd1 << mw) - 1);
    e.push_back(m);
    repeat (idle) q.push_back(2'b00);
    q.push_back(2'b01);
    for (int i = mw - lw; i >= 0; i -= lw)
      q.push_back(lw == 2 ? 2'(m >> i) : 2'((m >> i) & 1));
  endfunction

  logic [57:0] s;
  int nd_fast;

  initial begin
    int off, ndata;
    logic stream [$];
    s = {$urandom, $urandom};
    off = $urandom_range(3);
    slip = 2'(off);
    // 60 idle words let the descrambler lock (15 words) and flush any false
    // message it decodes before locking, ahead of the first real message
    repeat (60) begin lt.push_back(0); lc.push_back(0); ld.push_back(0); end
    while (lt.size() < NWORD - 200) add_msg(lt, 1, UTRG_MSG_W, $urandom_range(1, 20), exp_t);
    while (lc.size() < NWORD - 200) add_msg(lc, 1, UCMD_MSG_W, $urandom_range(1, 20), exp_c);
    // data: first half at the tightest spacing (one idle word), then random
    nd_fast = 0;
    while (ld.size() < NWORD / 2) begin add_msg(ld, 2, UDAT_MSG_W, 1, exp_d); nd_fast++; end
    while (ld.size() < NWORD - 200) add_msg(ld, 2, UDAT_MSG_W, $urandom_range(1, 20), exp_d);
    while (lt.size() < NWORD) lt.push_back(0);
    while (lc.size() < NWORD) lc.push_back(0);
    while (ld.size() < NWORD) ld.push_back(0);
    // pack, scramble, serialise
    repeat (off) stream.push_back(1'($urandom));
    for (int w = 0; w < NWORD; w++) begin
      logic [3:0] d;
      d = {lt[w][0], lc[w][0], ld[w]};
      for (int i = 3; i >= 0; i--) begin
        logic o;
        o = d[i] ^ s[38] ^ s[57];
        s = {s[56:0], o};
        stream.push_back(o);
      end
    end
    repeat (3) @(posedge clk);
    rst <= 0;
    ndata = 0;
    for (int w = 0; w + 4 <= stream.size(); w += 4) begin
      rx_bits <= {stream[w], stream[w+1], stream[w+2], stream[w+3]};
      @(posedge clk);
    end
    // scrambled idle words while the last messages drain
    repeat (50) begin
      logic [3:0] o;
      for (int i = 3; i >= 0; i--) begin
        o[i] = s[38] ^ s[57];
        s = {s[56:0], o[i]};
      end
      stream.push_back(o[3]); stream.push_back(o[2]); stream.push_back(o[1]); stream.push_back(o[0]);
      rx_bits <= {stream[stream.size()-4-off+0], stream[stream.size()-4-off+1],
                  stream[stream.size()-4-off+2], stream[stream.size()-4-off+3]};
      @(posedge clk);
    end
    checks++;
    if (exp_t.size() || exp_c.size() || exp_d.size()) begin
      failures++;
      $display("FAIL undelivered t=%0d c=%0d d=%0d", exp_t.size(), exp_c.size(), exp_d.size());
    end
    // data rate: the tight part took nd_fast*10 words
    checks++;
    if (nrx_d < nd_fast) begin failures++; $display("FAIL at line %0d", `__LINE__); end
    $display("fast data messages %0d, slip %0d, first %0d words", nd_fast, off, 60 + nd_fast * 10);
    // ---- PRBS ----
    begin
      logic [30:0] p;
      int nerr;
      p = 31'h5a5a_1234;
      nerr = 0;
      prbs_en <= 1;
      for (int w = 0; w < 1520; w++) begin
        logic [3:0] d, o;
        for (int i = 3; i >= 0; i--) begin
          d[i] = p[30] ^ p[27];
          p = {p[29:0], d[i]};
        end
        prbs_clr <= (w == 40);
        if (w % 100 == 60 && w < 1500) begin d[1] = ~d[1]; nerr++; end
        for (int i = 3; i >= 0; i--) begin
          o[i] = d[i] ^ s[38] ^ s[57];
          s = {s[56:0], o[i]};
        end
        stream.push_back(o[3]); stream.push_back(o[2]); stream.push_back(o[1]); stream.push_back(o[0]);
        rx_bits <= {stream[stream.size()-4-off+0], stream[stream.size()-4-off+1],
                    stream[stream.size()-4-off+2], stream[stream.size()-4-off+3]};
        @(posedge clk);
      end
      #1;
      checks++;
      if (prbs_err != 16'(3 * nerr)) begin
        failures++;
        $display("FAIL prbs_err %0d expected %0d", prbs_err, 3 * nerr);
      end
      checks++;
      if (!prbs_locked) begin failures++; $display("FAIL at line %0d", `__LINE__); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // data rate: time between data messages in the fast part
  int last_d = -1, cyc = 0, gaps_bad = 0, nrx_d = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (cyc >= 50) begin
    if (trig_valid && !prbs_en) begin
      checks++;
      if (exp_t.size() == 0 || 32'(trig_msg) != exp_t[0]) begin failures++; $display("FAIL trig %h cyc %0d exp %h n %0d", trig_msg, cyc, exp_t.size() ? exp_t[0] : 0, exp_t.size()); end
      if (exp_t.size()) void'(exp_t.pop_front());
    end
    if (cmd_valid && !prbs_en) begin
      checks++;
      if (exp_c.size() == 0 || 32'(cmd_msg) != exp_c[0]) begin failures++; $display("FAIL cmd %h", cmd_msg); end
      if (exp_c.size()) void'(exp_c.pop_front());
    end
    if (data_valid && !prbs_en) begin
      checks++;
      if (exp_d.size() == 0 || 32'(data_msg) != exp_d[0]) begin failures++; $display("FAIL data %h", data_msg); end
      if (exp_d.size()) void'(exp_d.pop_front());
      nrx_d++;
      if (last_d >= 0 && nrx_d <= nd_fast) begin
        checks++;
        if (cyc - last_d != 10) begin failures++; $display("FAIL data spacing %0d", cyc - last_d); end
      end
      last_d = cyc;
    end
    end
  end
endmodule
