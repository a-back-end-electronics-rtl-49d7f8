// Behavioural model of a front-end board on a GTX fiber link, for testbenches
// only. It sees the 16-bit user words of the transceiver, {data[7:0],
// cmd[3:0], trig[3:0]}, on the 120 MHz transceiver clock. It deframes the
// three downlink channels, answers every trigger with NWORDS data words
// {trigger number[11:0], index[3:0]}, echoes every command as a reply and
// sends a self-trigger request {LINK} on each `hit` pulse.
module fe_gtx_model #(
  parameter int LINK   = 0,
  parameter int NWORDS = 4
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [15:0] tx_word,
  output logic [15:0] rx_word,
  input  logic        hit,
  output int          n_trig, n_cmd, n_ddat,
  output logic [19:0] last_trig,
  output logic [23:0] last_cmd, last_ddat
);

  int tl = 0, cl = 0, dl = 0;
  logic [31:0] tsr, csr, dsr;
  logic [7:0] qt [$], qc [$], qd [$];
  logic       hit_q = 1'b0;

  function automatic void frame(ref logic [7:0] q[$], input int lw, input int mw, input logic [31:0] m);
    q.push_back(8'd0);
    q.push_back(8'd1);
    for (int i = mw - lw; i >= 0; i -= lw) q.push_back(8'((m >> i) & ((1 << lw) - 1)));
  endfunction

  always @(posedge clk) begin
    if (rst) begin
      tl = 0; cl = 0; dl = 0;
      n_trig = 0; n_cmd = 0; n_ddat = 0;
      last_trig = '0; last_cmd = '0; last_ddat = '0;
      qt.delete(); qc.delete(); qd.delete();
      rx_word <= '0;
    end else begin
      // trigger channel, 4 bits per word, 20-bit messages
      if (tl == 0) begin if (tx_word[3:0] == 4'd1) begin tl = 5; tsr = 0; end end
      else begin
        tsr = {tsr[27:0], tx_word[3:0]}; tl--;
        if (tl == 0) begin
          n_trig++; last_trig = tsr[19:0];
          for (int i = 0; i < NWORDS; i++) frame(qd, 8, 16, {16'd0, tsr[11:0], 4'(i)});
        end
      end
      // command channel, 4 bits per word, 24-bit messages
      if (cl == 0) begin if (tx_word[7:4] == 4'd1) begin cl = 6; csr = 0; end end
      else begin
        csr = {csr[27:0], tx_word[7:4]}; cl--;
        if (cl == 0) begin n_cmd++; last_cmd = csr[23:0]; frame(qc, 4, 24, csr); end
      end
      // data channel, 8 bits per word, 24-bit messages
      if (dl == 0) begin if (tx_word[15:8] == 8'd1) begin dl = 3; dsr = 0; end end
      else begin
        dsr = {dsr[23:0], tx_word[15:8]}; dl--;
        if (dl == 0) begin n_ddat++; last_ddat = dsr[23:0]; end
      end
      if (hit && !hit_q) frame(qt, 4, 8, 32'(LINK));
      hit_q = hit;
      rx_word <= {qd.size() ? qd.pop_front() : 8'd0,
                  qc.size() ? 4'(qc.pop_front()) : 4'd0,
                  qt.size() ? 4'(qt.pop_front()) : 4'd0};
    end
  end
endmodule
