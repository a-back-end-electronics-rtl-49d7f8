// Behavioural model of a front-end board on a normal-IO fiber link, for
// testbenches only. It shares the back-end clock, as the real boards do.
// Downlink: decodes the Manchester symbols, splits the stream by slot
// (trigger, command, trigger, data; slot count starting with the first bit
// after reset) and deframes each channel. Uplink: answers every trigger with
// NWORDS data words {trigger number[11:0], index[3:0]} (or `burst` words when
// that input is non-zero; `pace` spreads them out), echoes every command as a reply, sends a
// self-trigger request {LINK} on each `hit` pulse, packs the three channels
// into 4-bit words, scrambles them (x^58+x^39+1) and delays the bit stream by
// OFFSET bits. With prbs_ul the uplink carries PRBS31 (still scrambled); with
// prbs_dl the downlink bits are checked against the same polynomial.
module fe_fiber_model #(
  parameter int LINK   = 0,
  parameter int OFFSET = 0,
  parameter int NWORDS = 4
) (
  input  logic       clk,
  input  logic       rst,
  input  logic [1:0] sym,
  output logic [3:0] rx_bits,
  input  logic       hit,
  input  logic       prbs_dl,  // check the downlink against PRBS31, no deframing
  input  logic       prbs_ul,  // send PRBS31 on the uplink
  input  int         burst,
  input  int         pace,    // data words start at least this many clocks apart
  input  logic       clr,     // clears the downlink PRBS error count
  output int          n_trig, n_cmd, n_ddat, n_bad_sym, dl_prbs_err,
  output logic [19:0] last_trig,
  output logic [23:0] last_cmd, last_ddat
);

  // ---------------- downlink ----------------
  int k = -1;
  int tl = 0, cl = 0, dl = 0;
  logic [31:0] tsr, csr, dsr;
  logic dbits [$];

  // ---------------- uplink ----------------
  logic [1:0] qt [$], qc [$], qd [$];
  logic       line [$];
  logic [57:0] scr;
  logic [30:0] prbs;

  function automatic void frame(ref logic [1:0] q[$], input int lw, input int mw, input logic [31:0] m);
    q.push_back(2'b00);
    q.push_back(2'b01);
    for (int i = mw - lw; i >= 0; i -= lw) q.push_back(lw == 2 ? 2'(m >> i) : 2'((m >> i) & 1));
  endfunction

  always @(posedge clk) begin
    if (rst) begin
      k = -1;
      n_trig = 0; n_cmd = 0; n_ddat = 0; n_bad_sym = 0; dl_prbs_err = 0;
      last_trig = '0; last_cmd = '0; last_ddat = '0;
      tl = 0; cl = 0; dl = 0;
      qt.delete(); qc.delete(); qd.delete(); line.delete();
      for (int i = 0; i < OFFSET; i++) line.push_back(1'b0);
      scr = '0;
      prbs = '1;
      rx_bits <= '0;
    end else begin
      logic b;
      logic [3:0] w;
      if (clr) dl_prbs_err = 0;
      // ---- downlink bit of the previous clock ----
      if (k >= 0) begin
        if (sym != 2'b01 && sym != 2'b10) n_bad_sym++;
        b = (sym == 2'b10);
        if (prbs_dl) begin
          dbits.push_back(b);
          if (dbits.size() > 31) begin
            if (b != (dbits[dbits.size()-32] ^ dbits[dbits.size()-29])) dl_prbs_err++;
            void'(dbits.pop_front());
          end
        end else begin
          dbits.delete();
          unique case (k % 4)
            0, 2: begin
              if (tl == 0) begin if (b) begin tl = 20; tsr = 0; end end
              else begin
                tsr = {tsr[30:0], b}; tl--;
                if (tl == 0) begin
                  int nw;
                  n_trig++; last_trig = tsr[19:0];
                  nw = (burst > 0) ? burst : NWORDS;
                  for (int i = 0; i < nw; i++) begin
                    frame(qd, 2, 16, {16'd0, tsr[11:0], 4'(i)});
                    for (int g = 10; g < pace; g++) qd.push_back(2'b00);
                  end
                end
              end
            end
            1: begin
              if (cl == 0) begin if (b) begin cl = 24; csr = 0; end end
              else begin
                csr = {csr[30:0], b}; cl--;
                if (cl == 0) begin n_cmd++; last_cmd = csr[23:0]; frame(qc, 1, 24, csr); end
              end
            end
            default: begin
              if (dl == 0) begin if (b) begin dl = 24; dsr = 0; end end
              else begin
                dsr = {dsr[30:0], b}; dl--;
                if (dl == 0) begin n_ddat++; last_ddat = dsr[23:0]; end
              end
            end
          endcase
        end
      end
      k++;
      // ---- uplink word ----
      if (hit) frame(qt, 1, 8, 32'(LINK));
      if (prbs_ul) begin
        for (int i = 3; i >= 0; i--) begin
          w[i] = prbs[30] ^ prbs[27];
          prbs = {prbs[29:0], w[i]};
        end
      end else begin
        w[3]   = qt.size() ? qt.pop_front() : 1'b0;
        w[2]   = qc.size() ? qc.pop_front() : 1'b0;
        w[1:0] = qd.size() ? qd.pop_front() : 2'b00;
      end
      for (int i = 3; i >= 0; i--) begin
        logic o;
        o = w[i] ^ scr[38] ^ scr[57];
        scr = {scr[56:0], o};
        line.push_back(o);
      end
      rx_bits <= {line[0], line[1], line[2], line[3]};
      repeat (4) void'(line.pop_front());
    end
  end
endmodule
