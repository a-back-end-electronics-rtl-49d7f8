// PRBS31 checker for the bit-error-rate test of the fiber uplink.
//
// Self-synchronising: each received bit is compared with the XOR of the
// received bits 31 and 28 places before it (x^31 + x^28 + 1), so no seed has to
// be agreed with the sender. After `en` rises the first 31 bits only fill the
// history; from then on every mismatch adds one to a 16-bit saturating error
// counter. A single line error shows as three mismatches (the bit itself and
// the two predictions it enters), which is the usual convention of such
// checkers. `clr` zeroes the counter. W bits are taken per clock, din[W-1]
// first in time.
module prbs31_chk #(
  parameter int unsigned W = 4
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         en,
  input  logic         clr,
  input  logic [W-1:0] din,
  output logic [15:0]  err_cnt,
  output logic         locked    // history filled, errors are being counted
);
  logic [30:0] hist, hist_n;
  logic [5:0]  fill, fill_n;
  logic [$clog2(W+1)-1:0] nerr;

  always_comb begin
    hist_n = hist;
    fill_n = fill;
    nerr   = '0;
    for (int i = W - 1; i >= 0; i--) begin
      if (fill_n == 6'd31 && (din[i] != (hist_n[30] ^ hist_n[27]))) nerr++;
      hist_n = {hist_n[29:0], din[i]};
      if (fill_n != 6'd31) fill_n++;
    end
  end

  assign locked = (fill == 6'd31);

  always_ff @(posedge clk) begin
    if (rst || !en) begin
      hist <= '0;
      fill <= '0;
    end else begin
      hist <= hist_n;
      fill <= fill_n;
    end
    if (rst || clr) err_cnt <= '0;
    else if (en && nerr != '0)
      err_cnt <= (err_cnt > 16'hFFFF - 16'(nerr)) ? 16'hFFFF : err_cnt + 16'(nerr);
  end
endmodule
