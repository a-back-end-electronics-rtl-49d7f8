// Self-synchronous descrambler of the normal-IO fiber uplink.
//
// The front end scrambles its 400 Mbps stream so that it stays DC-balanced
// without the overhead of a block code. This module undoes it: every received
// bit is XORed with the received bits 39 and 58 places earlier
// (polynomial x^58 + x^39 + 1). Because the state is built from received bits
// only, the descrambler locks by itself after 58 bits and an error on the line
// affects three output bits. W bits are handled per clock, din[W-1] being the
// earliest on the line. The paper names self-synchronous scrambling but not
// the polynomial; this one is the common 10GBASE-R choice. Output is
// registered (one clock latency).
module descrambler #(
  parameter int unsigned W = 4
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [W-1:0] din,
  output logic [W-1:0] dout
);
  logic [57:0] st, st_n;
  logic [W-1:0] d_n;

  always_comb begin
    st_n = st;
    for (int i = W - 1; i >= 0; i--) begin
      d_n[i] = din[i] ^ st_n[38] ^ st_n[57];
      st_n   = {st_n[56:0], din[i]};
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st   <= '0;
      dout <= '0;
    end else begin
      st   <= st_n;
      dout <= d_n;
    end
  end
endmodule
