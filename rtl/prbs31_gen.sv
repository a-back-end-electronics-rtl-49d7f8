// PRBS31 generator for the bit-error-rate test of the fiber downlink.
//
// Produces the sequence of the polynomial x^31 + x^28 + 1 (as in the paper),
// W bits per clock while `en` is high, dout[W-1] first in time. Each new bit
// is the XOR of the bits 31 and 28 places earlier. The register restarts from
// all ones on reset.
module prbs31_gen #(
  parameter int unsigned W = 1
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         en,
  output logic [W-1:0] dout
);
  logic [30:0] st, st_n;
  logic [W-1:0] d_n;

  always_comb begin
    st_n = st;
    for (int i = W - 1; i >= 0; i--) begin
      d_n[i] = st_n[30] ^ st_n[27];
      st_n   = {st_n[29:0], d_n[i]};
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st   <= '1;
      dout <= '0;
    end else if (en) begin
      st   <= st_n;
      dout <= d_n;
    end
  end
endmodule
