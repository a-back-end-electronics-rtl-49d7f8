// Manchester encoder of the normal-IO fiber downlink.
//
// Each 100 MHz clock takes one data bit and produces the two line symbols of
// its Manchester code, sym_o[1] first on the fiber. As in the paper, a 0 is a
// low-to-high transition (symbols 0,1) and a 1 a high-to-low transition
// (symbols 1,0), so the line carries a transition in every bit and stays
// DC-balanced, letting the front-end's CDR recover the clock. The 2:1 output
// serializer that shifts the symbols at 200 Mbaud is a vendor IO primitive and
// not part of this module. Latency: one clock (registered output). Reset
// holds the code of a 0.
module manchester_enc (
  input  logic       clk,
  input  logic       rst,
  input  logic       bit_i,
  output logic [1:0] sym_o
);
  always_ff @(posedge clk) begin
    if (rst) sym_o <= 2'b01;
    else     sym_o <= bit_i ? 2'b10 : 2'b01;
  end
endmodule
