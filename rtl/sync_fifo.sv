// Single-clock FIFO, 2**AW words of W bits, first-word fall-through:
// rd_data is valid whenever `empty` is low and rd_en pops it. Writing while
// full is ignored. `count` gives the number of stored words.
module sync_fifo #(
  parameter int unsigned W  = 32,
  parameter int unsigned AW = 4
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         wr_en,
  input  logic [W-1:0] wr_data,
  output logic         full,
  input  logic         rd_en,
  output logic [W-1:0] rd_data,
  output logic         empty,
  output logic [AW:0]  count
);
  logic [W-1:0] mem [2**AW];
  logic [AW:0]  wp, rp;
  logic         do_wr, do_rd;

  assign do_wr   = wr_en && !full;
  assign do_rd   = rd_en && !empty;
  assign count   = wp - rp;
  assign full    = (count == (AW+1)'(2**AW));
  assign empty   = (count == '0);
  assign rd_data = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp <= '0;
      rp <= '0;
    end else begin
      wp <= wp + (AW+1)'(do_wr);
      rp <= rp + (AW+1)'(do_rd);
    end
  end
endmodule
