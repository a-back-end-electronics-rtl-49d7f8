// Asynchronous FIFO for crossing between two clock domains.
//
// Classic design with Gray-coded read and write pointers, each synchronised
// into the other domain by two flip-flops. Depth is 2**AW words. The write
// side sees `full`, the read side `empty`; data at rd_data is valid whenever
// `empty` is low (first-word fall-through) and rd_en pops it. Each side has
// its own synchronous reset; both must be asserted together at start-up.
module async_fifo #(
  parameter int unsigned W  = 16,
  parameter int unsigned AW = 3
) (
  input  logic         wr_clk,
  input  logic         wr_rst,
  input  logic         wr_en,
  input  logic [W-1:0] wr_data,
  output logic         full,
  input  logic         rd_clk,
  input  logic         rd_rst,
  input  logic         rd_en,
  output logic [W-1:0] rd_data,
  output logic         empty
);
  logic [W-1:0] mem [2**AW];
  logic [AW:0]  wbin, rbin, wgray, rgray;
  logic [AW:0]  rgray_w1, rgray_w2, wgray_r1, wgray_r2;
  logic [AW:0]  wbin_n, rbin_n;

  function automatic logic [AW:0] bin2gray(logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  assign wbin_n = wbin + (AW+1)'(wr_en && !full);
  assign rbin_n = rbin + (AW+1)'(rd_en && !empty);

  always_ff @(posedge wr_clk) begin
    if (wr_en && !full) mem[wbin[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge wr_clk) begin
    if (wr_rst) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0;
    end else begin
      wbin <= wbin_n; wgray <= bin2gray(wbin_n);
      rgray_w1 <= rgray; rgray_w2 <= rgray_w1;
    end
  end

  always_ff @(posedge rd_clk) begin
    if (rd_rst) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      rbin <= rbin_n; rgray <= bin2gray(rbin_n);
      wgray_r1 <= wgray; wgray_r2 <= wgray_r1;
    end
  end

  assign full    = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});
  assign empty   = (rgray == wgray_r2);
  assign rd_data = mem[rbin[AW-1:0]];
endmodule
