// Upload data collector.
//
// Gathers the 32-bit upload words of N_SRC sources (data words and command
// replies of every front-end link, register replies) into one stream for the
// USB controller. Each source has its own DEPTH-word FIFO so that words that
// arrive in the same clock are all kept; a round-robin arbiter then moves one
// word per clock to the output, starting the search after the source served
// last. A word that finds its source FIFO full is dropped and counted in
// drop_cnt (overflow). The paper names "data receiving and filtering" but
// gives no filter rule, so no filtering is done here.
// Timing: a word written into an empty FIFO can leave two clocks later.
module data_collector #(
  parameter int unsigned N_SRC = 97,
  parameter int unsigned AW    = 4
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic [N_SRC-1:0]       in_valid,
  input  logic [N_SRC-1:0][31:0] in_word,
  output logic                   out_valid,
  output logic [31:0]            out_word,
  input  logic                   out_ready,
  output logic [31:0]            drop_cnt
);
  localparam int unsigned SW = $clog2(N_SRC);

  logic [N_SRC-1:0]       full, empty, pop;
  logic [N_SRC-1:0][31:0] q;
  logic [SW-1:0]          last, pick;
  logic                   any;
  logic [$clog2(N_SRC+1)-1:0] ndrop;

  for (genvar i = 0; i < N_SRC; i++) begin : g_src
    logic [AW:0] unused_count;
    sync_fifo #(.W(32), .AW(AW)) u_fifo (
      .clk, .rst, .wr_en(in_valid[i]), .wr_data(in_word[i]), .full(full[i]),
      .rd_en(pop[i]), .rd_data(q[i]), .empty(empty[i]), .count(unused_count));
  end

  // round-robin search starting after `last`
  always_comb begin
    any  = 1'b0;
    pick = last;
    for (int k = 1; k <= N_SRC; k++) begin
      int unsigned idx;
      idx = (32'(last) + k) % N_SRC;
      if (!any && !empty[idx]) begin
        any  = 1'b1;
        pick = SW'(idx);
      end
    end
  end

  // output register stage
  logic take;
  assign take = any && (!out_valid || out_ready);

  always_comb begin
    pop = '0;
    if (take) pop[pick] = 1'b1;
  end

  always_comb begin
    ndrop = '0;
    for (int i = 0; i < N_SRC; i++) if (in_valid[i] && full[i]) ndrop++;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_word  <= '0;
      last      <= SW'(N_SRC - 1);
      drop_cnt  <= '0;
    end else begin
      drop_cnt <= drop_cnt + 32'(ndrop);
      if (take) begin
        out_valid <= 1'b1;
        out_word  <= q[pick];
        last      <= pick;
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end
endmodule
