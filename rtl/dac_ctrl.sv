// Serial write controller for the AD5391 threshold DAC of the TLU.
//
// The analog LEMO inputs are compared against thresholds set by a 16-channel
// 12-bit DAC (AD5391, buffered by an op-amp). This module writes one channel:
// it sends the 24-bit input word {A/B=0, R/W=0, 00, address[3:0], REG=11,
// value[11:0], 00} MSB first with SYNC low. DIN changes while SCLK is high and
// the DAC samples it on the SCLK falling edge; SCLK = clk / (2*DIV) and idles
// high. The word layout is taken from the DAC's data sheet, not from the paper,
// which only names the part. SYNC stays low for 49*DIV clocks per write; wr_ready is
// high when idle.
module dac_ctrl #(
  parameter int unsigned DIV = 4
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        wr_valid,
  input  logic [3:0]  wr_ch,
  input  logic [11:0] wr_val,
  output logic        wr_ready,
  output logic        sync_n,
  output logic        sclk,
  output logic        din
);
  logic [23:0] sr;
  logic [4:0]  nbit;
  logic [$clog2(DIV+1)-1:0] div;
  typedef enum logic [1:0] {D_IDLE, D_SHIFT, D_END} dstate_e;
  dstate_e st;

  assign wr_ready = (st == D_IDLE);
  assign din      = sr[23];

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= D_IDLE; sr <= '0; nbit <= '0; div <= '0;
      sync_n <= 1'b1; sclk <= 1'b1;
    end else begin
      unique case (st)
        D_IDLE: if (wr_valid) begin
          sr     <= {1'b0, 1'b0, 2'b00, wr_ch, 2'b11, wr_val, 2'b00};
          sync_n <= 1'b0;
          sclk   <= 1'b1;
          nbit   <= 5'd24;
          div    <= '0;
          st     <= D_SHIFT;
        end
        D_SHIFT: begin
          if (div == ($bits(div))'(DIV - 1)) begin
            div  <= '0;
            sclk <= ~sclk;
            if (!sclk) begin            // rising edge: next bit or finish
              sr   <= sr << 1;
              nbit <= nbit - 1'b1;
              if (nbit == 5'd1) st <= D_END;
            end
          end else div <= div + 1'b1;
        end
        D_END: begin
          if (div == ($bits(div))'(DIV - 1)) begin
            div    <= '0;
            sync_n <= 1'b1;
            st     <= D_IDLE;
          end else div <= div + 1'b1;
        end
        default: st <= D_IDLE;
      endcase
    end
  end
endmodule
