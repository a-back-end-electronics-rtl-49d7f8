// Behavioural model of a USB 3.0 device chip in Slave FIFO mode, for
// testbenches only. Host-to-device words wait in `down_q`; the FPGA reads one
// by pulling SLRD# low with SLOE# low at address 0, and the word appears on
// DQ one clock after that edge. Words written with SLWR# low at address 3 go
// into `up_q`, whose flag drops when CAP words are stored; the host drains
// one word every `drain` clocks (DRAIN at start). PKTEND# pulses are counted.
module usb_chip_model #(
  parameter int CAP   = 64,
  parameter int DRAIN = 1
) (
  input  logic        clk,
  output logic        flag_rx_rdy,
  output logic        flag_tx_rdy,
  input  logic        slcs_n,
  input  logic        slrd_n,
  input  logic        sloe_n,
  input  logic        slwr_n,
  input  logic        pktend_n,
  input  logic [1:0]  addr,
  input  logic [31:0] dq_o,
  input  logic        dq_oe,
  output logic [31:0] dq_i
);
  logic [31:0] down_q [$];
  logic [31:0] up_q [$];
  logic [31:0] host_rx [$];
  int npktend = 0, nbad = 0, dcnt = 0;
  int drain = DRAIN;   // may be changed by the testbench while running

  assign flag_rx_rdy = (down_q.size() != 0);
  assign flag_tx_rdy = (up_q.size() < CAP);

  initial dq_i = '0;

  // the FPGA's strobes are undefined until its reset has been applied at the
  // first clock edge, so the first two edges are not looked at
  int nedge = 0;

  always @(posedge clk) begin
    bit live;
    live = (nedge >= 2);
    if (!live) nedge++;
    if (live && !slcs_n && !slrd_n) begin
      if (sloe_n || addr != 2'd0 || dq_oe || down_q.size() == 0) begin
        nbad++;
        $display("USB model: bad read at %0t (oe_n %0d, addr %0d, dq_oe %0d, queued %0d)", $realtime, sloe_n, addr, dq_oe, down_q.size());
      end
      else dq_i <= down_q.pop_front();
    end
    if (live && !slcs_n && !slwr_n) begin
      if (addr != 2'd3 || !dq_oe || up_q.size() >= CAP) begin
        nbad++;
        $display("USB model: bad write at %0t (addr %0d, oe %0d, stored %0d)", $time, addr, dq_oe, up_q.size());
      end
      else up_q.push_back(dq_o);
    end
    if (live && !pktend_n) npktend++;
    dcnt = dcnt + 1;
    if (dcnt >= drain && up_q.size() != 0) begin
      dcnt = 0;
      host_rx.push_back(up_q.pop_front());
    end
  end
endmodule
