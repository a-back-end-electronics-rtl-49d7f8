// Testbench of cmd_parser (32 fiber links). Writes every configuration
// register and reads each back through the reply path; forwards commands and
// data words (one link, all links) with random back-pressure; issues a DAC
// write and a PRBS clear; reads status inputs. Expected values are computed
// from the command words by the testbench.
module tb_cmd_parser;
  timeunit 1ns; timeprecision 100ps;
  import be_pkg::*;
  localparam int NF = 32;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid = 0, cmd_ready, fwd_valid, fwd_is_data, fwd_ready = 1, rd_valid, rd_ready = 1;
  logic [31:0] cmd_word, rd_word, test_period;
  logic [5:0] fwd_link;
  logic [23:0] fwd_msg;
  trig_mode_e trig_mode;
  logic [7:0] self_mult, self_win;
  logic [9:0] tlu_in_en;
  logic [8:0] tlu_busy_en;
  logic [3:0] tlu_level, rj45_dir, dac_ch;
  logic prbs_dl_en, prbs_ul_en, prbs_clr, dac_valid, dac_ready = 1;
  logic [1:0] ext_src;
  logic [NF-1:0][4:0] dly_tap;
  logic [NF-1:0][1:0] slip;
  logic [11:0] dac_val;
  logic [15:0] st_trig_cnt = 16'h1234, st_trig_drop = 16'h0042, st_tlu_cnt = 16'h0777;
  logic [NF-1:0][15:0] st_prbs_err;

  cmd_parser #(.N_FIBER(NF)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(logic [1:0] op, logic [5:0] link, logic [23:0] pl);
    cmd_word  <= {op, link, pl};
    cmd_valid <= 1;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    cmd_valid <= 0;
    @(posedge clk);
  endtask

  task automatic wr(logic [7:0] a, logic [15:0] v); send(2'b00, 6'd0, {a, v}); endtask

  logic [31:0] replies [$];
  always @(posedge clk) if (!rst && rd_valid && rd_ready) replies.push_back(rd_word);

  task automatic rd_check(logic [7:0] a, logic [15:0] v);
    replies.delete();
    send(2'b11, 6'd0, {a, 16'h0});
    repeat (2) @(posedge clk);
    checks++;
    if (replies.size() != 1 || replies[0] != {2'b11, 6'd0, a, v}) begin
      failures++;
      $display("FAIL read %h got %h", a, replies.size() ? replies[0] : 0);
    end
  endtask

  logic [31:0] fwd_seen [$];
  always @(posedge clk) if (!rst && fwd_valid && fwd_ready) fwd_seen.push_back({1'b0, fwd_is_data, fwd_link, fwd_msg});

  int nclr = 0;
  always @(posedge clk) if (prbs_clr) nclr++;

  initial begin
    for (int i = 0; i < NF; i++) st_prbs_err[i] = 16'(i * 3 + 1);
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    // reset values
    checks++; if (trig_mode != TM_OFF || tlu_level != 1 || rj45_dir != 4'b1011) begin failures++; $display("FAIL at line %0d", `__LINE__); end
    wr(R_TRIG_MODE, 16'd3);     rd_check(R_TRIG_MODE, 16'd3);
    checks++; if (trig_mode != TM_TEST) begin failures++; $display("FAIL at line %0d", `__LINE__); end
    wr(R_TEST_PER_L, 16'h4240); wr(R_TEST_PER_H, 16'h000F);
    checks++; if (test_period != 32'd1000000) begin failures++; $display("FAIL at line %0d", `__LINE__); end
    rd_check(R_TEST_PER_H, 16'h000F);
    wr(R_SELF_MULT, 16'd5);     rd_check(R_SELF_MULT, 16'd5);
    wr(R_SELF_WIN, 16'd33);     rd_check(R_SELF_WIN, 16'd33);
    wr(R_TLU_INEN, 16'h3F5);    rd_check(R_TLU_INEN, 16'h3F5);
    checks++; if (tlu_in_en != 10'h3F5) begin failures++; $display("FAIL at line %0d", `__LINE__); end
    wr(R_TLU_BUSYEN, 16'h1AB);  rd_check(R_TLU_BUSYEN, 16'h1AB);
    wr(R_TLU_LEVEL, 16'd2);     rd_check(R_TLU_LEVEL, 16'd2);
    wr(R_RJ45_DIR, 16'h5);      rd_check(R_RJ45_DIR, 16'h5);
    wr(R_EXT_SRC, 16'h2);       rd_check(R_EXT_SRC, 16'h2);
    wr(R_PRBS, 16'h7);
    @(posedge clk); #1;
    checks++; if (!prbs_dl_en || !prbs_ul_en || nclr != 1) begin failures++; $display("FAIL at line %0d", `__LINE__); end
    rd_check(R_PRBS, 16'h3);
    for (int i = 0; i < NF; i += 5) begin
      wr(R_LINK_BASE + 8'(i), {9'd0, 2'(i), 5'(i + 7)});
      checks++; if (dly_tap[i] != 5'(i + 7) || slip[i] != 2'(i)) begin failures++; $display("FAIL at line %0d", `__LINE__); end
      rd_check(R_LINK_BASE + 8'(i), {9'd0, 2'(i), 5'(i + 7)});
      rd_check(R_PERR_BASE + 8'(i), 16'(i * 3 + 1));
    end
    rd_check(R_TRIG_CNT, 16'h1234);
    rd_check(R_TRIG_DROP, 16'h0042);
    rd_check(R_TLU_CNT, 16'h0777);
    // DAC write
    dac_ready <= 0;
    wr(R_DAC, 16'h9ABC);
    checks++; if (!dac_valid || dac_ch != 4'h9 || dac_val != 12'hABC) begin failures++; $display("FAIL at line %0d", `__LINE__); end
    dac_ready <= 1;
    @(posedge clk);
    @(posedge clk);
    checks++; if (dac_valid) begin failures++; $display("FAIL at line %0d", `__LINE__); end
    // forwarding with back-pressure
    fork
      begin
        for (int i = 0; i < 30; i++) begin
          fwd_ready <= 1'($urandom);
          @(posedge clk);
        end
        fwd_ready <= 1;
      end
      begin
        send(2'b01, 6'd7, 24'hABCDEF);
        send(2'b10, 6'd63, 24'h123456);
        send(2'b01, 6'd40, 24'h000001);
      end
    join
    repeat (3) @(posedge clk);
    checks++;
    if (fwd_seen.size() != 3 || fwd_seen[0] != {1'b0, 1'b0, 6'd7, 24'hABCDEF}
        || fwd_seen[1] != {1'b0, 1'b1, 6'd63, 24'h123456} || fwd_seen[2] != {1'b0, 1'b0, 6'd40, 24'h000001}) begin
      failures++;
      $display("FAIL forwards %0d", fwd_seen.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
