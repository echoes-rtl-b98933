// tb_i2s_regfile: self-checking test of the I2S configuration registers.
//
// Checks the reset values, write/read-back of both configuration words and
// both clock dividers through APB, the decoded configuration fields against
// the written bits (bit 0 enable, 1 DSP mode, 2 PDM, 3 external clock,
// 4 polarity, 5 alignment, 10:6 word length - 1, 14:11 devices - 1), that
// the transmit side cannot select PDM, and that the underrun flag is sticky
// and cleared by writing 1.
`timescale 1ns/1ps
module tb_i2s_regfile;
  import echoes_pkg::*;
  logic clk = 0, rst_n = 0;
  apb_req_t apb;
  apb_rsp_t rsp;
  i2s_cfg_t cfg [2];
  logic [15:0] div [2];
  logic urun = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  i2s_regfile dut (.clk_i(clk), .rst_ni(rst_n), .apb_req_i(apb), .apb_rsp_o(rsp),
                   .cfg_o(cfg), .div_o(div), .underrun_i(urun));

  task automatic wr(logic [11:0] a, logic [31:0] d);
    apb = '{psel: 1, penable: 0, pwrite: 1, paddr: a, pwdata: d};
    @(posedge clk); #1 apb.penable = 1; @(posedge clk); #1 apb = '0;
  endtask
  task automatic rd(logic [11:0] a, output logic [31:0] d);
    apb = '{psel: 1, penable: 0, pwrite: 0, paddr: a, pwdata: 0};
    @(posedge clk); #1 apb.penable = 1; #1 d = rsp.prdata; @(posedge clk); #1 apb = '0;
  endtask
  task automatic expect32(string what, logic [31:0] g, logic [31:0] e);
    checks++;
    if (g !== e) begin failures++; $display("FAIL: %s got %h want %h", what, g, e); end
  endtask

  initial begin
    logic [31:0] d;
    apb = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    rd(12'h000, d); expect32("rx cfg reset", d, 32'h07E0);
    rd(12'h004, d); expect32("tx cfg reset", d, 32'h07E0);
    rd(12'h010, d); expect32("status reset", d, 0);
    for (int it = 0; it < 300; it++) begin
      logic [31:0] v;
      logic [14:0] e;
      int side;
      side = $urandom % 2;
      v = $urandom;
      wr(12'(4 * side), v);
      e = v[14:0];
      if (side == 1) e[2] = 1'b0;
      rd(12'(4 * side), d); expect32("cfg read-back", d, 32'(e));
      expect32("en",    32'(cfg[side].en),      32'(e[0]));
      expect32("dsp",   32'(cfg[side].dsp_en),  32'(e[1]));
      expect32("pdm",   32'(cfg[side].pdm_en),  32'(e[2]));
      expect32("ext",   32'(cfg[side].ext_clk), 32'(e[3]));
      expect32("pol",   32'(cfg[side].pol),     32'(e[4]));
      expect32("align", 32'(cfg[side].align),   32'(e[5]));
      expect32("wlen",  32'(cfg[side].wlen_m1), 32'(e[10:6]));
      expect32("ndev",  32'(cfg[side].ndev_m1), 32'(e[14:11]));
      v = $urandom;
      wr(12'(8 + 4 * side), v);
      rd(12'(8 + 4 * side), d); expect32("div read-back", d, 32'(v[15:0]));
      expect32("div out", 32'(div[side]), 32'(v[15:0]));
      if (it % 10 == 0) begin
        @(posedge clk); #1 urun = 1; @(posedge clk); #1 urun = 0;
        repeat (3) @(posedge clk);
        rd(12'h010, d); expect32("underrun sticky", d, 1);
        wr(12'h010, 0);
        rd(12'h010, d); expect32("underrun kept on 0", d, 1);
        wr(12'h010, 1);
        rd(12'h010, d); expect32("underrun cleared", d, 0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
