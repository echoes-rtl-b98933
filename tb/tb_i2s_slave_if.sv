// tb_i2s_slave_if: self-checking test of the receive interface.
//
// The same line model as the receiver test (one bit every four clocks, I2S
// or DSP framing, both alignments, random word length and device count)
// drives the interface, whose DSP EN bit picks the receiver; every word, its
// device and channel tag and its timing are checked.  Between the serial runs
// the PDM EN bit is set and random PDM words must pass straight to the
// output, while the serial receivers stay silent.
`timescale 1ns/1ps
module tb_i2s_slave_if;
  import echoes_pkg::*;
  logic clk = 0, rst_n = 0;
  logic en, pdm, pdm_v; logic [31:0] pdm_d;
  i2s_cfg_t cfg;
  logic smp = 0, ws = 0, sd = 0, align = 1;
  logic [4:0] wl; logic [3:0] nd;
  logic        valid, ch;
  logic [31:0] data;
  logic [3:0]  dev;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  assign cfg = '{ndev_m1: nd, wlen_m1: wl, align: align, pol: 1'b0, ext_clk: 1'b0,
                 pdm_en: pdm, dsp_en: mode == 1, en: en};
  i2s_slave_if dut (.clk_i(clk), .rst_ni(rst_n), .cfg_i(cfg), .smp_i(smp), .ws_i(ws), .sd_i(sd),
    .pdm_valid_i(pdm_v), .pdm_data_i(pdm_d), .valid_o(valid), .data_o(data), .dev_o(dev), .ch_o(ch));

  logic [31:0] words [512];
  int k, kd, mode, cur_bit, nexp, nrcv;

  always @(posedge clk) if (rst_n && !pdm) begin
    if (valid) begin
      int g, slot;
      bit  e_ch; int e_dev;
      g = nexp + nrcv;
      slot = g % (2 * kd);
      if (mode == 1) begin e_dev = slot / 2; e_ch = slot % 2; end
      else begin e_dev = slot % kd; e_ch = slot >= kd; end
      checks++;
      if (data !== (words[g % 512] & ((k == 32) ? 32'hffff_ffff : (32'd1 << k) - 1)) ||
          dev !== 4'(e_dev) || ch !== e_ch) begin
        failures++;
        if (failures < 10) $display("FAIL: mode %0d k %0d K %0d align %0d slot %0d got %h/%0d/%0d want %h/%0d/%0d",
          mode, k, kd, align, g, data, dev, ch, words[g % 512], e_dev, e_ch);
      end
      checks++;
      if (cur_bit != (g + 1) * k - 1) begin
        failures++;
        if (failures < 10) $display("FAIL: word %0d valid at bit %0d, last bit %0d", g, cur_bit, (g + 1) * k - 1);
      end
      nrcv++;
    end
  end

  initial begin
    en = 0; pdm = 0; pdm_v = 0; pdm_d = 0; mode = 0; wl = 0; nd = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int it = 0; it < 48; it++) begin
      int f, nbits, got;
      mode = it % 2; align = (it / 2) % 2;
      k  = (it < 8) ? 32 : 1 + $urandom % 32;
      kd = (it < 4) ? 1 : (it < 8 ? 16 : 1 + $urandom % 16);
      if (k * kd > 160) kd = 1 + 160 / k;
      if (kd > 16) kd = 16;
      wl = 5'(k - 1); nd = 4'(kd - 1);
      f = 2 * k * kd;
      foreach (words[i]) words[i] = $urandom;
      // first slot the receiver can catch
      nexp = (mode == 0) ? kd : (align ? 2 * kd : 0);
      nrcv = 0;
      ws = 0; sd = 0;
      @(posedge clk); #1 en = 1;
      nbits = 3 * f;
      for (int b = 0; b < nbits; b++) begin
        int p, j;
        p = b % f; j = b / k;
        cur_bit = b;
        if (mode == 0) ws = align ? (p >= f / 2 - 1 && p <= f - 2) : (p >= f / 2);
        else           ws = align ? (p == f - 1) : (p == 0);
        sd = words[j % 512][k - 1 - (b % k)];
        @(posedge clk); @(posedge clk); #1 smp = 1;
        @(posedge clk); #1 smp = 0;
        @(posedge clk); #1;
      end
      got = nrcv;
      checks++;
      if (got != 3 * 2 * kd - nexp) begin
        failures++; $display("FAIL: mode %0d k %0d K %0d align %0d received %0d words, want %0d", mode, k, kd, align, got, 6 * kd - nexp);
      end
      en = 0;
      repeat (3) @(posedge clk);
      // PDM words pass through, the serial receivers stay quiet
      #1 pdm = 1; en = 1;
      for (int i = 0; i < 20; i++) begin
        pdm_v = 1'($urandom); pdm_d = $urandom;
        sd = 1'($urandom); ws = 1'($urandom); smp = 1'($urandom);
        #1;
        checks++;
        if (valid !== pdm_v || (pdm_v && data !== pdm_d)) begin failures++; $display("FAIL: PDM word"); end
        @(posedge clk); #1;
      end
      pdm = 0; en = 0; pdm_v = 0; smp = 0;
      repeat (3) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
