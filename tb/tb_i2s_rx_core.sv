// tb_i2s_rx_core: self-checking test of the serial receiver in both modes.
//
// A line model in the testbench produces FSYNC and SD bit by bit, one bit
// every four clocks (drive strobe, then sample strobe two clocks later), for
// random word lengths k, device counts K and both alignments.  Frames are
// 2*K*k bits.  I2S mode: FSYNC low for the left half, high for the right,
// changing one bit before the first data bit when aligned, with the data bit
// otherwise; the K words of a half are devices 0..K-1.  DSP mode: a one-bit
// FSYNC pulse one bit before (aligned) or on (not aligned) the first bit;
// slots are L0, R0, L1, R1, ...  Each received word is compared with the
// word sent in that slot, including its device and channel tag, and its
// valid pulse must come right after the sample strobe of its last bit.
`timescale 1ns/1ps
module tb_i2s_rx_core;
  logic clk = 0, rst_n = 0;
  logic en [2], smp = 0, ws = 0, sd = 0, align = 1;
  logic [4:0] wl; logic [3:0] nd;
  logic        valid [2], ch [2];
  logic [31:0] data [2];
  logic [3:0]  dev [2];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  for (genvar m = 0; m < 2; m++) begin : g_dut
    i2s_rx_core #(.DSP(m == 1)) dut (.clk_i(clk), .rst_ni(rst_n), .en_i(en[m]), .smp_i(smp),
      .ws_i(ws), .sd_i(sd), .align_i(align), .wlen_m1_i(wl), .ndev_m1_i(nd),
      .valid_o(valid[m]), .data_o(data[m]), .dev_o(dev[m]), .ch_o(ch[m]));
  end

  logic [31:0] words [512];
  int k, kd, mode, cur_bit, nexp, nrcv;

  always @(posedge clk) if (rst_n) begin
    if (valid[1 - mode]) begin failures++; $display("FAIL: disabled receiver produced data"); end
    if (valid[mode]) begin
      int g, slot;
      bit  e_ch; int e_dev;
      g = nexp + nrcv;
      slot = g % (2 * kd);
      if (mode == 1) begin e_dev = slot / 2; e_ch = slot % 2; end
      else begin e_dev = slot % kd; e_ch = slot >= kd; end
      checks++;
      if (data[mode] !== (words[g % 512] & ((k == 32) ? 32'hffff_ffff : (32'd1 << k) - 1)) ||
          dev[mode] !== 4'(e_dev) || ch[mode] !== e_ch) begin
        failures++;
        if (failures < 10) $display("FAIL: mode %0d k %0d K %0d align %0d slot %0d got %h/%0d/%0d want %h/%0d/%0d",
          mode, k, kd, align, g, data[mode], dev[mode], ch[mode], words[g % 512], e_dev, e_ch);
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
    en[0] = 0; en[1] = 0; wl = 0; nd = 0;
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
      @(posedge clk); #1 en[mode] = 1;
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
      en[mode] = 0;
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
