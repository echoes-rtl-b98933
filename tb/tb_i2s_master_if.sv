// tb_i2s_master_if: self-checking test of the transmit interface.
//
// The same line model as the transmitter test (one bit every four clocks,
// I2S or DSP framing, both alignments, random word length and device count)
// provides FSYNC and samples SD; the interface's DSP EN bit picks the
// transmitter.  Every slot must carry the next stream word MSB first, and
// after the stream runs dry zeros with one underrun pulse per slot.
`timescale 1ns/1ps
module tb_i2s_master_if;
  import echoes_pkg::*;
  logic clk = 0, rst_n = 0;
  logic en; i2s_cfg_t cfg;
  logic smp = 0, drv = 0, ws = 0, align = 1;
  logic [4:0] wl; logic [3:0] nd;
  logic        ready, sdo, urun;
  logic [31:0] din;
  logic        vin;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  assign cfg = '{ndev_m1: nd, wlen_m1: wl, align: align, pol: 1'b0, ext_clk: 1'b0,
                 pdm_en: 1'b0, dsp_en: mode == 1, en: en};
  i2s_master_if dut (.clk_i(clk), .rst_ni(rst_n), .cfg_i(cfg), .smp_i(smp), .drv_i(drv), .ws_i(ws),
    .data_i(din), .valid_i(vin), .ready_o(ready), .sd_o(sdo), .underrun_o(urun));

  logic [31:0] words [512];
  logic        line [20000];
  int k, kd, mode, cur_bit, nsent, nw, g0, nurun;

  assign din = words[nsent % 512];
  assign vin = nsent < nw;

  always @(posedge clk) if (rst_n) begin
    if (ready && vin) begin
      if (nsent == 0) begin
        g0 = cur_bit / k;
        checks++;
        if (cur_bit % k != 0) begin failures++; $display("FAIL: first word starts inside a slot"); end
      end
      nsent <= nsent + 1;
    end
    if (urun) nurun++;
    if (smp) line[cur_bit] = sdo;
  end

  initial begin
    en = 0; mode = 0; wl = 0; nd = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int it = 0; it < 48; it++) begin
      int f, nbits, nslots;
      mode = it % 2; align = (it / 2) % 2;
      k  = (it < 8) ? 32 : 1 + $urandom % 32;
      kd = (it < 4) ? 1 : (it < 8 ? 16 : 1 + $urandom % 16);
      if (k * kd > 160) kd = 1 + 160 / k;
      if (kd > 16) kd = 16;
      wl = 5'(k - 1); nd = 4'(kd - 1);
      f = 2 * k * kd;
      foreach (words[i]) words[i] = $urandom;
      nbits = 4 * f;
      nslots = nbits / k;
      nw = nslots - 2 * kd - 3;       // leave the last slots without data
      nsent = 0; nurun = 0; g0 = -1;
      ws = 0;
      @(posedge clk); #1 en = 1;
      for (int b = 0; b < nbits; b++) begin
        int p;
        p = b % f;
        cur_bit = b;
        if (mode == 0) ws = align ? (p >= f / 2 - 1 && p <= f - 2) : (p >= f / 2);
        else           ws = align ? (p == f - 1) : (p == 0);
        drv = 1;
        @(posedge clk); #1 drv = 0;
        @(posedge clk); #1 smp = 1;
        @(posedge clk); #1 smp = 0;
        @(posedge clk); #1;
      end
      en = 0;
      checks++;
      if (g0 < 0 || g0 > 2 * kd + 1) begin failures++; $display("FAIL: first word in slot %0d", g0); end
      else begin
        for (int s = g0; s < nslots; s++) begin
          logic [31:0] got, want;
          got = 0;
          for (int i = 0; i < k; i++) got = {got[30:0], line[s * k + i]};
          want = (s - g0 < nw) ? words[(s - g0) % 512] & ((k == 32) ? 32'hffff_ffff : (32'd1 << k) - 1) : 0;
          checks++;
          if (got !== want) begin
            failures++;
            if (failures < 10) $display("FAIL: mode %0d k %0d K %0d align %0d slot %0d got %h want %h",
                                        mode, k, kd, align, s, got, want);
          end
        end
        checks++;
        if (nurun != nslots - g0 - nw) begin
          failures++; $display("FAIL: %0d underruns, want %0d", nurun, nslots - g0 - nw);
        end
      end
      repeat (3) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
