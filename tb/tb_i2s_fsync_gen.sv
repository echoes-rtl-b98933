// tb_i2s_fsync_gen: self-checking test of the frame-sync generators.
//
// One I2S-mode and one DSP-mode generator get the same drive strobes (every
// third clock) and random word lengths k (1..32) and device counts K
// (1..16).  A bit counter in the testbench, started at enable, predicts
// FSYNC for each bit: I2S mode low for the first K*k bits of the 2*K*k-bit
// frame and high for the rest; DSP mode high only for bit 0 of the frame.
// Both outputs are compared after every strobe over several frames.
`timescale 1ns/1ps
module tb_i2s_fsync_gen;
  logic clk = 0, rst_n = 0, en = 0, drv = 0;
  logic [4:0] wl;
  logic [3:0] nd;
  logic fs_i2s, fs_dsp;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  i2s_fsync_gen #(.DSP(1'b0)) dut_i2s (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .drv_i(drv),
    .wlen_m1_i(wl), .ndev_m1_i(nd), .fsync_o(fs_i2s));
  i2s_fsync_gen #(.DSP(1'b1)) dut_dsp (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .drv_i(drv),
    .wlen_m1_i(wl), .ndev_m1_i(nd), .fsync_o(fs_dsp));

  initial begin
    wl = 0; nd = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int it = 0; it < 60; it++) begin
      int k, kd, f, bits;
      k  = (it < 4) ? (it == 0 ? 1 : 32) : 1 + $urandom % 32;
      kd = (it < 4) ? (it < 2 ? 1 : 16) : 1 + $urandom % 16;
      if (it > 20) begin k = 1 + $urandom % 8; end
      wl = 5'(k - 1); nd = 4'(kd - 1);
      f = 2 * k * kd;
      bits = f * 3 + 5;
      if (bits > 3000) bits = 3000;
      @(posedge clk); #1 en = 1;
      for (int b = 0; b < bits; b++) begin
        int pos;
        drv = 1; @(posedge clk); #1 drv = 0;
        pos = b % f;
        checks += 2;
        if (fs_i2s !== (pos >= f / 2)) begin
          failures++; if (failures < 10) $display("FAIL: I2S fsync k %0d K %0d bit %0d", k, kd, pos);
        end
        if (fs_dsp !== (pos == 0)) begin
          failures++; if (failures < 10) $display("FAIL: DSP fsync k %0d K %0d bit %0d", k, kd, pos);
        end
        @(posedge clk); @(posedge clk); #1;
      end
      en = 0;
      @(posedge clk); #1;
      checks += 2;
      if (fs_i2s !== 1'b1 || fs_dsp !== 1'b0) begin failures++; $display("FAIL: idle level"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
