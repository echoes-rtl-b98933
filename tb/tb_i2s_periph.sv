// tb_i2s_periph: loopback test of the full-duplex I2S peripheral.
//
// The master (transmit) interface generates BCLK and FSYNC on its MST pads
// and sends words on DOUT; the pads are wired to the SLV pads and DIN, and the
// slave (receive) interface runs in external-clock mode.  For standard I2S,
// TDM I2S and TDM DSP mode (up to 16 devices, 8 to 32-bit words) every word
// received must equal the word sent, with the right device and channel tags.
// The test also measures, in BCLK periods, the time from the first bit of a
// device's left word to the end of its right word: (K+1)*k in TDM I2S and
// 2k = nBits in DSP mode.  An underrun (stream empty) must set STATUS.
`timescale 1ns/1ps
module tb_i2s_periph;
  import echoes_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  apb_req_t apb;
  apb_rsp_t apb_rsp;
  logic bclk_mst, fsync_mst, dout, bclk_slv_o, fsync_slv_o, u0, u1, u2, u3, oe_m, oe_f;
  logic rx_valid, rx_ch, tx_ready;
  logic [31:0] rx_data, tx_data;
  logic [3:0]  rx_dev;
  logic        tx_valid;

  i2s_periph dut (
    .clk_i(clk), .rst_ni(rst_n), .apb_req_i(apb), .apb_rsp_o(apb_rsp),
    .bclk_slv_i(bclk_mst), .bclk_slv_o(bclk_slv_o), .bclk_slv_oe(u0),
    .fsync_slv_i(fsync_mst), .fsync_slv_o(fsync_slv_o), .fsync_slv_oe(u1),
    .bclk_mst_i(1'b0), .bclk_mst_o(bclk_mst), .bclk_mst_oe(oe_m),
    .fsync_mst_i(1'b0), .fsync_mst_o(fsync_mst), .fsync_mst_oe(oe_f),
    .din_i(dout), .dout_o(dout), .pdm_valid_i(1'b0), .pdm_data_i('0),
    .rx_valid_o(rx_valid), .rx_data_o(rx_data), .rx_dev_o(rx_dev), .rx_ch_o(rx_ch),
    .tx_data_i(tx_data), .tx_valid_i(tx_valid), .tx_ready_o(tx_ready));

  int checks = 0, failures = 0;

  task automatic apb_write(input logic [11:0] a, input logic [31:0] d);
    apb = '{psel: 1, penable: 0, pwrite: 1, paddr: a, pwdata: d};
    @(posedge clk); apb.penable = 1; @(posedge clk); apb = '0;
  endtask
  task automatic apb_read(input logic [11:0] a, output logic [31:0] d);
    apb = '{psel: 1, penable: 0, pwrite: 0, paddr: a, pwdata: 0};
    @(posedge clk); apb.penable = 1; #1 d = apb_rsp.prdata; @(posedge clk); apb = '0;
  endtask

  function automatic logic [31:0] cfg(bit en, bit dsp, bit ext, int k, int ndev);
    return 32'(en) | (32'(dsp) << 1) | (32'(ext) << 3) | (32'd1 << 5)
         | (32'(k - 1) << 6) | (32'(ndev - 1) << 11);
  endfunction

  // transmit stream: word n = hash of n, masked to k bits
  int unsigned sent, rcvd, kbits, ndev_g, words_g;
  bit dsp_g;
  function automatic logic [31:0] word_of(int unsigned n);
    logic [31:0] w;
    w = (n * 32'h9E3779B1) ^ 32'h5A5A0F0F;
    return kbits == 32 ? w : w & ((32'd1 << kbits) - 1);
  endfunction
  assign tx_data  = word_of(sent);
  assign tx_valid = sent < words_g;

  // bit-period counter on the pad clock
  int unsigned bper = 0;
  always @(posedge bclk_mst) bper++;
  int unsigned first_bit [16];
  int unsigned lat_pair [16];

  always @(posedge clk) begin
    if (tx_ready && tx_valid) sent <= sent + 1;
    if (rx_valid && rcvd < words_g) begin
      int unsigned dev_exp; bit ch_exp; int unsigned slot;
      slot = rcvd % (2 * ndev_g);
      if (dsp_g) begin dev_exp = slot / 2; ch_exp = slot % 2; end
      else begin dev_exp = slot % ndev_g; ch_exp = slot >= ndev_g; end
      checks++;
      if (rx_data !== word_of(rcvd) || rx_dev != 4'(dev_exp) || rx_ch != ch_exp) begin
        failures++;
        if (failures < 6) $display("FAIL: word %0d got %h dev %0d ch %0d want %h dev %0d ch %0d",
                                   rcvd, rx_data, rx_dev, rx_ch, word_of(rcvd), dev_exp, ch_exp);
      end
      // first frame: latency from first bit of the device's L word to end of its R word
      if (rcvd < 2 * ndev_g && ch_exp == 1) lat_pair[dev_exp] = bper - first_bit[dev_exp];
      rcvd <= rcvd + 1;
    end
  end
  // first bit of each left word: one BCLK after the frame-start FSYNC edge, then every k bits
  int unsigned frame0;
  always @(posedge bclk_mst) begin
    if (sent == 0 && tx_ready) ;
  end

  int n_i2s = 0, n_tdm = 0, n_dsp = 0;

  task automatic run(bit dsp, int k, int ndev, int frames, int div);
    logic [31:0] d;
    int unsigned t0;
    kbits = k; ndev_g = ndev; dsp_g = dsp; words_g = 2 * ndev * frames;
    sent = 0; rcvd = 0;
    apb_write(12'h008, 0);
    apb_write(12'h00C, div);
    apb_write(12'h000, cfg(1, dsp, 1, k, ndev));
    apb_write(12'h004, cfg(1, dsp, 0, k, ndev));
    // frame start: first FSYNC edge of the frame, the first data bit is one BCLK later
    if (dsp) @(posedge fsync_mst); else @(negedge fsync_mst);
    @(posedge bclk_mst);
    t0 = bper;                       // first bit (L word of device 0) is sampled at the next rise
    for (int dv = 0; dv < ndev; dv++)
      first_bit[dv] = dsp ? t0 + 32'(2 * k * dv) : t0 + 32'(k * dv);
    while (rcvd < words_g) @(posedge clk);
    checks++;
    if (sent != words_g) begin failures++; $display("FAIL: sent %0d", sent); end
    // latency of the last device's sample pair
    checks++;
    begin
      int unsigned want;
      want = dsp ? 32'(2 * k) : 32'((ndev + 1) * k);
      if (lat_pair[ndev-1] < want || lat_pair[ndev-1] > want + 2) begin
        failures++; $display("FAIL: pair latency %0d bits, want %0d", lat_pair[ndev-1], want);
      end
      $display("mode dsp=%0d K=%0d k=%0d: pair latency %0d BCLK (model %0d)", dsp, ndev, k,
               lat_pair[ndev-1], want);
    end
    if (dsp) n_dsp++; else if (ndev > 1) n_tdm++; else n_i2s++;
    apb_write(12'h000, 0);
    apb_write(12'h004, 0);
    repeat (20) @(posedge clk);
  endtask

  initial begin
    logic [31:0] st;
    apb = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // register read-back
    apb_write(12'h008, 32'h1234);
    apb_read(12'h008, st);
    checks++; if (st != 32'h1234) begin failures++; $display("FAIL: CLKDIV readback"); end
    // pads: master drives, slave listens
    apb_write(12'h004, cfg(1, 0, 0, 16, 1));
    @(posedge clk);
    checks++; if (!(oe_m && oe_f)) begin failures++; $display("FAIL: master pads not driven"); end
    apb_write(12'h004, 0);
    run(0, 16, 1, 3, 3);      // standard I2S stereo
    run(0, 8, 4, 3, 3);       // TDM I2S, 4 devices
    run(1, 16, 4, 3, 3);      // TDM DSP, 4 devices
    run(1, 32, 16, 2, 3);     // TDM DSP, 16 devices of 32-bit words
    // underrun: enable the transmitter with an empty stream
    words_g = 0;
    apb_write(12'h00C, 1);
    apb_write(12'h004, cfg(1, 1, 0, 8, 1));
    repeat (200) @(posedge clk);
    apb_read(12'h010, st);
    checks++; if (st[0] != 1'b1) begin failures++; $display("FAIL: underrun not flagged"); end
    apb_write(12'h010, 1);
    apb_write(12'h004, 0);
    apb_read(12'h010, st);
    checks++; if (st[0] != 1'b0) begin failures++; $display("FAIL: underrun not cleared"); end
    checks++;
    if (n_i2s == 0 || n_tdm == 0 || n_dsp == 0) begin failures++; $display("FAIL: a mode never ran"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
