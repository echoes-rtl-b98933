// tb_echoes_top: end-to-end test of the SoC at its default parameters.
//
// External port 0 plays the core: it stores input samples in L2, programs
// the FFT HWPE over APB, waits for the done event and reads the transform
// back, which is compared with a double-precision DFT / N.  The three
// workloads of the chip measurements run: C64 512 points, C32 1024 points,
// C16 2048 points.  Meanwhile external port 1 streams random writes and
// read-backs into other L2 words, so FFT ports and this master collide in
// banks; external port 2 checks the private memory.  The I2S peripheral
// runs in loopback (MST pads and DOUT wired to SLV pads and DIN, receiver on
// external clock) in TDM DSP mode with 16 devices and in TDM I2S mode, and
// every received word is compared with the transmitted one.  Each mechanism
// (three FFT data types, final bit-reversed stage, bank-conflict stalls,
// private-memory access, DSP mode, TDM I2S mode, external-clock receive,
// transmit underrun) is counted and must occur.
`timescale 1ns/1ps
module tb_echoes_top;
  import echoes_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  tcdm_req_t ext_req [4];
  tcdm_rsp_t ext_rsp [4];
  apb_req_t  apb;
  apb_rsp_t  apb_rsp;
  logic      evt;
  logic bclk_mst, fsync_mst, dout, nc [6], oe_m, oe_f;
  logic rx_valid, rx_ch, tx_ready, tx_valid;
  logic [31:0] rx_data, tx_data;
  logic [3:0]  rx_dev;

  echoes_top dut (
    .clk_i(clk), .rst_ni(rst_n), .ext_req_i(ext_req), .ext_rsp_o(ext_rsp),
    .apb_req_i(apb), .apb_rsp_o(apb_rsp), .fft_evt_o(evt),
    .i2s_bclk_slv_i(bclk_mst), .i2s_bclk_slv_o(nc[0]), .i2s_bclk_slv_oe(nc[1]),
    .i2s_fsync_slv_i(fsync_mst), .i2s_fsync_slv_o(nc[2]), .i2s_fsync_slv_oe(nc[3]),
    .i2s_bclk_mst_i(1'b0), .i2s_bclk_mst_o(bclk_mst), .i2s_bclk_mst_oe(oe_m),
    .i2s_fsync_mst_i(1'b0), .i2s_fsync_mst_o(fsync_mst), .i2s_fsync_mst_oe(oe_f),
    .i2s_din_i(dout), .i2s_dout_o(dout), .pdm_valid_i(1'b0), .pdm_data_i('0),
    .i2s_rx_valid_o(rx_valid), .i2s_rx_data_o(rx_data), .i2s_rx_dev_o(rx_dev),
    .i2s_rx_ch_o(rx_ch), .i2s_tx_data_i(tx_data), .i2s_tx_valid_i(tx_valid),
    .i2s_tx_ready_o(tx_ready));

  int checks = 0, failures = 0;
  int n_c64 = 0, n_c32 = 0, n_c16 = 0, n_bitrev = 0, n_conflict = 0, n_priv = 0;
  int n_dsp = 0, n_tdm = 0, n_ext = 0, n_underrun = 0;

  function automatic real fabs(real v); return v < 0 ? -v : v; endfunction

  // ------------------------------------------------------ TCDM master tasks
  task automatic mem_wr(int p, logic [31:0] a, logic [31:0] d);
    ext_req[p] = '{req: 1, we: 1, be: 4'hf, addr: a, wdata: d};
    do @(posedge clk); while (!ext_rsp[p].gnt);
    #1 ext_req[p] = '0;
  endtask
  task automatic mem_rd(int p, logic [31:0] a, output logic [31:0] d);
    ext_req[p] = '{req: 1, we: 0, be: 4'hf, addr: a, wdata: 0};
    do @(posedge clk); while (!ext_rsp[p].gnt);
    #1 ext_req[p] = '0;
    @(posedge clk);
    d = ext_rsp[p].rdata;
  endtask

  // ----------------------------------------------------------------- APB
  task automatic apb_write(input logic [11:0] a, input logic [31:0] d);
    apb = '{psel: 1, penable: 0, pwrite: 1, paddr: a, pwdata: d};
    @(posedge clk); apb.penable = 1; @(posedge clk); #1 apb = '0;
  endtask
  task automatic apb_read(input logic [11:0] a, output logic [31:0] d);
    apb = '{psel: 1, penable: 0, pwrite: 0, paddr: a, pwdata: 0};
    @(posedge clk); apb.penable = 1; #1 d = apb_rsp.prdata; @(posedge clk); #1 apb = '0;
  endtask

  // ------------------------------------------- background traffic on port 1
  bit bg_on = 0;
  initial begin
    logic [31:0] a, d, r;
    forever begin
      if (bg_on) begin
        a = 32'h1C03_0000 + 4 * ($urandom % 4096);
        d = $urandom;
        mem_wr(1, a, d);
        mem_rd(1, a, r);
        checks++;
        if (r != d) begin failures++; $display("FAIL: background read-back %h", a); end
      end else @(posedge clk);
    end
  end
  always @(posedge clk) begin
    for (int p = 0; p < 4; p++) if (ext_req[p].req && !ext_rsp[p].gnt) n_conflict++;
    for (int p = 0; p < 8; p++) if (dut.fft_req[p].req && !dut.fft_rsp[p].gnt) n_conflict++;
    if (dut.i_fft.last && dut.i_fft.fire) n_bitrev++;
  end

  // ------------------------------------------------------------------- FFT
  localparam logic [31:0] BASE = 32'h1C01_0000;
  real xr [2048], xi [2048];

  task automatic fft_run(int dt, int l2n);
    int n, dw, bytes, cyc, errs;
    longint amp, re, im;
    logic [31:0] st, res, w;
    real maxerr;
    n = 1 << l2n; dw = dt == 0 ? 32 : dt == 1 ? 16 : 8; bytes = dt == 0 ? 8 : dt == 1 ? 4 : 2;
    amp = (64'sd1 <<< (dw - 1)) / 3;
    for (int i = 0; i < n; i++) begin
      re = longint'($urandom % (2 * amp + 1)) - amp;
      im = longint'($urandom % (2 * amp + 1)) - amp;
      xr[i] = real'(re); xi[i] = real'(im);
    end
    // store samples through the core port
    for (int i = 0; i < n * bytes / 4; i++) begin
      case (dt)
        0: w = (i % 2 == 0) ? 32'(longint'(xr[i/2])) : 32'(longint'(xi[i/2]));
        1: w = {16'(longint'(xi[i])), 16'(longint'(xr[i]))};
        default: w = {8'(longint'(xi[2*i+1])), 8'(longint'(xr[2*i+1])),
                      8'(longint'(xi[2*i])), 8'(longint'(xr[2*i]))};
      endcase
      mem_wr(0, BASE + 32'(4 * i), w);
    end
    bg_on = 1;
    apb_write(12'h008, BASE);
    apb_write(12'h00C, 32'(l2n));
    apb_write(12'h010, 32'(dt));
    apb_write(12'h000, 32'd1);
    cyc = 0;
    while (!evt) begin @(posedge clk); cyc++; end
    bg_on = 0;
    apb_read(12'h004, st);
    apb_read(12'h014, res);
    checks++;
    if (st[2:0] != 3'b010) begin failures++; $display("FAIL: FFT status %b", st[2:0]); end
    errs = 0; maxerr = 0;
    for (int k = 0; k < n; k++) begin
      real sr, si, ang;
      logic [31:0] wd, wd2;
      sr = 0; si = 0;
      for (int i = 0; i < n; i++) begin
        ang = -2.0 * 3.14159265358979323846 * real'((longint'(i) * k) % n) / real'(n);
        sr += xr[i] * $cos(ang) - xi[i] * $sin(ang);
        si += xr[i] * $sin(ang) + xi[i] * $cos(ang);
      end
      sr /= n; si /= n;
      case (dt)
        0: begin mem_rd(0, res + 32'(8 * k), wd); mem_rd(0, res + 32'(8 * k + 4), wd2);
                 re = longint'(signed'(wd)); im = longint'(signed'(wd2)); end
        1: begin mem_rd(0, res + 32'(4 * k), wd);
                 re = longint'(signed'(wd[15:0])); im = longint'(signed'(wd[31:16])); end
        default: begin
          logic [15:0] h;
          mem_rd(0, res + 32'(4 * (k / 2)), wd);
          h = wd[16 * (k % 2) +: 16];
          re = longint'(signed'(h[7:0])); im = longint'(signed'(h[15:8]));
        end
      endcase
      if (fabs(real'(re) - sr) > maxerr) maxerr = fabs(real'(re) - sr);
      if (fabs(real'(im) - si) > maxerr) maxerr = fabs(real'(im) - si);
      checks++;
      if (fabs(real'(re) - sr) > 5.0 || fabs(real'(im) - si) > 5.0) begin
        failures++; errs++;
        if (errs < 4) $display("FAIL: FFT dt %0d bin %0d got (%0d,%0d) want (%f,%f)", dt, k, re, im, sr, si);
      end
    end
    $display("FFT dt=%0d N=%0d: %0d cycles with background traffic, max error %f LSB", dt, n, cyc, maxerr);
    if (dt == 0) n_c64++; else if (dt == 1) n_c32++; else n_c16++;
  endtask

  // ------------------------------------------------------------------- I2S
  int unsigned sent = 0, rcvd = 0, words_g = 0, ndev_g = 1;
  bit dsp_g;
  function automatic logic [31:0] word_of(int unsigned n, int k);
    logic [31:0] w;
    w = (n * 32'h9E3779B1) ^ 32'hC3A5_5A3C;
    return k == 32 ? w : w & ((32'd1 << k) - 1);
  endfunction
  int kbits = 32;
  assign tx_data  = word_of(sent, kbits);
  assign tx_valid = sent < words_g;
  always @(posedge clk) begin
    if (tx_ready && tx_valid) sent <= sent + 1;
    if (tx_ready && !tx_valid) n_underrun++;
    if (rx_valid && rcvd < words_g) begin
      int unsigned slot, dev_e; bit ch_e;
      slot = rcvd % (2 * ndev_g);
      if (dsp_g) begin dev_e = slot / 2; ch_e = slot[0]; end
      else begin dev_e = slot % ndev_g; ch_e = slot >= ndev_g; end
      checks++;
      if (rx_data != word_of(rcvd, kbits) || rx_dev != 4'(dev_e) || rx_ch != ch_e) begin
        failures++;
        if (failures < 8) $display("FAIL: I2S word %0d got %h/%0d/%0d", rcvd, rx_data, rx_dev, rx_ch);
      end
      rcvd <= rcvd + 1;
    end
  end

  task automatic i2s_run(bit dsp, int k, int ndev, int frames);
    kbits = k; ndev_g = ndev; dsp_g = dsp; words_g = 2 * ndev * frames; sent = 0; rcvd = 0;
    apb_write(12'h10C, 32'd3);
    apb_write(12'h100, 32'h21 | (32'(dsp) << 1) | 32'h8 | (32'(k - 1) << 6) | (32'(ndev - 1) << 11));
    apb_write(12'h104, 32'h21 | (32'(dsp) << 1) | (32'(k - 1) << 6) | (32'(ndev - 1) << 11));
    n_ext++;
    while (rcvd < words_g) @(posedge clk);
    checks++;
    if (sent != words_g) begin failures++; $display("FAIL: I2S sent %0d", sent); end
    repeat (200) @(posedge clk);   // stream empty: the transmitter underruns
    apb_write(12'h104, 0);
    apb_write(12'h100, 0);
    if (dsp) n_dsp++; else n_tdm++;
  endtask

  initial begin
    logic [31:0] d;
    apb = '0;
    for (int p = 0; p < 4; p++) ext_req[p] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    // private memory through port 2
    for (int i = 0; i < 16; i++) mem_wr(2, 32'h1C00_0000 + 32'(i * 2052), 32'hA000_0000 + 32'(i));
    for (int i = 0; i < 16; i++) begin
      mem_rd(2, 32'h1C00_0000 + 32'(i * 2052), d);
      checks++;
      if (d != 32'hA000_0000 + 32'(i)) begin failures++; $display("FAIL: private word %0d", i); end
      n_priv++;
    end
    // I2S: TDM DSP mode with 16 devices x 32 bit, then TDM I2S with 4 devices x 16 bit
    i2s_run(1, 32, 16, 2);
    i2s_run(0, 16, 4, 2);
    fft_run(0, 9);
    fft_run(1, 10);
    fft_run(2, 11);
    $display("mechanisms: C64 %0d C32 %0d C16 %0d bit-reversed sub-steps %0d conflict stalls %0d private %0d DSP %0d TDM-I2S %0d ext-clock %0d underrun %0d",
             n_c64, n_c32, n_c16, n_bitrev, n_conflict, n_priv, n_dsp, n_tdm, n_ext, n_underrun);
    checks++; if (n_c64 == 0)      begin failures++; $display("FAIL: C64 never ran"); end
    checks++; if (n_c32 == 0)      begin failures++; $display("FAIL: C32 never ran"); end
    checks++; if (n_c16 == 0)      begin failures++; $display("FAIL: C16 never ran"); end
    checks++; if (n_bitrev == 0)   begin failures++; $display("FAIL: no bit-reversed stage"); end
    checks++; if (n_conflict == 0) begin failures++; $display("FAIL: no bank conflict"); end
    checks++; if (n_priv == 0)     begin failures++; $display("FAIL: no private access"); end
    checks++; if (n_dsp == 0)      begin failures++; $display("FAIL: no DSP mode"); end
    checks++; if (n_tdm == 0)      begin failures++; $display("FAIL: no TDM I2S mode"); end
    checks++; if (n_ext == 0)      begin failures++; $display("FAIL: no external clock"); end
    checks++; if (n_underrun == 0) begin failures++; $display("FAIL: no underrun"); end
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
