// i2s_periph: full-duplex I2S / TDM DSP-mode peripheral.
//
// Two independent interfaces share nothing but the register file: the slave
// interface receives DIN (microphones), the master interface transmits DOUT.
// Each has its own BCLK generator (divider of the peripheral clock), its own
// pair of FSYNC generators (I2S and DSP), and its own pads (BCLK/FSYNC SLV for
// the receiver, BCLK/FSYNC MST for the transmitter) which the clock select
// drives in internal-clock mode or reads in external-clock mode.  Every
// interface runs standard I2S (two channels), TDM I2S (K devices per channel
// half) or TDM DSP mode (K devices, each sending its L and R words in its own
// slot, up to 16 devices).  In DSP mode a device's sample pair is delivered
// 2k bit periods after its slot starts, independent of K, while TDM I2S needs
// the whole left half frame first.  Received words leave on rx_*_o, words to
// send enter on tx_*_i (both towards the uDMA, not part of this design).
// All logic runs on the peripheral clock, using BCLK edge strobes, so that
// clock must be at least 2x BCLK when BCLK is generated here and 4x BCLK when
// it comes from a pad (the published chip needs only about 1x).
// Block structure and protocols follow Fig. 1c and Fig. 2 of the paper; the
// single-clock implementation is this design's choice.
module i2s_periph
  import echoes_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  apb_req_t    apb_req_i,
  output apb_rsp_t    apb_rsp_o,
  // pads
  input  logic        bclk_slv_i,  output logic bclk_slv_o,  output logic bclk_slv_oe,
  input  logic        fsync_slv_i, output logic fsync_slv_o, output logic fsync_slv_oe,
  input  logic        bclk_mst_i,  output logic bclk_mst_o,  output logic bclk_mst_oe,
  input  logic        fsync_mst_i, output logic fsync_mst_o, output logic fsync_mst_oe,
  input  logic        din_i,
  output logic        dout_o,
  // PDM front end (external)
  input  logic        pdm_valid_i,
  input  logic [31:0] pdm_data_i,
  // receive stream
  output logic        rx_valid_o,
  output logic [31:0] rx_data_o,
  output logic [3:0]  rx_dev_o,
  output logic        rx_ch_o,
  // transmit stream
  input  logic [31:0] tx_data_i,
  input  logic        tx_valid_i,
  output logic        tx_ready_o
);
  i2s_cfg_t    cfg [2];
  logic [15:0] div [2];
  logic        gbclk [2], grise [2], gfall [2], fs_i2s [2], fs_dsp [2];
  logic        bpad_i [2], bpad_o [2], bpad_oe [2], fpad_i [2], fpad_o [2], fpad_oe [2];
  logic        smp [2], drv [2], ws [2];
  logic        underrun;

  i2s_regfile i_regs (.clk_i, .rst_ni, .apb_req_i, .apb_rsp_o, .cfg_o(cfg), .div_o(div),
                      .underrun_i(underrun));

  for (genvar i = 0; i < 2; i++) begin : g_gen
    i2s_clkgen i_bclk (.clk_i, .rst_ni, .en_i(cfg[i].en && !cfg[i].ext_clk), .div_i(div[i]),
                       .bclk_o(gbclk[i]), .rise_o(grise[i]), .fall_o(gfall[i]));
    i2s_fsync_gen #(.DSP(1'b0)) i_fs_i2s (.clk_i, .rst_ni,
      .en_i(cfg[i].en && !cfg[i].ext_clk && !cfg[i].dsp_en), .drv_i(drv[i]),
      .wlen_m1_i(cfg[i].wlen_m1), .ndev_m1_i(cfg[i].ndev_m1), .fsync_o(fs_i2s[i]));
    i2s_fsync_gen #(.DSP(1'b1)) i_fs_dsp (.clk_i, .rst_ni,
      .en_i(cfg[i].en && !cfg[i].ext_clk && cfg[i].dsp_en), .drv_i(drv[i]),
      .wlen_m1_i(cfg[i].wlen_m1), .ndev_m1_i(cfg[i].ndev_m1), .fsync_o(fs_dsp[i]));
  end

  assign bpad_i[0] = bclk_slv_i;
  assign bpad_i[1] = bclk_mst_i;
  assign fpad_i[0] = fsync_slv_i;
  assign fpad_i[1] = fsync_mst_i;
  assign bclk_slv_o   = bpad_o[0];
  assign bclk_slv_oe  = bpad_oe[0];
  assign bclk_mst_o   = bpad_o[1];
  assign bclk_mst_oe  = bpad_oe[1];
  assign fsync_slv_o  = fpad_o[0];
  assign fsync_slv_oe = fpad_oe[0];
  assign fsync_mst_o  = fpad_o[1];
  assign fsync_mst_oe = fpad_oe[1];

  i2s_clk_sel i_clk_sel (
    .clk_i, .rst_ni, .cfg_i(cfg), .gen_bclk_i(gbclk), .gen_rise_i(grise), .gen_fall_i(gfall),
    .fs_i2s_i(fs_i2s), .fs_dsp_i(fs_dsp),
    .bclk_pad_i(bpad_i), .bclk_pad_o(bpad_o), .bclk_pad_oe(bpad_oe),
    .fs_pad_i(fpad_i), .fs_pad_o(fpad_o), .fs_pad_oe(fpad_oe),
    .smp_o(smp), .drv_o(drv), .ws_o(ws));

  i2s_slave_if i_slave (
    .clk_i, .rst_ni, .cfg_i(cfg[0]), .smp_i(smp[0]), .ws_i(ws[0]), .sd_i(din_i),
    .pdm_valid_i, .pdm_data_i,
    .valid_o(rx_valid_o), .data_o(rx_data_o), .dev_o(rx_dev_o), .ch_o(rx_ch_o));

  i2s_master_if i_master (
    .clk_i, .rst_ni, .cfg_i(cfg[1]), .smp_i(smp[1]), .drv_i(drv[1]), .ws_i(ws[1]),
    .data_i(tx_data_i), .valid_i(tx_valid_i), .ready_o(tx_ready_o), .sd_o(dout_o),
    .underrun_o(underrun));
endmodule
