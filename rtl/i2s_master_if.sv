// i2s_master_if: transmit (master) interface of the I2S peripheral.
//
// Holds one I2S transmitter and one DSP-mode transmitter; DSP EN enables one
// of them, routes the word stream from the uDMA transmit channel to it, and
// selects its SD onto DOUT.  Structure as in Fig. 1c of the paper.
module i2s_master_if
  import echoes_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  i2s_cfg_t    cfg_i,
  input  logic        smp_i,
  input  logic        drv_i,
  input  logic        ws_i,
  input  logic [31:0] data_i,
  input  logic        valid_i,
  output logic        ready_o,
  output logic        sd_o,
  output logic        underrun_o
);
  logic r_i2s, r_dsp, s_i2s, s_dsp, u_i2s, u_dsp;

  i2s_tx_core #(.DSP(1'b0)) i_i2s (
    .clk_i, .rst_ni, .en_i(cfg_i.en && !cfg_i.dsp_en), .smp_i, .drv_i, .ws_i,
    .align_i(cfg_i.align), .wlen_m1_i(cfg_i.wlen_m1), .ndev_m1_i(cfg_i.ndev_m1),
    .data_i, .valid_i, .ready_o(r_i2s), .sd_o(s_i2s), .underrun_o(u_i2s));

  i2s_tx_core #(.DSP(1'b1)) i_dsp (
    .clk_i, .rst_ni, .en_i(cfg_i.en && cfg_i.dsp_en), .smp_i, .drv_i, .ws_i,
    .align_i(cfg_i.align), .wlen_m1_i(cfg_i.wlen_m1), .ndev_m1_i(cfg_i.ndev_m1),
    .data_i, .valid_i, .ready_o(r_dsp), .sd_o(s_dsp), .underrun_o(u_dsp));

  assign ready_o    = cfg_i.dsp_en ? r_dsp : r_i2s;
  assign sd_o       = cfg_i.dsp_en ? s_dsp : s_i2s;
  assign underrun_o = cfg_i.dsp_en ? u_dsp : u_i2s;
endmodule
