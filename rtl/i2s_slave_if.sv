// i2s_slave_if: receive (slave) interface of the I2S peripheral.
//
// Holds one I2S receiver and one DSP-mode receiver fed by the same SD, FSYNC
// and sample strobe; DSP EN enables one of them and selects its words.  A
// second multiplexer, PDM EN, selects instead the word stream of a PDM front
// end (not part of this design, it enters on pdm_*_i).  The chosen stream
// leaves towards the uDMA receive channel as (valid, data, device, channel).
// Structure as in Fig. 1c of the paper.
module i2s_slave_if
  import echoes_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  i2s_cfg_t    cfg_i,
  input  logic        smp_i,
  input  logic        ws_i,
  input  logic        sd_i,
  input  logic        pdm_valid_i,
  input  logic [31:0] pdm_data_i,
  output logic        valid_o,
  output logic [31:0] data_o,
  output logic [3:0]  dev_o,
  output logic        ch_o
);
  logic        v_i2s, v_dsp, c_i2s, c_dsp;
  logic [31:0] d_i2s, d_dsp;
  logic [3:0]  n_i2s, n_dsp;

  i2s_rx_core #(.DSP(1'b0)) i_i2s (
    .clk_i, .rst_ni, .en_i(cfg_i.en && !cfg_i.pdm_en && !cfg_i.dsp_en), .smp_i, .ws_i, .sd_i,
    .align_i(cfg_i.align), .wlen_m1_i(cfg_i.wlen_m1), .ndev_m1_i(cfg_i.ndev_m1),
    .valid_o(v_i2s), .data_o(d_i2s), .dev_o(n_i2s), .ch_o(c_i2s));

  i2s_rx_core #(.DSP(1'b1)) i_dsp (
    .clk_i, .rst_ni, .en_i(cfg_i.en && !cfg_i.pdm_en && cfg_i.dsp_en), .smp_i, .ws_i, .sd_i,
    .align_i(cfg_i.align), .wlen_m1_i(cfg_i.wlen_m1), .ndev_m1_i(cfg_i.ndev_m1),
    .valid_o(v_dsp), .data_o(d_dsp), .dev_o(n_dsp), .ch_o(c_dsp));

  always_comb begin
    if (cfg_i.pdm_en) begin
      valid_o = cfg_i.en && pdm_valid_i;
      data_o  = pdm_data_i;
      dev_o   = '0;
      ch_o    = 1'b0;
    end else if (cfg_i.dsp_en) begin
      valid_o = v_dsp; data_o = d_dsp; dev_o = n_dsp; ch_o = c_dsp;
    end else begin
      valid_o = v_i2s; data_o = d_i2s; dev_o = n_i2s; ch_o = c_i2s;
    end
  end
endmodule
