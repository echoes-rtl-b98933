// echoes_top: the frequency-domain SoC built around the shared L2.
//
// Masters: the FFT HWPE (four read and four write ports) and NUM_EXT external
// TCDM ports, meant for the RISC-V core (instruction and data) and the I/O
// DMA, which are not part of this design.  They reach, through the
// low-latency interconnect, the 256 KiB L2 (16 word-interleaved 16 KiB banks,
// 0x1C01_0000) and the 64 KiB private memory (two 32 KiB banks, 0x1C00_0000).
// All banks answer one cycle after the grant.  A single APB port, driven by
// the core, configures the FFT HWPE (paddr[8] = 0) and the I2S peripheral
// (paddr[8] = 1).  The I2S pads are split into input, output and output
// enable; its receive and transmit word streams and the PDM front end input
// are ports because the uDMA that moves them to memory is not built.
// fft_evt_o pulses when a transform completes (an interrupt for the core).
// The blocks and their connections follow Fig. 1a of the paper; the address
// map, APB split and port numbering are this design's choice.
module echoes_top
  import echoes_pkg::*;
#(
  parameter int unsigned NUM_EXT = 4
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // external memory masters (core, uDMA)
  input  tcdm_req_t   ext_req_i [NUM_EXT],
  output tcdm_rsp_t   ext_rsp_o [NUM_EXT],
  // peripheral configuration bus
  input  apb_req_t    apb_req_i,
  output apb_rsp_t    apb_rsp_o,
  output logic        fft_evt_o,
  // I2S pads
  input  logic        i2s_bclk_slv_i,  output logic i2s_bclk_slv_o,  output logic i2s_bclk_slv_oe,
  input  logic        i2s_fsync_slv_i, output logic i2s_fsync_slv_o, output logic i2s_fsync_slv_oe,
  input  logic        i2s_bclk_mst_i,  output logic i2s_bclk_mst_o,  output logic i2s_bclk_mst_oe,
  input  logic        i2s_fsync_mst_i, output logic i2s_fsync_mst_o, output logic i2s_fsync_mst_oe,
  input  logic        i2s_din_i,
  output logic        i2s_dout_o,
  // I2S streams towards the I/O DMA and PDM input
  input  logic        pdm_valid_i,
  input  logic [31:0] pdm_data_i,
  output logic        i2s_rx_valid_o,
  output logic [31:0] i2s_rx_data_o,
  output logic [3:0]  i2s_rx_dev_o,
  output logic        i2s_rx_ch_o,
  input  logic [31:0] i2s_tx_data_i,
  input  logic        i2s_tx_valid_i,
  output logic        i2s_tx_ready_o
);
  localparam int unsigned NM = 8 + NUM_EXT;

  tcdm_req_t   mreq [NM];
  tcdm_rsp_t   mrsp [NM];
  tcdm_req_t   fft_req [8];
  tcdm_rsp_t   fft_rsp [8];
  tcdm_req_t   il_req [16];
  logic [31:0] il_rdata [16];
  tcdm_req_t   pv_req [2];
  logic [31:0] pv_rdata [2];

  for (genvar m = 0; m < 8; m++) begin : g_fft_ports
    assign mreq[m]    = fft_req[m];
    assign fft_rsp[m] = mrsp[m];
  end
  for (genvar m = 0; m < NUM_EXT; m++) begin : g_ext_ports
    assign mreq[8 + m]  = ext_req_i[m];
    assign ext_rsp_o[m] = mrsp[8 + m];
  end

  tcdm_xbar #(.NM(NM)) i_xbar (
    .clk_i, .rst_ni, .mst_req_i(mreq), .mst_rsp_o(mrsp),
    .il_req_o(il_req), .il_rdata_i(il_rdata), .pv_req_o(pv_req), .pv_rdata_i(pv_rdata));

  l2_interleaved_mem i_l2 (.clk_i, .bank_req_i(il_req), .bank_rdata_o(il_rdata));

  private_mem i_priv (.clk_i, .bank_req_i(pv_req), .bank_rdata_o(pv_rdata));

  // APB split
  apb_req_t apb_fft, apb_i2s;
  apb_rsp_t rsp_fft, rsp_i2s;
  always_comb begin
    apb_fft      = apb_req_i;
    apb_i2s      = apb_req_i;
    apb_fft.psel = apb_req_i.psel && !apb_req_i.paddr[8];
    apb_i2s.psel = apb_req_i.psel &&  apb_req_i.paddr[8];
    apb_rsp_o    = apb_req_i.paddr[8] ? rsp_i2s : rsp_fft;
  end

  fft_hwpe i_fft (.clk_i, .rst_ni, .tcdm_req_o(fft_req), .tcdm_rsp_i(fft_rsp),
                  .apb_req_i(apb_fft), .apb_rsp_o(rsp_fft), .evt_o(fft_evt_o));

  i2s_periph i_i2s (
    .clk_i, .rst_ni, .apb_req_i(apb_i2s), .apb_rsp_o(rsp_i2s),
    .bclk_slv_i(i2s_bclk_slv_i), .bclk_slv_o(i2s_bclk_slv_o), .bclk_slv_oe(i2s_bclk_slv_oe),
    .fsync_slv_i(i2s_fsync_slv_i), .fsync_slv_o(i2s_fsync_slv_o), .fsync_slv_oe(i2s_fsync_slv_oe),
    .bclk_mst_i(i2s_bclk_mst_i), .bclk_mst_o(i2s_bclk_mst_o), .bclk_mst_oe(i2s_bclk_mst_oe),
    .fsync_mst_i(i2s_fsync_mst_i), .fsync_mst_o(i2s_fsync_mst_o), .fsync_mst_oe(i2s_fsync_mst_oe),
    .din_i(i2s_din_i), .dout_o(i2s_dout_o), .pdm_valid_i, .pdm_data_i,
    .rx_valid_o(i2s_rx_valid_o), .rx_data_o(i2s_rx_data_o), .rx_dev_o(i2s_rx_dev_o),
    .rx_ch_o(i2s_rx_ch_o), .tx_data_i(i2s_tx_data_i), .tx_valid_i(i2s_tx_valid_i),
    .tx_ready_o(i2s_tx_ready_o));
endmodule
