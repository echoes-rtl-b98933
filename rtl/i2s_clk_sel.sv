// i2s_clk_sel: clock and frame-sync selection for both I2S interfaces.
//
// For each interface (0 = slave/receive, pads *_slv; 1 = master/transmit,
// pads *_mst) it picks the bit clock and FSYNC either from the internal
// BCLK generator and the FSYNC generator of the selected protocol, driving
// them out on the pads, or, with ext_clk set, from the pads, synchronised
// with two flip-flops and edge-detected.  It returns per interface a sample
// strobe, a drive strobe and the FSYNC level.  With pol = 0 data are sampled
// on the rising and driven on the falling BCLK edge (I2S rule); pol = 1 swaps
// the edges.  In external mode the peripheral clock must be at least eight
// times BCLK so that data driven after the synchroniser delay still meet the
// next sampling edge.
// The pad names and the existence of this block follow Fig. 1c of the paper;
// pad direction control and synchronisation are this design's choice.
module i2s_clk_sel
  import echoes_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  i2s_cfg_t cfg_i      [2],
  // internal generators
  input  logic     gen_bclk_i [2],
  input  logic     gen_rise_i [2],
  input  logic     gen_fall_i [2],
  input  logic     fs_i2s_i   [2],
  input  logic     fs_dsp_i   [2],
  // pads: index 0 = SLV pair, index 1 = MST pair
  input  logic     bclk_pad_i  [2],
  output logic     bclk_pad_o  [2],
  output logic     bclk_pad_oe [2],
  input  logic     fs_pad_i    [2],
  output logic     fs_pad_o    [2],
  output logic     fs_pad_oe   [2],
  // to the interfaces
  output logic     smp_o [2],
  output logic     drv_o [2],
  output logic     ws_o  [2]
);
  for (genvar i = 0; i < 2; i++) begin : g_if
    logic [1:0] bsync_q, fsync_q;
    logic       bprev_q;
    logic       ext_rise, ext_fall, rise, fall;

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        bsync_q <= '0;
        fsync_q <= '0;
        bprev_q <= 1'b0;
      end else begin
        bsync_q <= {bsync_q[0], bclk_pad_i[i]};
        fsync_q <= {fsync_q[0], fs_pad_i[i]};
        bprev_q <= bsync_q[1];
      end
    end

    assign ext_rise = cfg_i[i].en && bsync_q[1] && !bprev_q;
    assign ext_fall = cfg_i[i].en && !bsync_q[1] && bprev_q;
    assign rise     = cfg_i[i].ext_clk ? ext_rise : gen_rise_i[i];
    assign fall     = cfg_i[i].ext_clk ? ext_fall : gen_fall_i[i];
    assign smp_o[i] = cfg_i[i].pol ? fall : rise;
    assign drv_o[i] = cfg_i[i].pol ? rise : fall;
    assign ws_o[i]  = cfg_i[i].ext_clk ? fsync_q[1]
                    : (cfg_i[i].dsp_en ? fs_dsp_i[i] : fs_i2s_i[i]);

    assign bclk_pad_o[i]  = gen_bclk_i[i];
    assign bclk_pad_oe[i] = cfg_i[i].en && !cfg_i[i].ext_clk;
    assign fs_pad_o[i]    = cfg_i[i].dsp_en ? fs_dsp_i[i] : fs_i2s_i[i];
    assign fs_pad_oe[i]   = cfg_i[i].en && !cfg_i[i].ext_clk;
  end
endmodule
