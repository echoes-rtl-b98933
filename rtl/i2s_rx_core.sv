// i2s_rx_core: serial receiver for standard/TDM I2S (DSP = 0) or TDM DSP
// mode (DSP = 1).
//
// On every sample strobe it reads SD and FSYNC.  A frame starts at an FSYNC
// edge: any edge in I2S mode (falling = left channel, rising = right), the
// rising edge in DSP mode.  With align = 1 the first data bit is the one
// after the edge (Fig. 2 of the paper), with align = 0 the bit sampled with
// the edge.  Words are k bits, MSB first.  In I2S mode the K words after an
// edge are the K devices' words of that channel (L0..L{K-1} or R0..R{K-1});
// in DSP mode the 2K words of a frame are L0, R0, L1, R1, ... so device d's
// sample pair is complete after (d+1)*2k bit periods.  Each word leaves on
// valid_o (one cycle) right-aligned in data_o with its device and channel
// (0 = left).  After the last word of a half frame / frame the receiver waits
// for the next edge.
// The protocols follow the paper; the word/tag output format is this
// design's choice.
module i2s_rx_core #(
  parameter bit DSP = 1'b0
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        en_i,
  input  logic        smp_i,
  input  logic        ws_i,
  input  logic        sd_i,
  input  logic        align_i,
  input  logic [4:0]  wlen_m1_i,
  input  logic [3:0]  ndev_m1_i,
  output logic        valid_o,
  output logic [31:0] data_o,
  output logic [3:0]  dev_o,
  output logic        ch_o
);
  logic        ws_q, active_q, ch_q;
  logic [4:0]  bitc_q, wordc_q;
  logic [31:0] sh_q;
  logic [4:0]  wps_m1;
  logic        edge_det;

  assign wps_m1   = DSP ? {ndev_m1_i, 1'b1} : {1'b0, ndev_m1_i};
  assign edge_det = DSP ? (ws_i && !ws_q) : (ws_i != ws_q);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ws_q     <= 1'b0;
      active_q <= 1'b0;
      ch_q     <= 1'b0;
      bitc_q   <= '0;
      wordc_q  <= '0;
      sh_q     <= '0;
      valid_o  <= 1'b0;
      data_o   <= '0;
      dev_o    <= '0;
      ch_o     <= 1'b0;
    end else begin
      valid_o <= 1'b0;
      if (!en_i) begin
        ws_q     <= ws_i;
        active_q <= 1'b0;
      end else if (smp_i) begin
        logic        act, chn;
        logic [4:0]  b, w;
        logic [31:0] sh;
        ws_q <= ws_i;
        act = active_q; b = bitc_q; w = wordc_q; chn = ch_q;
        if (edge_det && !align_i) begin
          act = 1'b1; b = '0; w = '0; chn = ws_i;
        end
        sh = {sh_q[30:0], sd_i};
        if (act) begin
          if (b == wlen_m1_i) begin
            valid_o <= 1'b1;
            data_o  <= sh & ((32'd2 << wlen_m1_i) - 32'd1);
            dev_o   <= DSP ? w[4:1] : w[3:0];
            ch_o    <= DSP ? w[0] : chn;
            b = '0;
            if (w == wps_m1) begin
              act = 1'b0; w = '0;
            end else begin
              w = w + 5'd1;
            end
          end else begin
            b = b + 5'd1;
          end
        end
        if (edge_det && align_i) begin
          act = 1'b1; b = '0; w = '0; chn = ws_i;
        end
        active_q <= act;
        bitc_q   <= b;
        wordc_q  <= w;
        ch_q     <= chn;
        sh_q     <= sh;
      end
    end
  end
endmodule
