// i2s_tx_core: serial transmitter for standard/TDM I2S (DSP = 0) or TDM
// DSP mode (DSP = 1).
//
// It follows the same frame structure as i2s_rx_core: FSYNC edges, watched on
// the sample strobe, mark where the next word 0 begins (with align = 1 one
// bit after the edge, with align = 0 at the edge itself).  A bit counter that
// wraps after the K (I2S) or 2K (DSP) words of a frame predicts the bit to
// send, and on each drive strobe the transmitter puts that bit on SD, MSB
// first.  At the first bit of every word it takes a word from the input
// stream (ready_o pulses; the word is used when valid_i is high, otherwise
// zeros go out and underrun_o pulses).  Word order on the stream equals slot
// order on the line: I2S L0..L{K-1}, R0..R{K-1}; DSP L0, R0, L1, R1, ...
// With align = 0 the first word is only sent once a whole frame has been seen.
// The drive edge follows the paper (data change on falling BCLK); the stream
// interface and underrun handling are this design's choice.
module i2s_tx_core #(
  parameter bit DSP = 1'b0
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        en_i,
  input  logic        smp_i,
  input  logic        drv_i,
  input  logic        ws_i,
  input  logic        align_i,
  input  logic [4:0]  wlen_m1_i,
  input  logic [3:0]  ndev_m1_i,
  input  logic [31:0] data_i,
  input  logic        valid_i,
  output logic        ready_o,
  output logic        sd_o,
  output logic        underrun_o
);
  logic        ws_q, active_q;
  logic [4:0]  bitc_q, wordc_q;      // position of the bit to send next
  logic [31:0] sh_q;
  logic [4:0]  wps_m1;
  logic        edge_det;

  assign wps_m1   = DSP ? {ndev_m1_i, 1'b1} : {1'b0, ndev_m1_i};
  assign edge_det = DSP ? (ws_i && !ws_q) : (ws_i != ws_q);
  assign ready_o  = en_i && drv_i && active_q && bitc_q == 5'd0;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ws_q       <= 1'b0;
      active_q   <= 1'b0;
      bitc_q     <= '0;
      wordc_q    <= '0;
      sh_q       <= '0;
      sd_o       <= 1'b0;
      underrun_o <= 1'b0;
    end else begin
      underrun_o <= 1'b0;
      if (!en_i) begin
        ws_q     <= ws_i;
        active_q <= 1'b0;
        sd_o     <= 1'b0;
      end else begin
        if (smp_i) begin
          ws_q <= ws_i;
          if (edge_det) begin
            active_q <= 1'b1;
            wordc_q  <= '0;
            bitc_q   <= align_i ? 5'd0 : ((wlen_m1_i == 5'd0) ? 5'd0 : 5'd1);
            if (!align_i && wlen_m1_i == 5'd0) wordc_q <= 5'd1;
          end else if (active_q) begin
            if (bitc_q == wlen_m1_i) begin
              bitc_q  <= '0;
              wordc_q <= (wordc_q == wps_m1) ? 5'd0 : wordc_q + 5'd1;
            end else begin
              bitc_q  <= bitc_q + 5'd1;
            end
          end
        end
        if (drv_i && active_q) begin
          if (bitc_q == 5'd0) begin
            logic [31:0] al;
            al = (valid_i ? data_i : 32'd0) << (5'd31 - wlen_m1_i);
            sd_o       <= al[31];
            sh_q       <= al << 1;
            underrun_o <= !valid_i;
          end else begin
            sd_o <= sh_q[31];
            sh_q <= sh_q << 1;
          end
        end
      end
    end
  end
endmodule
