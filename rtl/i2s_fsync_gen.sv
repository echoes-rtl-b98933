// i2s_fsync_gen: FSYNC generator of one interface, for one protocol.
//
// A frame holds K devices x 2 channels x k bits (K = ndev_m1+1,
// k = wlen_m1+1).  The generator counts bit periods on the driving BCLK edge
// (drv_i strobe) and moves FSYNC on that edge:
//   DSP = 0 (standard / TDM I2S): FSYNC is low while the K left-channel words
//     go out and high for the K right-channel words (Fig. 2a of the paper).
//   DSP = 1 (TDM DSP mode): FSYNC is high for one bit period at the start of
//     every frame (Fig. 2b).
// While disabled the counter waits at the frame end, FSYNC rests high (I2S)
// or low (DSP), so the first frame starts with a clean edge.
// Frame structures follow the paper; the edge choice follows its rule that
// data change on the falling BCLK edge.
module i2s_fsync_gen #(
  parameter bit DSP = 1'b0
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  logic       en_i,
  input  logic       drv_i,
  input  logic [4:0] wlen_m1_i,
  input  logic [3:0] ndev_m1_i,
  output logic       fsync_o
);
  logic [9:0]  pos_q;
  logic [9:0]  half, last;

  assign half = 10'((32'(ndev_m1_i) + 1) * (32'(wlen_m1_i) + 1));
  assign last = 10'(2 * 32'(half) - 1);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pos_q   <= '1;
      fsync_o <= !DSP;
    end else if (!en_i) begin
      pos_q   <= '1;              // beyond any frame end: next bit is 0
      fsync_o <= !DSP;
    end else if (drv_i) begin
      logic [9:0] nxt;
      nxt   = (pos_q >= last) ? 10'd0 : pos_q + 10'd1;
      pos_q <= nxt;
      if (DSP) fsync_o <= (nxt == 10'd0);
      else     fsync_o <= (nxt >= half);
    end
  end
endmodule
