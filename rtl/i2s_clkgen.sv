// i2s_clkgen: BCLK generator of one I2S interface (clock divider).
//
// Divides the peripheral clock: BCLK toggles every div_i+1 clock cycles, so
// its period is 2*(div_i+1) clocks.  The peripheral logic does not run on
// BCLK itself; it uses rise_o and fall_o, one-cycle strobes asserted in the
// first clock cycle of the high and low BCLK phase.  Disabled, BCLK rests low.
// The divider follows the paper (BCLK made by scaling the peripheral clock);
// the strobe scheme is this design's choice.
module i2s_clkgen #(
  parameter int unsigned DIV_W = 16
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             en_i,
  input  logic [DIV_W-1:0] div_i,
  output logic             bclk_o,
  output logic             rise_o,
  output logic             fall_o
);
  logic [DIV_W-1:0] cnt_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cnt_q  <= '0;
      bclk_o <= 1'b0;
      rise_o <= 1'b0;
      fall_o <= 1'b0;
    end else if (!en_i) begin
      cnt_q  <= '0;
      bclk_o <= 1'b0;
      rise_o <= 1'b0;
      fall_o <= 1'b0;
    end else if (cnt_q >= div_i) begin
      cnt_q  <= '0;
      bclk_o <= ~bclk_o;
      rise_o <= ~bclk_o;
      fall_o <= bclk_o;
    end else begin
      cnt_q  <= cnt_q + 1'b1;
      rise_o <= 1'b0;
      fall_o <= 1'b0;
    end
  end
endmodule
