// fft_bfly_unit: the Butterfly Unit of the FFT HWPE.
//
// Four lanes feed four engines of different width: lane 0 the C64 engine
// (32-bit parts), lane 1 the C32 engine (16-bit), lanes 2 and 3 the two C16
// engines (8-bit).  With C64 data only lane 0 works (1 butterfly/cycle), with
// C32 lanes 0-1 (2/cycle), with C16 all four (4/cycle): wider engines take
// narrower samples sign-extended; their results are then saturated to the
// data type's width, which makes them equal to a narrow engine's.  Operands and results travel as 32-bit
// sign-extended complex values; the twiddle of each lane comes from the
// twiddle LUT already in the data type's format.  Combinational.
// The engine mix and the 1/2/4 rates follow the paper.
module fft_bfly_unit
  import echoes_pkg::*;
(
  input  fft_dtype_e dtype_i,
  input  cplx_t      a_i [4],
  input  cplx_t      b_i [4],
  input  cplx_t      w_i [4],
  output cplx_t      x_o [4],   // a + W b (scaled by 1/2)
  output cplx_t      y_o [4]    // a - W b (scaled by 1/2)
);
  logic [4:0] shift;
  cplx_t      xe [4], ye [4];    // engine results before the type's saturation

  function automatic logic [31:0] satw(logic signed [31:0] v, fft_dtype_e dt);
    case (dt)
      DT_C64:  return v;
      DT_C32:  return v > 32'sd32767 ? 32'sd32767 : v < -32'sd32768 ? -32'sd32768 : v;
      default: return v > 32'sd127 ? 32'sd127 : v < -32'sd128 ? -32'sd128 : v;
    endcase
  endfunction

  always_comb begin
    for (int l = 0; l < 4; l++) begin
      x_o[l] = '{re: satw(xe[l].re, dtype_i), im: satw(xe[l].im, dtype_i)};
      y_o[l] = '{re: satw(ye[l].re, dtype_i), im: satw(ye[l].im, dtype_i)};
    end
  end

  always_comb begin
    case (dtype_i)
      DT_C64:  shift = 5'd30;
      DT_C32:  shift = 5'd14;
      default: shift = 5'd6;
    endcase
  end

  // lane 0: C64 engine
  fft_bfly_engine #(.DW(32)) i_c64 (
    .a_re_i(a_i[0].re), .a_im_i(a_i[0].im), .b_re_i(b_i[0].re), .b_im_i(b_i[0].im),
    .w_re_i(w_i[0].re), .w_im_i(w_i[0].im), .shift_i(shift),
    .x_re_o(xe[0].re), .x_im_o(xe[0].im), .y_re_o(ye[0].re), .y_im_o(ye[0].im));

  // lane 1: C32 engine
  logic signed [15:0] c32_xr, c32_xi, c32_yr, c32_yi;
  fft_bfly_engine #(.DW(16)) i_c32 (
    .a_re_i(a_i[1].re[15:0]), .a_im_i(a_i[1].im[15:0]),
    .b_re_i(b_i[1].re[15:0]), .b_im_i(b_i[1].im[15:0]),
    .w_re_i(w_i[1].re[15:0]), .w_im_i(w_i[1].im[15:0]), .shift_i(shift),
    .x_re_o(c32_xr), .x_im_o(c32_xi), .y_re_o(c32_yr), .y_im_o(c32_yi));
  assign xe[1] = '{re: 32'(c32_xr), im: 32'(c32_xi)};
  assign ye[1] = '{re: 32'(c32_yr), im: 32'(c32_yi)};

  // lanes 2, 3: C16 engines
  for (genvar l = 2; l < 4; l++) begin : g_c16
    logic signed [7:0] xr, xi, yr, yi;
    fft_bfly_engine #(.DW(8)) i_c16 (
      .a_re_i(a_i[l].re[7:0]), .a_im_i(a_i[l].im[7:0]),
      .b_re_i(b_i[l].re[7:0]), .b_im_i(b_i[l].im[7:0]),
      .w_re_i(w_i[l].re[7:0]), .w_im_i(w_i[l].im[7:0]), .shift_i(shift),
      .x_re_o(xr), .x_im_o(xi), .y_re_o(yr), .y_im_o(yi));
    assign xe[l] = '{re: 32'(xr), im: 32'(xi)};
    assign ye[l] = '{re: 32'(yr), im: 32'(yi)};
  end
endmodule
