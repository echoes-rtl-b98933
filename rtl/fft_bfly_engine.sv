// fft_bfly_engine: one radix-2 decimation-in-time butterfly of width DW.
//
// Computes t = W*b, x = (a + t)/2 and y = (a - t)/2 for complex operands whose
// parts are DW-bit signed numbers; W is a Q2.(shift) fixed-point twiddle.  The
// product is rounded to nearest after the shift, the halving floors, and the
// results saturate to DW bits.  Because operands of a narrower type are just
// sign-extended, a wide engine given the narrow type's shift computes the
// same value as a narrow engine up to the final saturation, which the
// butterfly unit applies at the narrow width: that is how the C64 and C32
// engines are reused for C32 and C16 data.  Purely combinational.
// The DIT butterfly and the reuse of wider engines follow the paper; the
// scaling by 1/2, rounding and saturation are this design's choice.
module fft_bfly_engine #(
  parameter int unsigned DW = 32
) (
  input  logic signed [DW-1:0] a_re_i, a_im_i,
  input  logic signed [DW-1:0] b_re_i, b_im_i,
  input  logic signed [DW-1:0] w_re_i, w_im_i,
  input  logic        [4:0]    shift_i,          // fractional bits of W
  output logic signed [DW-1:0] x_re_o, x_im_o,   // (a + W b) / 2
  output logic signed [DW-1:0] y_re_o, y_im_o    // (a - W b) / 2
);
  localparam int unsigned PW = 2 * DW + 2;

  function automatic logic signed [DW-1:0] sat(logic signed [PW-1:0] v);
    logic signed [PW-1:0] hi, lo;
    hi = (PW'(1) <<< (DW - 1)) - PW'(1);
    lo = -(PW'(1) <<< (DW - 1));
    if (v > hi)      return DW'(hi);
    else if (v < lo) return DW'(lo);
    else             return DW'(v);
  endfunction

  logic signed [PW-1:0] p_re, p_im, rnd, t_re, t_im;

  always_comb begin
    rnd  = PW'(1) <<< (shift_i - 5'd1);
    p_re = PW'(b_re_i) * PW'(w_re_i) - PW'(b_im_i) * PW'(w_im_i);
    p_im = PW'(b_re_i) * PW'(w_im_i) + PW'(b_im_i) * PW'(w_re_i);
    t_re = (p_re + rnd) >>> shift_i;
    t_im = (p_im + rnd) >>> shift_i;
    x_re_o = sat((PW'(a_re_i) + t_re) >>> 1);
    x_im_o = sat((PW'(a_im_i) + t_im) >>> 1);
    y_re_o = sat((PW'(a_re_i) - t_re) >>> 1);
    y_im_o = sat((PW'(a_im_i) - t_im) >>> 1);
  end
endmodule
