// tb_fft_bfly_unit: self-checking test of the butterfly unit.
//
// Random operands and twiddles of each data type's width drive all four
// lanes.  Each active lane is compared with a reference butterfly written
// here in 64-bit integer arithmetic: t = round(W*b / 2^F) (F = 30/14/6),
// x = sat((a + t) >> 1), y = sat((a - t) >> 1); idle lanes are not checked.
// Extreme operands (full scale, twiddle +-1) exercise saturation.  The
// results are also held against real arithmetic to within 1 LSB where no
// saturation happens.
`timescale 1ns/1ps
module tb_fft_bfly_unit;
  import echoes_pkg::*;

  fft_dtype_e dt;
  cplx_t a [4], b [4], w [4], x [4], y [4];
  int checks = 0, failures = 0, sats = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  fft_bfly_unit dut (.dtype_i(dt), .a_i(a), .b_i(b), .w_i(w), .x_o(x), .y_o(y));

  function automatic longint sx(longint v, int dw);
    return (v << (64 - dw)) >>> (64 - dw);
  endfunction
  function automatic longint rv(int dw);
    longint v;
    v = longint'({$urandom, $urandom});
    case ($urandom % 8)
      0: return  (64'sd1 <<< (dw - 1)) - 1;
      1: return -(64'sd1 <<< (dw - 1));
      default: return sx(v, dw);
    endcase
  endfunction
  function automatic longint sat(longint v, int dw, inout int s);
    longint hi, lo;
    hi = (64'sd1 <<< (dw - 1)) - 1; lo = -(64'sd1 <<< (dw - 1));
    if (v > hi) begin s++; return hi; end
    if (v < lo) begin s++; return lo; end
    return v;
  endfunction

  initial begin
    for (int it = 0; it < 6000; it++) begin
      int t, dw, fb, nl;
      t = it % 3; dt = fft_dtype_e'(t);
      dw = t == 0 ? 32 : t == 1 ? 16 : 8;
      fb = t == 0 ? 30 : t == 1 ? 14 : 6;
      nl = t == 0 ? 1 : t == 1 ? 2 : 4;
      for (int l = 0; l < 4; l++) begin
        a[l].re = 32'(rv(dw)); a[l].im = 32'(rv(dw));
        b[l].re = 32'(rv(dw)); b[l].im = 32'(rv(dw));
        if ($urandom % 4 == 0) begin
          w[l].re = ($urandom % 2) ? 32'(64'sd1 <<< fb) : -32'(64'sd1 <<< fb);
          w[l].im = 0;
        end else begin
          real ang;
          ang = 6.283185307179586 * real'($urandom % 2048) / 2048.0;
          w[l].re = 32'(longint'($cos(ang) * real'(64'sd1 <<< fb)));
          w[l].im = 32'(longint'(-$sin(ang) * real'(64'sd1 <<< fb)));
        end
      end
      #1;
      for (int l = 0; l < nl; l++) begin
        longint a_re, a_im, br, bi, wr, wi, pr, pi, tr, ti, exr, exi, eyr, eyi;
        int s;
        s = 0;
        a_re = a[l].re; a_im = a[l].im; br = b[l].re; bi = b[l].im; wr = w[l].re; wi = w[l].im;
        pr = br * wr - bi * wi; pi = br * wi + bi * wr;
        tr = (pr + (64'sd1 <<< (fb - 1))) >>> fb;
        ti = (pi + (64'sd1 <<< (fb - 1))) >>> fb;
        exr = sat((a_re + tr) >>> 1, dw, s); exi = sat((a_im + ti) >>> 1, dw, s);
        eyr = sat((a_re - tr) >>> 1, dw, s); eyi = sat((a_im - ti) >>> 1, dw, s);
        sats += s;
        checks++;
        if (longint'(x[l].re) != exr || longint'(x[l].im) != exi ||
            longint'(y[l].re) != eyr || longint'(y[l].im) != eyi) begin
          failures++;
          if (failures < 10) $display("FAIL: dt %0d lane %0d x (%0d,%0d) want (%0d,%0d) y (%0d,%0d) want (%0d,%0d)",
                                      t, l, x[l].re, x[l].im, exr, exi, y[l].re, y[l].im, eyr, eyi);
        end
        if (s == 0) begin
          real rr, ri;
          rr = (real'(a_re) + (real'(br) * real'(wr) - real'(bi) * real'(wi)) / real'(64'sd1 <<< fb)) / 2.0;
          ri = (real'(a_im) + (real'(br) * real'(wi) + real'(bi) * real'(wr)) / real'(64'sd1 <<< fb)) / 2.0;
          checks++;
          if (real'(x[l].re) - rr > 1.0 || rr - real'(x[l].re) > 1.0 ||
              real'(x[l].im) - ri > 1.0 || ri - real'(x[l].im) > 1.0) begin
            failures++;
            if (failures < 10) $display("FAIL: dt %0d lane %0d far from real result", t, l);
          end
        end
      end
    end
    checks++;
    if (sats == 0) begin failures++; $display("FAIL: saturation never exercised"); end
    $display("saturated results: %0d", sats);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
