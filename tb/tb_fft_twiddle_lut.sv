// tb_fft_twiddle_lut: self-checking test of the twiddle-factor LUT.
//
// For every one of the 1024 indices and all three data types the outputs are
// compared with W = exp(-j*2*pi*k/2048) computed in double precision and
// rounded to Q2.30 (C64), Q2.14 (C32) or Q2.6 (C16).  The table stores a
// quarter wave, so one LSB of difference from the double rounding is
// allowed.  The four lanes get different random indices.
`timescale 1ns/1ps
module tb_fft_twiddle_lut;
  import echoes_pkg::*;

  fft_dtype_e dt;
  logic [9:0] idx [4];
  cplx_t      tw  [4];
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  fft_twiddle_lut #(.NL(4)) dut (.dtype_i(dt), .idx_i(idx), .tw_o(tw));

  function automatic longint rnd(real v);
    return v >= 0 ? longint'(v + 0.5) - ((v + 0.5) - real'(longint'(v + 0.5)) < 0 ? 1 : 0)
                  : -rnd(-v);
  endfunction

  initial begin
    for (int t = 0; t < 3; t++) begin
      dt = fft_dtype_e'(t);
      for (int k = 0; k < 1024; k++) begin
        int fb;
        fb = t == 0 ? 30 : t == 1 ? 14 : 6;
        idx[0] = 10'(k);
        for (int l = 1; l < 4; l++) idx[l] = 10'($urandom);
        #1;
        for (int l = 0; l < 4; l++) begin
          real ang, sc;
          longint er, ei, gr, gi;
          ang = 2.0 * 3.14159265358979323846 * real'(idx[l]) / 2048.0;
          sc  = real'(64'd1 << fb);
          er  = rnd($cos(ang) * sc);
          ei  = rnd(-$sin(ang) * sc);
          gr  = longint'(tw[l].re); gi = longint'(tw[l].im);
          checks++;
          if (gr - er > 1 || er - gr > 1 || gi - ei > 1 || ei - gi > 1) begin
            failures++;
            if (failures < 10) $display("FAIL: dt %0d k %0d got (%0d,%0d) want (%0d,%0d)", t, idx[l], gr, gi, er, ei);
          end
        end
      end
    end
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
