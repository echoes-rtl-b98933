// fft_twiddle_lut: twiddle factors of the FFT HWPE.
//
// Returns W = exp(-j*2*pi*k/2048) for a 10-bit index k (0..1023) on NL
// independent read ports, one per butterfly lane, so that up to four
// butterflies with different twiddles run in the same cycle.  Only a quarter
// wave of cosine is stored (513 words, cos(2*pi*k/2048) * 2^30 rounded, in
// twiddle_qw.hex); the full half circle follows from cos(pi-x) = -cos(x) and
// sin(x) = cos(pi/2-x).  Each port delivers 2 x 32 bits, quantised for the
// data type in use: Q2.30 for C64, Q2.14 for C32, Q2.6 for C16 (round to
// nearest), so a twiddle of 1.0 is exact in every format.  Combinational.
// The paper fixes the 2048-point range and the 64-bit output; the quarter-wave
// storage and the formats are this design's choice.
module fft_twiddle_lut
  import echoes_pkg::*;
#(
  parameter int unsigned NL = 4
) (
  input  fft_dtype_e  dtype_i,
  input  logic [9:0]  idx_i [NL],
  output cplx_t       tw_o  [NL]
);
  logic [31:0] qw [513];

  initial $readmemh("rtl/twiddle_qw.hex", qw);

  function automatic logic signed [31:0] quant(logic signed [31:0] v, fft_dtype_e dt);
    logic signed [32:0] r;
    case (dt)
      DT_C64:  return v;
      DT_C32:  begin r = (33'(v) + 33'sd32768)    >>> 16; return 32'(r); end
      default: begin r = (33'(v) + 33'sd8388608)  >>> 24; return 32'(r); end
    endcase
  endfunction

  always_comb begin
    for (int l = 0; l < NL; l++) begin
      logic [9:0]         k;
      logic signed [31:0] c, s;
      k = idx_i[l];
      if (k <= 10'd512) begin
        c = qw[k];
        s = qw[10'd512 - k];
      end else begin
        c = -qw[10'(11'd1024 - 11'(k))];
        s = qw[k - 10'd512];
      end
      tw_o[l].re = quant(c, dtype_i);
      tw_o[l].im = quant(-s, dtype_i);
    end
  end
endmodule
