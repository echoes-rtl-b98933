// fft_gather: packs butterfly results into write-port entries.
//
// Lane l of a sub-step produces the output samples y[2i] = x_i[l] and
// y[2i+1] = y_i[l]; the 2B samples of one sub-step are consecutive, starting
// at sample index obase_i, and fill exactly one 128-bit beat.  In every stage
// but the last, write port p gets word p of that beat, at byte address
// dst_i + obase_i*bytes_per_sample + 4p with full byte enables.  In the last stage
// each sample goes to its bit-reversed position bitrev_L(o) so that the
// result ends in natural order: C64 samples take two ports (real, imaginary),
// C32 samples one port each, and the eight C16 samples take two entries per
// port, each a half-word write with byte enables (nent_o = 2).  Values are
// saturated to the data type's width.  Combinational.
// The final bit-reversed reordering follows the paper; the packing and the
// saturation are this design's choice.
module fft_gather
  import echoes_pkg::*;
(
  input  fft_dtype_e  dtype_i,
  input  logic        last_i,         // last stage: bit-reversed addresses
  input  logic [3:0]  log2n_i,
  input  logic [31:0] dst_i,          // destination buffer (byte address)
  input  logic [10:0] obase_i,        // index of the first output sample
  input  cplx_t       x_i [4],
  input  cplx_t       y_i [4],
  output fft_wr_t     ent_o [4][2],   // [port][entry]
  output logic [1:0]  nent_o          // entries per port (1 or 2)
);
  function automatic logic [15:0] sat16(logic signed [31:0] v);
    if (v > 32'sd32767)       return 16'h7fff;
    else if (v < -32'sd32768) return 16'h8000;
    else                      return v[15:0];
  endfunction

  function automatic logic [7:0] sat8(logic signed [31:0] v);
    if (v > 32'sd127)       return 8'h7f;
    else if (v < -32'sd128) return 8'h80;
    else                    return v[7:0];
  endfunction

  function automatic logic [10:0] bitrev(logic [10:0] o, logic [3:0] l2n);
    logic [10:0] r;
    for (int b = 0; b < 11; b++) r[b] = o[10 - b];
    return r >> (4'd11 - l2n);
  endfunction

  cplx_t smp [8];    // output samples of this sub-step, in order

  always_comb begin
    for (int l = 0; l < 4; l++) begin
      smp[2*l]   = x_i[l];
      smp[2*l+1] = y_i[l];
    end
  end

  always_comb begin
    logic [31:0] word [4];
    logic [31:0] beat;
    for (int p = 0; p < 4; p++) begin
      ent_o[p][0] = '0;
      ent_o[p][1] = '0;
      word[p]     = '0;
    end
    nent_o = 2'd1;
    beat   = '0;
    case (dtype_i)
      DT_C64: begin
        word[0] = smp[0].re; word[1] = smp[0].im;
        word[2] = smp[1].re; word[3] = smp[1].im;
        beat    = dst_i + (32'(obase_i) << 3);
        if (last_i)
          for (int p = 0; p < 4; p++)
            ent_o[p][0] = '{addr: dst_i + (32'(bitrev(obase_i + 11'(p/2), log2n_i)) << 3) + 32'(4*(p%2)),
                            data: word[p], be: 4'hf};
      end
      DT_C32: begin
        for (int p = 0; p < 4; p++) word[p] = {sat16(smp[p].im), sat16(smp[p].re)};
        beat = dst_i + (32'(obase_i) << 2);
        if (last_i)
          for (int p = 0; p < 4; p++)
            ent_o[p][0] = '{addr: dst_i + (32'(bitrev(obase_i + 11'(p), log2n_i)) << 2),
                            data: word[p], be: 4'hf};
      end
      default: begin
        for (int p = 0; p < 4; p++)
          word[p] = {sat8(smp[2*p+1].im), sat8(smp[2*p+1].re), sat8(smp[2*p].im), sat8(smp[2*p].re)};
        beat = dst_i + (32'(obase_i) << 1);
        if (last_i) begin
          nent_o = 2'd2;
          for (int p = 0; p < 4; p++)
            for (int e = 0; e < 2; e++) begin
              logic [31:0] ba;
              logic [15:0] h;
              ba = dst_i + (32'(bitrev(obase_i + 11'(2*p + e), log2n_i)) << 1);
              h  = {sat8(smp[2*p+e].im), sat8(smp[2*p+e].re)};
              ent_o[p][e] = '{addr: {ba[31:2], 2'b00}, data: {h, h},
                              be: ba[1] ? 4'b1100 : 4'b0011};
            end
        end
      end
    endcase
    if (!last_i)
      for (int p = 0; p < 4; p++)
        ent_o[p][0] = '{addr: beat + 32'(4*p), data: word[p], be: 4'hf};
  end
endmodule
