// fft_scatter: unpacks left/right butterfly wings into lane operands.
//
// One butterfly sub-step consumes the words of two read ports: wl_i holds the
// two left-wing words (samples x[i]) and wr_i the two right-wing words
// (samples x[i+N/2]).  Depending on the data type they carry 1, 2 or 4
// samples per wing, which become the a (left) and b (right) operands of lanes
// 0..3, sign-extended to 32 bits.  Sample packing: C64 = real word then
// imaginary word; C32 = {im[15:0], re[15:0]}; C16 = {im[7:0], re[7:0]} per
// half word, lower half first.  Unused lanes read zero.  Combinational.
// The packing is this design's choice; the paper names the Scatter stage.
module fft_scatter
  import echoes_pkg::*;
(
  input  fft_dtype_e  dtype_i,
  input  logic [31:0] wl_i [2],
  input  logic [31:0] wr_i [2],
  output cplx_t       a_o  [4],
  output cplx_t       b_o  [4]
);
  function automatic cplx_t unpack16(logic [31:0] w);
    return '{re: 32'(signed'(w[15:0])), im: 32'(signed'(w[31:16]))};
  endfunction

  function automatic cplx_t unpack8(logic [15:0] h);
    return '{re: 32'(signed'(h[7:0])), im: 32'(signed'(h[15:8]))};
  endfunction

  always_comb begin
    for (int l = 0; l < 4; l++) begin
      a_o[l] = '0;
      b_o[l] = '0;
    end
    case (dtype_i)
      DT_C64: begin
        a_o[0] = '{re: wl_i[0], im: wl_i[1]};
        b_o[0] = '{re: wr_i[0], im: wr_i[1]};
      end
      DT_C32: begin
        for (int l = 0; l < 2; l++) begin
          a_o[l] = unpack16(wl_i[l]);
          b_o[l] = unpack16(wr_i[l]);
        end
      end
      default: begin
        for (int l = 0; l < 4; l++) begin
          a_o[l] = unpack8(wl_i[l/2][16*(l%2) +: 16]);
          b_o[l] = unpack8(wr_i[l/2][16*(l%2) +: 16]);
        end
      end
    endcase
  end
endmodule
