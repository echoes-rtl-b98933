// fft_hwpe: radix-2 decimation-in-time FFT Hardware Processing Engine.
//
// The accelerator has no sample memory of its own: it works on data in the
// shared L2 through four 32-bit read ports (tcdm_req_o[0..3]) and four 32-bit
// write ports (tcdm_req_o[4..7]), i.e. 128 bits in and 128 bits out per
// cycle.  Data are fixed-point complex numbers with 32/16/8-bit parts (C64,
// C32, C16), up to 512/1024/2048 points.
// Dataflow per stage (constant-geometry form of the radix-2 DIT FFT):
//   streamer -> butterfly input registers -> scatter -> butterfly unit
//   (+ twiddle LUT) -> gather -> butterfly output registers -> streamer.
// Butterfly i reads x[i] and x[i+N/2] and writes y[2i], y[2i+1]; reads and
// writes are runs of consecutive words, so the four ports always touch four
// different banks.  The last stage writes each sample to its bit-reversed
// position, leaving the transform in natural order; only there can the write
// ports collide in a bank, which the interconnect resolves by stalling a port
// for a cycle.  Stages alternate between the input buffer and a scratch
// buffer of equal size placed right after it; RESULT tells where the
// transform ended (input buffer when log2 N is even).  Outputs are scaled by
// 1/N.  Throughput: B = 1/2/4 butterflies per cycle for C64/C32/C16 once the
// pipeline is full (the last C16 stage runs at half rate because of its
// half-word writes).
// Programming: see fft_ctrl.  The ports, data types, sizes, engine mix and
// the final bit-reversal follow the paper; the reordering scheme is a
// simplified, constant-geometry stand-in for the one the paper cites.
module fft_hwpe
  import echoes_pkg::*;
(
  input  logic      clk_i,
  input  logic      rst_ni,
  output tcdm_req_t tcdm_req_o [8],
  input  tcdm_rsp_t tcdm_rsp_i [8],
  input  apb_req_t  apb_req_i,
  output apb_rsp_t  apb_rsp_o,
  output logic      evt_o
);
  fft_dtype_e  dtype;
  logic [3:0]  log2n;
  logic        last, stage_start, run, fire, sub;
  logic [31:0] src, dst, half_bytes;
  logic [10:0] ngroups, obase;
  logic [1:0]  nent;
  logic [9:0]  tw_idx [4];
  logic        pop [4], pend [4], avail [4], in_free [4], rvalid [4], wvalid [4], wgnt [4];
  logic [31:0] rdata [4], wl [4], wr [4];
  logic [1:0]  ocnt [4];
  fft_wr_t     whead [4];
  fft_wr_t     ent [4][2];
  tcdm_req_t   rd_req [4], wr_req [4];
  tcdm_rsp_t   rd_rsp [4], wr_rsp [4];

  for (genvar p = 0; p < 4; p++) begin : g_ports
    assign tcdm_req_o[p]     = rd_req[p];
    assign tcdm_req_o[4 + p] = wr_req[p];
    assign rd_rsp[p]         = tcdm_rsp_i[p];
    assign wr_rsp[p]         = tcdm_rsp_i[4 + p];
  end

  fft_ctrl i_ctrl (
    .clk_i, .rst_ni, .apb_req_i, .apb_rsp_o, .evt_o,
    .avail_i(avail), .ocnt_i(ocnt),
    .stage_start_o(stage_start), .run_o(run), .dtype_o(dtype), .log2n_o(log2n),
    .last_o(last), .src_o(src), .dst_o(dst), .half_bytes_o(half_bytes),
    .ngroups_o(ngroups), .fire_o(fire), .sub_o(sub), .pop_o(pop),
    .obase_o(obase), .tw_idx_o(tw_idx));

  fft_streamer i_streamer (
    .clk_i, .rst_ni, .stage_start_i(stage_start), .run_i(run), .src_i(src),
    .half_bytes_i(half_bytes), .ngroups_i(ngroups), .in_free_i(in_free),
    .rd_req_o(rd_req), .rd_rsp_i(rd_rsp), .pend_o(pend), .rvalid_o(rvalid), .rdata_o(rdata),
    .wvalid_i(wvalid), .whead_i(whead), .wr_req_o(wr_req), .wr_rsp_i(wr_rsp),
    .wgnt_o(wgnt));

  fft_bfly_regs i_regs (
    .clk_i, .rst_ni, .pend_i(pend), .rvalid_i(rvalid), .rdata_i(rdata), .pop_i(pop),
    .avail_o(avail), .wl_o(wl), .wr_o(wr), .in_free_o(in_free),
    .push_n_i(fire ? nent : 2'd0), .push_ent_i(ent), .wgnt_i(wgnt),
    .wvalid_o(wvalid), .whead_o(whead), .ocnt_o(ocnt));

  // wings of the two ports used by this sub-step
  logic [31:0] sel_wl [2], sel_wr [2];
  cplx_t       a [4], b [4], w [4], x [4], y [4];

  always_comb begin
    for (int q = 0; q < 2; q++) begin
      sel_wl[q] = wl[2 * int'(sub) + q];
      sel_wr[q] = wr[2 * int'(sub) + q];
    end
  end

  fft_scatter i_scatter (.dtype_i(dtype), .wl_i(sel_wl), .wr_i(sel_wr), .a_o(a), .b_o(b));

  fft_twiddle_lut i_lut (.dtype_i(dtype), .idx_i(tw_idx), .tw_o(w));

  fft_bfly_unit i_bu (.dtype_i(dtype), .a_i(a), .b_i(b), .w_i(w), .x_o(x), .y_o(y));

  fft_gather i_gather (
    .dtype_i(dtype), .last_i(last), .log2n_i(log2n), .dst_i(dst), .obase_i(obase),
    .x_i(x), .y_i(y), .ent_o(ent), .nent_o(nent));
endmodule
