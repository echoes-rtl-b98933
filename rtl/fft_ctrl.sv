// fft_ctrl: controller and register file of the FFT HWPE.
//
// The core programs, over APB, the input address (ADDR, 16-byte aligned),
// the number of points as log2 (LOG2N), the data type (DTYPE: 0 C64, 1 C32,
// 2 C16) and then writes 1 to CTRL to start.  Register map (byte offsets):
// 0x00 CTRL (w: bit0 start), 0x04 STATUS (r: bit0 busy, bit1 done, bit2
// error), 0x08 ADDR, 0x0C LOG2N, 0x10 DTYPE, 0x14 RESULT (r: address of the
// transform).  Sizes outside 4..512 (C64), 8..1024 (C32), 16..2048 (C16)
// raise error instead of starting.
// The FFT runs log2(N) stages; stage s reads one buffer and writes the other
// (the input buffer and a scratch buffer of N samples right after it).  Each
// stage consists of N/(2B) sub-steps of B butterflies (B = 1/2/4 for
// C64/C32/C16).  Sub-step j uses read ports 2(j mod 2) and 2(j mod 2)+1 and
// fires when those ports hold their left and right wing words and every write
// queue has room.  Lane l of sub-step j computes butterfly i = jB + l with
// twiddle index bitrev10(i mod 2^s), i.e. W_N^(bitrev_s(i mod 2^s) * N/2^(s+1)).
// A stage ends when all sub-steps fired and all writes were granted.  A
// one-cycle pulse on evt_o signals completion.
// What the core programs follows the paper; the register map and the
// constant-geometry stage schedule are this design's choice.
module fft_ctrl
  import echoes_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  apb_req_t    apb_req_i,
  output apb_rsp_t    apb_rsp_o,
  output logic        evt_o,
  // datapath status
  input  logic        avail_i [4],
  input  logic [1:0]  ocnt_i  [4],
  // datapath control
  output logic        stage_start_o,
  output logic        run_o,
  output fft_dtype_e  dtype_o,
  output logic [3:0]  log2n_o,
  output logic        last_o,
  output logic [31:0] src_o,
  output logic [31:0] dst_o,
  output logic [31:0] half_bytes_o,
  output logic [10:0] ngroups_o,
  output logic        fire_o,
  output logic        sub_o,            // sub-step parity: uses ports 2*sub_o, 2*sub_o+1
  output logic        pop_o   [4],
  output logic [10:0] obase_o,
  output logic [9:0]  tw_idx_o [4]
);
  typedef enum logic [1:0] {S_IDLE, S_RUN} state_e;

  state_e      state_q;
  logic [31:0] addr_q;
  logic [3:0]  log2n_q;
  fft_dtype_e  dtype_q;
  logic        done_q, err_q, evt_q, start_q;
  logic [3:0]  stage_q;
  logic [10:0] sub_q;

  // ----------------------------------------------------------- derived
  logic [1:0]  log2b;
  logic [31:0] nbytes;
  logic [10:0] total;
  logic        cfg_ok;
  logic [3:0]  wr_log2n;
  logic [1:0]  wr_dtype;

  always_comb begin
    case (dtype_q)
      DT_C64:  log2b = 2'd0;
      DT_C32:  log2b = 2'd1;
      default: log2b = 2'd2;
    endcase
    nbytes       = 32'(fft_sample_bytes(dtype_q)) << log2n_q;
    total        = 11'((32'd1 << log2n_q) >> (32'd1 + 32'(log2b)));
    half_bytes_o = nbytes >> 1;
    ngroups_o    = total >> 1;
    src_o        = stage_q[0] ? addr_q + nbytes : addr_q;
    dst_o        = stage_q[0] ? addr_q : addr_q + nbytes;
    last_o       = stage_q == log2n_q - 4'd1;
    dtype_o      = dtype_q;
    log2n_o      = log2n_q;
    cfg_ok       = (log2n_q <= fft_log2n_max(dtype_q))
                && (log2n_q >= 4'd2 + 4'(log2b))
                && (dtype_q inside {DT_C64, DT_C32, DT_C16});
  end

  // ------------------------------------------------------- sub-step issue
  logic       outroom;
  logic [1:0] push_n;
  always_comb begin
    push_n = (last_o && dtype_q == DT_C16) ? 2'd2 : 2'd1;
    outroom  = 1'b1;
    for (int p = 0; p < 4; p++)
      if (3'(ocnt_i[p]) + 3'(push_n) > 3'd2) outroom = 1'b0;
    run_o         = (state_q == S_RUN) && !start_q;
    stage_start_o = start_q;
    sub_o         = sub_q[0];
    fire_o        = run_o && (sub_q < total) && outroom
                 && avail_i[{sub_q[0], 1'b0}] && avail_i[{sub_q[0], 1'b1}];
    for (int p = 0; p < 4; p++) pop_o[p] = fire_o && (p / 2 == int'(sub_q[0]));
    obase_o = sub_q << (log2b + 2'd1);
    for (int l = 0; l < 4; l++) begin
      logic [10:0] i;
      logic [10:0] m;
      i = (sub_q << log2b) + 11'(l);
      m = i & ((11'd1 << stage_q) - 11'd1);
      for (int b = 0; b < 10; b++) tw_idx_o[l][b] = m[9 - b];
    end
  end

  // ---------------------------------------------------------------- APB
  logic apb_wr;
  assign apb_wr = apb_req_i.psel && apb_req_i.penable && apb_req_i.pwrite;
  assign wr_log2n = apb_req_i.pwdata[3:0];
  assign wr_dtype = apb_req_i.pwdata[1:0];

  always_comb begin
    apb_rsp_o = '{prdata: '0, pready: 1'b1, pslverr: 1'b0};
    case (apb_req_i.paddr[7:0])
      8'h04: apb_rsp_o.prdata = {29'd0, err_q, done_q, state_q != S_IDLE};
      8'h08: apb_rsp_o.prdata = addr_q;
      8'h0C: apb_rsp_o.prdata = 32'(log2n_q);
      8'h10: apb_rsp_o.prdata = 32'(dtype_q);
      8'h14: apb_rsp_o.prdata = log2n_q[0] ? addr_q + nbytes : addr_q;
      default: ;
    endcase
  end

  // ---------------------------------------------------------------- FSM
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      addr_q  <= '0;
      log2n_q <= 4'd9;
      dtype_q <= DT_C64;
      done_q  <= 1'b0;
      err_q   <= 1'b0;
      evt_q   <= 1'b0;
      start_q <= 1'b0;
      stage_q <= '0;
      sub_q   <= '0;
    end else begin
      evt_q   <= 1'b0;
      start_q <= 1'b0;
      if (state_q == S_IDLE && apb_wr) begin
        case (apb_req_i.paddr[7:0])
          8'h08: addr_q  <= {apb_req_i.pwdata[31:4], 4'h0};
          8'h0C: log2n_q <= wr_log2n;
          8'h10: dtype_q <= fft_dtype_e'(wr_dtype);
          8'h00: if (apb_req_i.pwdata[0]) begin
            done_q <= 1'b0;
            if (cfg_ok) begin
              err_q   <= 1'b0;
              state_q <= S_RUN;
              stage_q <= '0;
              sub_q   <= '0;
              start_q <= 1'b1;
            end else begin
              err_q   <= 1'b1;
            end
          end
          default: ;
        endcase
      end
      if (state_q == S_RUN) begin
        if (fire_o) sub_q <= sub_q + 11'd1;
        if (run_o && sub_q == total && ocnt_i[0] == 2'd0 && ocnt_i[1] == 2'd0
            && ocnt_i[2] == 2'd0 && ocnt_i[3] == 2'd0) begin
          if (last_o) begin
            state_q <= S_IDLE;
            done_q  <= 1'b1;
            evt_q   <= 1'b1;
          end else begin
            stage_q <= stage_q + 4'd1;
            sub_q   <= '0;
            start_q <= 1'b1;
          end
        end
      end
    end
  end

  assign evt_o = evt_q;
endmodule
