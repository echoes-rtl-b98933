// tb_fft_gather: self-checking test of the result packer.
//
// For random data types, sizes, destination buffers and output positions,
// the eight results x0,y0,x1,y1,... of one sub-step are applied and the write
// entries are compared with an independent model: inner stages write one
// 16-byte beat at dst + obase * sample_bytes, packed and saturated to the
// type; the last stage writes each sample to dst + bitrev(index) *
// sample_bytes (log2 N address bits reversed), C16 as two half-word writes
// per port with matching byte enables.
`timescale 1ns/1ps
module tb_fft_gather;
  import echoes_pkg::*;

  fft_dtype_e  dt;
  logic        last;
  logic [3:0]  l2n;
  logic [31:0] dst;
  logic [10:0] obase;
  cplx_t       x [4], y [4];
  fft_wr_t     ent [4][2];
  logic [1:0]  nent;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  fft_gather dut (.dtype_i(dt), .last_i(last), .log2n_i(l2n), .dst_i(dst), .obase_i(obase),
                  .x_i(x), .y_i(y), .ent_o(ent), .nent_o(nent));

  function automatic longint sat(longint v, int dw);
    longint hi;
    hi = (64'sd1 <<< (dw - 1)) - 1;
    return v > hi ? hi : v < -hi - 1 ? -hi - 1 : v;
  endfunction
  function automatic int brev(int v, int bits);
    int r = 0;
    for (int i = 0; i < bits; i++) if (v & (1 << i)) r |= 1 << (bits - 1 - i);
    return r;
  endfunction

  task automatic want(int p, int e, logic [31:0] a, logic [31:0] d, logic [3:0] be);
    checks++;
    if (ent[p][e].addr !== a || ent[p][e].be !== be || (ent[p][e].data & {{8{be[3]}}, {8{be[2]}}, {8{be[1]}}, {8{be[0]}}}) !==
        (d & {{8{be[3]}}, {8{be[2]}}, {8{be[1]}}, {8{be[0]}}})) begin
      failures++;
      if (failures < 10) $display("FAIL: dt %0d last %0d port %0d entry %0d got %h/%h/%b want %h/%h/%b",
                                  dt, last, p, e, ent[p][e].addr, ent[p][e].data, ent[p][e].be, a, d, be);
    end
  endtask

  initial begin
    for (int it = 0; it < 6000; it++) begin
      int t, n, bpc, ob, bytes, dw;
      longint s [8][2];
      t = it % 3; dt = fft_dtype_e'(t);
      bpc = t == 0 ? 1 : t == 1 ? 2 : 4;
      bytes = t == 0 ? 8 : t == 1 ? 4 : 2;
      dw = t == 0 ? 32 : t == 1 ? 16 : 8;
      l2n = 4'(3 + $urandom % (t == 0 ? 7 : t == 1 ? 8 : 9));
      n = 1 << l2n;
      ob = 2 * bpc * ($urandom % (n / (2 * bpc)));
      obase = 11'(ob);
      last = ($urandom % 2) == 1;
      dst = 32'h1C01_0000 + 32'(16 * ($urandom % 512));
      for (int l = 0; l < 4; l++) begin
        // values up to twice the type's range so that saturation matters
        x[l].re = 32'(sat(longint'($signed($urandom)) >>> (32 - dw), 32)) * (($urandom % 4 == 0) ? 2 : 1);
        x[l].im = 32'(longint'($signed($urandom)) >>> (32 - dw));
        y[l].re = 32'(longint'($signed($urandom)) >>> (32 - dw));
        y[l].im = 32'(longint'($signed($urandom)) >>> (32 - dw)) * (($urandom % 4 == 0) ? 2 : 1);
        if (t == 0) begin x[l].re = $urandom; y[l].im = $urandom; end
      end
      for (int l = 0; l < 4; l++) begin
        s[2*l][0] = sat(longint'(x[l].re), dw);   s[2*l][1] = sat(longint'(x[l].im), dw);
        s[2*l+1][0] = sat(longint'(y[l].re), dw); s[2*l+1][1] = sat(longint'(y[l].im), dw);
      end
      #1;
      checks++;
      if (nent !== ((last && t == 2) ? 2'd2 : 2'd1)) begin failures++; $display("FAIL: nent %0d", nent); end
      for (int p = 0; p < 4; p++) begin
        logic [31:0] d, a;
        if (!last) begin
          a = dst + 32'(ob * bytes) + 32'(4 * p);
          case (t)
            0: d = 32'(s[p/2][p%2]);
            1: d = {16'(s[p][1]), 16'(s[p][0])};
            default: d = {8'(s[2*p+1][1]), 8'(s[2*p+1][0]), 8'(s[2*p][1]), 8'(s[2*p][0])};
          endcase
          want(p, 0, a, d, 4'hf);
        end else begin
          case (t)
            0: want(p, 0, dst + 32'(8 * brev(ob + p/2, l2n) + 4 * (p % 2)), 32'(s[p/2][p%2]), 4'hf);
            1: want(p, 0, dst + 32'(4 * brev(ob + p, l2n)), {16'(s[p][1]), 16'(s[p][0])}, 4'hf);
            default:
              for (int e = 0; e < 2; e++) begin
                int ba;
                ba = 2 * brev(ob + 2 * p + e, l2n);
                want(p, e, dst + 32'(ba & ~3), {2{8'(s[2*p+e][1]), 8'(s[2*p+e][0])}},
                     (ba % 4 == 2) ? 4'b1100 : 4'b0011);
              end
          endcase
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
