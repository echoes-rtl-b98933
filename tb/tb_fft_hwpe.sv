// tb_fft_hwpe: self-checking test of the FFT HWPE on a behavioural memory.
//
// The memory answers the eight ports with the TCDM protocol (grant, then
// data one cycle later); in stall phases it withholds grants at random, and
// it also models bank conflicts between the HWPE's own ports (only one
// port per bank is granted per cycle, as in the 16-bank interleaved L2).
// Each run programs the HWPE over APB, fills the input with random samples,
// and compares every output bin with a double-precision DFT divided by N.
// Runs without stalls use a conflict-free memory, and their run time is
// checked against the
// butterflies-per-cycle rate: C64 1, C32 2, C16 4.
`timescale 1ns/1ps
module tb_fft_hwpe;
  import echoes_pkg::*;

  localparam int unsigned MEMW = 4096;          // 16 KiB behavioural memory
  localparam logic [31:0] BASE = 32'h1C01_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  tcdm_req_t req [8];
  tcdm_rsp_t rsp [8];
  apb_req_t  apb;
  apb_rsp_t  apb_rsp;
  logic      evt;

  fft_hwpe dut (.clk_i(clk), .rst_ni(rst_n), .tcdm_req_o(req), .tcdm_rsp_i(rsp),
                .apb_req_i(apb), .apb_rsp_o(apb_rsp), .evt_o(evt));

  int checks = 0, failures = 0;
  logic [31:0] mem [MEMW];
  bit   stall_en = 0;
  int   conflicts = 0;

  // ------------------------------------------------- behavioural memory
  logic        gnt_c [8];
  logic        rv_q  [8];
  logic [31:0] rd_q  [8];
  always_comb begin
    logic [15:0] used;
    used = '0;
    for (int p = 0; p < 8; p++) begin
      logic [3:0] bank;
      bank = req[p].addr[5:2];
      gnt_c[p] = req[p].req && !(stall_en && used[bank]);
      if (gnt_c[p]) used[bank] = 1'b1;
    end
  end
  logic rnd_ok [8];
  always_ff @(posedge clk) for (int p = 0; p < 8; p++) rnd_ok[p] <= !stall_en || ($urandom % 4 != 0);
  always_comb for (int p = 0; p < 8; p++) begin
    rsp[p].gnt    = gnt_c[p] && rnd_ok[p];
    rsp[p].rvalid = rv_q[p];
    rsp[p].rdata  = rd_q[p];
  end
  always_ff @(posedge clk) begin
    for (int p = 0; p < 8; p++) begin
      rv_q[p] <= rsp[p].gnt;
      if (req[p].req && !gnt_c[p]) conflicts <= conflicts + 1;
      if (rsp[p].gnt) begin
        int unsigned w;
        w = (req[p].addr - BASE) >> 2;
        if (w >= MEMW) begin
          failures++;
          $display("FAIL: port %0d address %h outside buffer", p, req[p].addr);
        end else if (req[p].we) begin
          for (int b = 0; b < 4; b++) if (req[p].be[b]) mem[w][8*b +: 8] <= req[p].wdata[8*b +: 8];
        end else rd_q[p] <= mem[w];
      end
    end
  end

  // --------------------------------------------------------------- APB
  task automatic apb_write(input logic [11:0] a, input logic [31:0] d);
    apb = '{psel: 1, penable: 0, pwrite: 1, paddr: a, pwdata: d};
    @(posedge clk);
    apb.penable = 1;
    @(posedge clk);
    apb = '0;
  endtask
  task automatic apb_read(input logic [11:0] a, output logic [31:0] d);
    apb = '{psel: 1, penable: 0, pwrite: 0, paddr: a, pwdata: 0};
    @(posedge clk);
    apb.penable = 1;
    #1 d = apb_rsp.prdata;
    @(posedge clk);
    apb = '0;
  endtask

  // ----------------------------------------------------- sample access
  function automatic int dw_of(int dt); return dt == 0 ? 32 : dt == 1 ? 16 : 8; endfunction

  task automatic put_sample(int dt, logic [31:0] addr, int idx, longint re, longint im);
    int unsigned w;
    case (dt)
      0: begin w = (addr - BASE) / 4 + 2 * idx; mem[w] = 32'(re); mem[w+1] = 32'(im); end
      1: begin w = (addr - BASE) / 4 + idx; mem[w] = {16'(im), 16'(re)}; end
      default: begin w = (addr - BASE) / 4 + idx / 2; mem[w][16*(idx%2) +: 16] = {8'(im), 8'(re)}; end
    endcase
  endtask

  task automatic get_sample(int dt, logic [31:0] addr, int idx, output longint re, output longint im);
    int unsigned w;
    case (dt)
      0: begin w = (addr - BASE) / 4 + 2 * idx; re = longint'(signed'(mem[w])); im = longint'(signed'(mem[w+1])); end
      1: begin w = (addr - BASE) / 4 + idx; re = longint'(signed'(mem[w][15:0])); im = longint'(signed'(mem[w][31:16])); end
      default: begin
        logic [15:0] h;
        w = (addr - BASE) / 4 + idx / 2;
        h = mem[w][16*(idx%2) +: 16];
        re = longint'(signed'(h[7:0])); im = longint'(signed'(h[15:8]));
      end
    endcase
  endtask

  function automatic real fabs(real v); return v < 0 ? -v : v; endfunction

  real xr [2048], xi [2048];
  int  runs_stalled = 0;

  task automatic run_fft(int dt, int l2n, bit stall, int amp_div);
    int n, dw, bpc, cyc, bound, errs;
    longint amp, re, im;
    logic [31:0] st, res;
    real tol, maxerr;
    n  = 1 << l2n;
    dw = dw_of(dt);
    bpc = 1 << dt;
    amp = (64'sd1 <<< (dw - 1)) / amp_div;
    for (int i = 0; i < MEMW; i++) mem[i] = $urandom;
    for (int i = 0; i < n; i++) begin
      re = longint'($urandom % (2 * amp + 1)) - amp;
      im = longint'($urandom % (2 * amp + 1)) - amp;
      xr[i] = real'(re); xi[i] = real'(im);
      put_sample(dt, BASE, i, re, im);
    end
    stall_en = stall;
    apb_write(12'h008, BASE);
    apb_write(12'h00C, 32'(l2n));
    apb_write(12'h010, 32'(dt));
    apb_write(12'h000, 32'd1);
    cyc = 0;
    while (!evt) begin @(posedge clk); cyc++; end
    stall_en = 0;
    apb_read(12'h004, st);
    apb_read(12'h014, res);
    checks++;
    if (st[2:0] != 3'b010) begin failures++; $display("FAIL: status %b", st[2:0]); end
    checks++;
    if (res != (l2n % 2 == 0 ? BASE : BASE + 32'(n * (dt == 0 ? 8 : dt == 1 ? 4 : 2)))) begin
      failures++; $display("FAIL: result address %h", res);
    end
    // reference: DFT / N
    tol = 5.0; errs = 0; maxerr = 0;
    for (int k = 0; k < n; k++) begin
      real sr, si, ang;
      sr = 0; si = 0;
      for (int i = 0; i < n; i++) begin
        ang = -2.0 * 3.14159265358979323846 * real'((longint'(i) * k) % n) / real'(n);
        sr += xr[i] * $cos(ang) - xi[i] * $sin(ang);
        si += xr[i] * $sin(ang) + xi[i] * $cos(ang);
      end
      sr /= n; si /= n;
      get_sample(dt, res, k, re, im);
      if (fabs(real'(re) - sr) > maxerr) maxerr = fabs(real'(re) - sr);
      if (fabs(real'(im) - si) > maxerr) maxerr = fabs(real'(im) - si);
      checks++;
      if (fabs(real'(re) - sr) > tol || fabs(real'(im) - si) > tol) begin
        failures++; errs++;
        if (errs < 5) $display("FAIL: dt %0d N %0d bin %0d got (%0d,%0d) want (%f,%f)", dt, n, k, re, im, sr, si);
      end
    end
    // rate: n/2 butterflies per stage at bpc per cycle, small per-stage overhead
    bound = l2n * (n / 2 / bpc + 8) + (dt == 2 ? n / 4 : 0) + 16;
    if (!stall) begin
      checks++;
      if (cyc > bound || cyc < l2n * (n / 2 / bpc)) begin
        failures++; $display("FAIL: %0d cycles, bound %0d", cyc, bound);
      end
    end else runs_stalled++;
    $display("dt=%0d N=%0d stall=%0d cycles=%0d (ideal %0d) max_err=%f", dt, n, stall, cyc,
             l2n * n / 2 / bpc, maxerr);
  endtask

  initial begin
    apb = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // invalid size: C64 with 1024 points must be refused
    begin
      logic [31:0] st;
      apb_write(12'h00C, 32'd10);
      apb_write(12'h010, 32'd0);
      apb_write(12'h000, 32'd1);
      apb_read(12'h004, st);
      checks++;
      if (st[2:0] != 3'b100) begin failures++; $display("FAIL: invalid size not refused %b", st); end
    end
    run_fft(0, 2, 0, 3);
    run_fft(1, 3, 0, 3);
    run_fft(2, 4, 0, 3);
    run_fft(0, 5, 1, 3);
    run_fft(1, 6, 1, 3);
    run_fft(2, 7, 1, 3);
    run_fft(0, 9, 0, 3);
    run_fft(1, 10, 0, 3);
    run_fft(2, 11, 0, 3);
    checks++;
    if (conflicts == 0) begin failures++; $display("FAIL: no bank conflict stall seen"); end
    $display("bank-conflict stall cycles: %0d", conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
