// tb_fft_ctrl: self-checking test of the FFT controller.
//
// The controller is programmed over APB for random data types and sizes,
// including sizes outside the supported range, which must raise the error
// bit without starting.  While it runs, the testbench plays the datapath:
// ports become available at random and the write queues fill and drain at
// random.  Every fired sub-step is checked against an independent schedule:
// stage s, sub-step j, source / destination buffer swapping each stage, the
// pair of ports 2(j mod 2), 2(j mod 2)+1 popped (and only when available and
// all queues have room), output base j*2B, twiddle index of lane l equal to
// bitrev10((jB + l) mod 2^s), and the last-stage flag.  The run must fire
// log2(N) * N/(2B) sub-steps, end with a one-cycle event, report done, and
// return the right result address.
`timescale 1ns/1ps
module tb_fft_ctrl;
  import echoes_pkg::*;
  logic clk = 0, rst_n = 0;
  apb_req_t apb;
  apb_rsp_t rsp;
  logic evt, sstart, run, last, fire, sub;
  logic avail [4], pop [4];
  logic [1:0] ocnt [4];
  fft_dtype_e dt;
  logic [3:0] l2n;
  logic [31:0] src, dst, half;
  logic [10:0] ngr, obase;
  logic [9:0] tw [4];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  fft_ctrl dut (.clk_i(clk), .rst_ni(rst_n), .apb_req_i(apb), .apb_rsp_o(rsp), .evt_o(evt),
    .avail_i(avail), .ocnt_i(ocnt), .stage_start_o(sstart), .run_o(run), .dtype_o(dt),
    .log2n_o(l2n), .last_o(last), .src_o(src), .dst_o(dst), .half_bytes_o(half),
    .ngroups_o(ngr), .fire_o(fire), .sub_o(sub), .pop_o(pop), .obase_o(obase), .tw_idx_o(tw));

  task automatic wr(logic [11:0] a, logic [31:0] d);
    apb = '{psel: 1, penable: 0, pwrite: 1, paddr: a, pwdata: d};
    @(posedge clk); #1 apb.penable = 1; @(posedge clk); #1 apb = '0;
  endtask
  task automatic rd(logic [11:0] a, output logic [31:0] d);
    apb = '{psel: 1, penable: 0, pwrite: 0, paddr: a, pwdata: 0};
    @(posedge clk); #1 apb.penable = 1; #1 d = rsp.prdata; @(posedge clk); #1 apb = '0;
  endtask
  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  function automatic int brev10(int v);
    int r = 0;
    for (int i = 0; i < 10; i++) if (v & (1 << i)) r |= 1 << (9 - i);
    return r;
  endfunction

  initial begin
    logic [31:0] d, base;
    apb = '0;
    for (int p = 0; p < 4; p++) begin avail[p] = 0; ocnt[p] = 0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int it = 0; it < 30; it++) begin
      int t, n, b, bytes, lmax, ln, stage, j, fires, cyc, nevt, pushn;
      bit ok;
      t = it % 3;
      b = t == 0 ? 1 : t == 1 ? 2 : 4;
      bytes = t == 0 ? 8 : t == 1 ? 4 : 2;
      lmax = t == 0 ? 9 : t == 1 ? 10 : 11;
      ln = (it < 6) ? (it < 3 ? lmax + 1 : 1 + t) : 2 + t + $urandom % (lmax - 1 - t);
      if (it >= 27) ln = lmax;
      ok = ln <= lmax && ln >= 2 + t;
      n = 1 << ln;
      for (int p = 0; p < 4; p++) begin avail[p] = 0; ocnt[p] = 0; end
      base = 32'h1C01_0000 + 32'(16 * ($urandom % 256));
      wr(12'h008, base); wr(12'h00C, 32'(ln)); wr(12'h010, 32'(t)); wr(12'h000, 1);
      rd(12'h004, d);
      if (!ok) begin
        chk(d[2:0] == 3'b100, $sformatf("size %0d type %0d must be refused", n, t));
        continue;
      end
      chk(d[0] == 1'b1, "busy after start");
      stage = 0; j = 0; fires = 0; cyc = 0; nevt = 0;
      while (nevt == 0 && cyc < 100000) begin
        for (int p = 0; p < 4; p++) begin
          avail[p] = $urandom % 100 < 60;
          ocnt[p] = 2'($urandom % 3);
        end
        #1;
        pushn = (t == 2 && stage == ln - 1) ? 2 : 1;
        if (run) begin
          bit room, av;
          room = 1;
          for (int p = 0; p < 4; p++) if (int'(ocnt[p]) + pushn > 2) room = 0;
          av = avail[2 * (j % 2)] && avail[2 * (j % 2) + 1];
          chk(src == (stage % 2 ? base + 32'(n * bytes) : base) &&
              dst == (stage % 2 ? base : base + 32'(n * bytes)), "buffers of the stage");
          chk(half == 32'(n * bytes / 2) && ngr == 11'(n / (4 * b)), "stage geometry");
          chk(last == (stage == ln - 1), "last-stage flag");
          if (j < n / (2 * b)) chk(fire == (room && av), $sformatf("fire condition stage %0d sub %0d", stage, j));
          else chk(!fire, "no fire after the stage's sub-steps");
          if (fire) begin
            for (int p = 0; p < 4; p++) chk(pop[p] == (p / 2 == j % 2), "ports popped");
            chk(obase == 11'(j * 2 * b), "output base");
            for (int l = 0; l < b; l++)
              chk(tw[l] == 10'(brev10((j * b + l) % (1 << stage))),
                  $sformatf("twiddle stage %0d sub %0d lane %0d got %0d", stage, j, l, tw[l]));
            j++; fires++;
          end else for (int p = 0; p < 4; p++) chk(!pop[p], "no pop without fire");
        end
        @(posedge clk); #1;
        cyc++;
        if (sstart) begin stage = (fires == 0) ? 0 : stage + 1; j = 0; end
        if (evt) nevt++;
      end
      for (int p = 0; p < 4; p++) ocnt[p] = 0;
      chk(fires == ln * n / (2 * b), $sformatf("fired %0d sub-steps, want %0d", fires, ln * n / (2 * b)));
      chk(stage == ln - 1, "stage count");
      @(posedge clk); #1;
      chk(!evt, "event lasts one cycle");
      rd(12'h004, d); chk(d[2:0] == 3'b010, "done status");
      rd(12'h014, d); chk(d == (ln % 2 ? base + 32'(n * bytes) : base), "result address");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
