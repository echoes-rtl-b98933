// tb_fft_bfly_regs: self-checking test of the butterfly register sets.
//
// Input set: for each port the testbench plays a streamer issuing reads of a
// numbered word sequence whenever in_free_o allows it (and a random grant
// succeeds); granted reads return one cycle later with pend_i / rvalid_i.
// Pairs are consumed at random when avail_o is set, and each consumed pair
// must be the next two words of the sequence (left, right), including pairs
// whose right word arrives in the same cycle (bypass, counted).
// Output set: random one- or two-entry pushes go into the queues whenever
// they fit and random grants drain them; the heads must come out in push
// order.  The number of cycles needed also bounds the throughput: with
// always-granting memory one pair per port every two cycles must be reached.
`timescale 1ns/1ps
module tb_fft_bfly_regs;
  import echoes_pkg::*;
  localparam int NP = 4;
  logic clk = 0, rst_n = 0;
  logic pend [NP], rv [NP], pop [NP], avail [NP], infree [NP];
  logic [31:0] rdata [NP], wl [NP], wr [NP];
  logic [1:0] pushn;
  fft_wr_t ent [NP][2], head [NP];
  logic wg [NP], wvalid [NP];
  logic [1:0] ocnt [NP];
  int checks = 0, failures = 0, bypass = 0;
  always #5 clk = ~clk;

  fft_bfly_regs #(.NP(NP)) dut (.clk_i(clk), .rst_ni(rst_n), .pend_i(pend), .rvalid_i(rv),
    .rdata_i(rdata), .pop_i(pop), .avail_o(avail), .wl_o(wl), .wr_o(wr), .in_free_o(infree),
    .push_n_i(pushn), .push_ent_i(ent), .wgnt_i(wg), .wvalid_o(wvalid), .whead_o(head), .ocnt_o(ocnt));

  int nrd [NP], npop [NP], npush [NP], nout [NP];
  function automatic logic [31:0] word(int p, int i); return 32'(p << 24) ^ 32'(i * 32'h0001_0003); endfunction
  function automatic fft_wr_t went(int p, int i);
    return '{addr: 32'(i), data: word(p, i) ^ 32'h5A5A_0000, be: 4'(i)};
  endfunction

  task automatic run(int cycles, int pgnt, int ppop, int ppush, int pwg);
    for (int c = 0; c < cycles; c++) begin
      bit issue [NP];
      #1;
      // pops
      for (int p = 0; p < NP; p++) begin
        pop[p] = avail[p] && ($urandom % 100 < ppop);
        wg[p]  = $urandom % 100 < pwg;
      end
      // pushes: same count into every queue, only if they fit in all of them
      pushn = ($urandom % 100 < ppush) ? 2'(1 + $urandom % 2) : 2'd0;
      for (int p = 0; p < NP; p++)
        if (3'(ocnt[p]) + 3'(pushn) > 3'd2 + 3'(wvalid[p] && wg[p])) pushn = 0;
      for (int p = 0; p < NP; p++)
        for (int e = 0; e < 2; e++) ent[p][e] = went(p, npush[p] + e);
      #1;
      for (int p = 0; p < NP; p++) begin
        issue[p] = infree[p] && ($urandom % 100 < pgnt);
        if (pop[p]) begin
          checks++;
          if (pend[p] && npop[p] * 2 + 1 == nrd[p] - 1) bypass++;
          if (wl[p] !== word(p, 2 * npop[p]) || wr[p] !== word(p, 2 * npop[p] + 1)) begin
            failures++;
            if (failures < 10) $display("FAIL: port %0d pair %0d got %h %h", p, npop[p], wl[p], wr[p]);
          end
          npop[p]++;
        end
        if (wvalid[p] && wg[p]) begin
          checks++;
          if (head[p] !== went(p, nout[p])) begin
            failures++;
            if (failures < 10) $display("FAIL: port %0d write %0d out of order", p, nout[p]);
          end
          nout[p]++;
        end
        npush[p] += int'(pushn);
      end
      @(posedge clk);
      #1;
      for (int p = 0; p < NP; p++) begin
        pend[p]  = issue[p];
        rv[p]    = issue[p];
        rdata[p] = issue[p] ? word(p, nrd[p] - 0) : $urandom;
        if (issue[p]) nrd[p]++;
      end
    end
    // drain
    for (int p = 0; p < NP; p++) begin pop[p] = 0; end
    pushn = 0;
  endtask

  initial begin
    for (int p = 0; p < NP; p++) begin
      pend[p] = 0; rv[p] = 0; rdata[p] = 0; pop[p] = 0; wg[p] = 0;
      nrd[p] = 0; npop[p] = 0; npush[p] = 0; nout[p] = 0;
    end
    pushn = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    run(4000, 60, 50, 50, 50);
    run(4000, 90, 90, 80, 90);
    // full rate: every grant succeeds, pops as soon as available
    begin
      int p0;
      p0 = npop[0];
      run(1000, 100, 100, 0, 100);
      checks++;
      if (npop[0] - p0 < 490) begin failures++; $display("FAIL: rate %0d pairs in 1000 cycles", npop[0] - p0); end
      $display("full-rate pairs per 1000 cycles: %0d", npop[0] - p0);
    end
    checks++;
    if (bypass == 0) begin failures++; $display("FAIL: bypass never used"); end
    $display("pairs %0d, bypassed %0d, writes %0d", npop[0], bypass, nout[0]);
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
