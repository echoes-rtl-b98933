// tb_fft_streamer: self-checking test of the FFT memory-side ports.
//
// Several stages with random source buffers, sizes, grant patterns and
// in_free back-pressure are run.  For each read port the k-th granted
// request must carry the k-th address of the expected sequence (left word
// src + 16g + 4p, then right word at + N*bytes/2, for g = 0..groups-1); a
// request must stay up with a stable address until granted; exactly
// 2*groups reads per port and stage are issued; pend_o must flag a grant of
// the previous cycle.  Write ports must present the queue head as a write
// and return the grant.
`timescale 1ns/1ps
module tb_fft_streamer;
  import echoes_pkg::*;
  localparam int NP = 4;
  logic clk = 0, rst_n = 0, start = 0, run = 0;
  logic [31:0] src, half;
  logic [10:0] ngr;
  logic infree [NP], pend [NP], rvalid [NP], wvalid [NP], wgnt [NP];
  logic [31:0] rdata [NP];
  tcdm_req_t rreq [NP], wreq [NP];
  tcdm_rsp_t rrsp [NP], wrsp [NP];
  fft_wr_t whead [NP];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  fft_streamer #(.NP(NP)) dut (.clk_i(clk), .rst_ni(rst_n), .stage_start_i(start), .run_i(run),
    .src_i(src), .half_bytes_i(half), .ngroups_i(ngr), .in_free_i(infree), .rd_req_o(rreq),
    .rd_rsp_i(rrsp), .pend_o(pend), .rvalid_o(rvalid), .rdata_o(rdata), .wvalid_i(wvalid),
    .whead_i(whead), .wr_req_o(wreq), .wr_rsp_i(wrsp), .wgnt_o(wgnt));

  int ngnt [NP];
  bit waiting [NP], gnt_d [NP];
  logic [31:0] wait_addr [NP];

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int p = 0; p < NP; p++) begin
      infree[p] = 0; rrsp[p] = '0; wrsp[p] = '0; wvalid[p] = 0; whead[p] = '0;
      ngnt[p] = 0; waiting[p] = 0; gnt_d[p] = 0;
    end
    src = 0; half = 0; ngr = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int st = 0; st < 40; st++) begin
      int g, cyc, pg;
      g = 1 + $urandom % 64;
      ngr = 11'(g);
      src = 32'h1C01_0000 + 32'(16 * ($urandom % 1024));
      half = 32'(16 * g);
      pg = 30 + $urandom % 71;
      start = 1; @(posedge clk); #1 start = 0;
      for (int p = 0; p < NP; p++) begin ngnt[p] = 0; waiting[p] = 0; gnt_d[p] = 0; end
      run = 1;
      cyc = 0;
      while (cyc < 20 * g + 50) begin
        for (int p = 0; p < NP; p++) begin
          infree[p] = $urandom % 100 < 70;
          rrsp[p].gnt = $urandom % 100 < pg;
          rrsp[p].rvalid = gnt_d[p];
          rrsp[p].rdata = $urandom;
          wvalid[p] = 1'($urandom);
          whead[p] = '{addr: $urandom, data: $urandom, be: 4'($urandom)};
          wrsp[p].gnt = 1'($urandom);
        end
        #1;
        for (int p = 0; p < NP; p++) begin
          logic [31:0] ea;
          ea = src + ((ngnt[p] % 2) ? half : 0) + 32'(16 * (ngnt[p] / 2) + 4 * p);
          chk(pend[p] === gnt_d[p], "pend flags last cycle's grant");
          chk(rvalid[p] === rrsp[p].rvalid && rdata[p] === rrsp[p].rdata, "read response passed on");
          chk(wreq[p].req === wvalid[p] && wreq[p].we && wreq[p].addr === whead[p].addr &&
              wreq[p].wdata === whead[p].data && wreq[p].be === whead[p].be && wgnt[p] === wrsp[p].gnt,
              "write port presents queue head");
          if (waiting[p]) chk(rreq[p].req && rreq[p].addr === wait_addr[p], "request held until granted");
          if (rreq[p].req) begin
            chk(!rreq[p].we && rreq[p].addr === ea, $sformatf("port %0d read %0d address %h want %h", p, ngnt[p], rreq[p].addr, ea));
            chk(ngnt[p] < 2 * g, "no reads beyond the stage");
          end
          gnt_d[p] = rreq[p].req && rrsp[p].gnt;
          waiting[p] = rreq[p].req && !rrsp[p].gnt;
          wait_addr[p] = rreq[p].addr;
          if (gnt_d[p]) ngnt[p]++;
        end
        @(posedge clk); #1;
        cyc++;
      end
      for (int p = 0; p < NP; p++) chk(ngnt[p] == 2 * g, $sformatf("port %0d issued %0d reads, want %0d", p, ngnt[p], 2 * g));
      run = 0;
      for (int p = 0; p < NP; p++) begin rrsp[p] = '0; gnt_d[p] = 0; end
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
