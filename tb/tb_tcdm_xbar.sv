// tb_tcdm_xbar: self-checking test of the low-latency interconnect.
//
// Reduced size: 4 masters, 4 interleaved banks and 2 private banks of 64
// words.  The banks are modelled in the testbench (one-cycle read latency).
// Each master issues random reads and writes, holding a request until it is
// granted; phases alternate between spread traffic and a hot spot where all
// masters hit the same bank.  A flat reference memory, updated at grant time,
// gives every read's expected data.  Checks: data, rvalid exactly one cycle
// after a grant, at most one grant per bank and cycle, interleaving
// (consecutive words land in consecutive banks), unmapped accesses granted
// at once with zero data, and round-robin fairness (no master waits more than
// NM-1 cycles).  Conflict stalls are counted and must occur.
`timescale 1ns/1ps
module tb_tcdm_xbar;
  import echoes_pkg::*;
  localparam int NM = 4, NBI = 4, NBP = 2, IW = 64, PW = 64;
  localparam logic [31:0] ILB = 32'h1C01_0000, PVB = 32'h1C00_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  tcdm_req_t   mreq [NM];
  tcdm_rsp_t   mrsp [NM];
  tcdm_req_t   ireq [NBI];
  tcdm_req_t   preq [NBP];
  logic [31:0] irdata [NBI], prdata [NBP];
  logic [31:0] imem [NBI][IW], pmem [NBP][PW];

  tcdm_xbar #(.NM(NM), .NB_IL(NBI), .NB_PRIV(NBP), .IL_WORDS(IW), .PV_WORDS(PW),
              .IL_BASE(ILB), .PV_BASE(PVB)) dut (
    .clk_i(clk), .rst_ni(rst_n), .mst_req_i(mreq), .mst_rsp_o(mrsp),
    .il_req_o(ireq), .il_rdata_i(irdata), .pv_req_o(preq), .pv_rdata_i(prdata));

  // bank models
  always @(posedge clk) begin
    for (int b = 0; b < NBI; b++) if (ireq[b].req) begin
      if (ireq[b].we) begin
        for (int k = 0; k < 4; k++) if (ireq[b].be[k]) imem[b][ireq[b].addr[5:0]][8*k +: 8] <= ireq[b].wdata[8*k +: 8];
      end else irdata[b] <= imem[b][ireq[b].addr[5:0]];
    end
    for (int b = 0; b < NBP; b++) if (preq[b].req) begin
      if (preq[b].we) begin
        for (int k = 0; k < 4; k++) if (preq[b].be[k]) pmem[b][preq[b].addr[5:0]][8*k +: 8] <= preq[b].wdata[8*k +: 8];
      end else prdata[b] <= pmem[b][preq[b].addr[5:0]];
    end
  end

  // reference: flat word memory of IL (256 words) then private (128 words)
  logic [31:0] ref_mem [NBI*IW + NBP*PW];
  function automatic int ref_idx(logic [31:0] a);
    if (a >= ILB && a < ILB + NBI*IW*4) return int'((a - ILB) >> 2);
    if (a >= PVB && a < PVB + NBP*PW*4) return NBI*IW + int'((a - PVB) >> 2);
    return -1;
  endfunction

  int checks = 0, failures = 0, conflicts = 0, unmapped = 0;
  logic        exp_v [NM], exp_r [NM];
  logic [31:0] exp_d [NM];
  int          wait_c [NM];
  bit          hot = 0;

  function automatic tcdm_req_t new_req();
    tcdm_req_t r;
    int sel;
    r.req = 1; r.we = 1'($urandom % 2); r.be = 4'($urandom); r.wdata = $urandom;
    sel = $urandom % 16;
    if (hot)           r.addr = ILB + 32'(4 * NBI * ($urandom % IW));          // all in bank 0
    else if (sel < 10) r.addr = ILB + 32'(4 * ($urandom % (NBI * IW)));
    else if (sel < 15) r.addr = PVB + 32'(4 * ($urandom % (NBP * PW)));
    else               r.addr = 32'h2000_0000 + 32'(4 * ($urandom % 64));       // unmapped
    return r;
  endfunction

  always @(posedge clk) if (rst_n) begin
    int gb [NBI + NBP];
    foreach (gb[i]) gb[i] = 0;
    for (int m = 0; m < NM; m++) begin
      // response of last cycle's grant
      checks++;
      if (mrsp[m].rvalid !== exp_v[m]) begin failures++; $display("FAIL: m%0d rvalid %b", m, mrsp[m].rvalid); end
      if (exp_v[m] && exp_r[m] && mrsp[m].rdata !== exp_d[m]) begin
        failures++;
        if (failures < 10) $display("FAIL: m%0d rdata %h want %h", m, mrsp[m].rdata, exp_d[m]);
      end
      exp_v[m] <= 1'b0;
      if (mrsp[m].gnt && !mreq[m].req) begin failures++; $display("FAIL: grant without request"); end
      if (mreq[m].req && mrsp[m].gnt) begin
        int i;
        i = ref_idx(mreq[m].addr);
        exp_v[m] <= 1'b1;
        exp_r[m] <= !mreq[m].we;
        if (i < 0) begin
          unmapped++;
          exp_d[m] <= '0;
        end else begin
          int bnk;
          bnk = i < NBI*IW ? i % NBI : NBI + (i - NBI*IW) / PW;
          gb[bnk]++;
          if (mreq[m].we) begin
            for (int k = 0; k < 4; k++) if (mreq[m].be[k]) ref_mem[i][8*k +: 8] = mreq[m].wdata[8*k +: 8];
          end else exp_d[m] <= ref_mem[i];
          // the request must have reached the right bank with the right row
          checks++;
          if (bnk < NBI ? (ireq[bnk].addr != 32'(i / NBI) || !ireq[bnk].req)
                        : (preq[bnk-NBI].addr != 32'((i - NBI*IW) % PW) || !preq[bnk-NBI].req)) begin
            failures++; $display("FAIL: m%0d routed wrong (bank %0d)", m, bnk);
          end
        end
        wait_c[m] = 0;
        mreq[m] <= ($urandom % 4 == 0) ? tcdm_req_t'('0) : new_req();
      end else if (mreq[m].req) begin
        conflicts++;
        wait_c[m]++;
        checks++;
        if (wait_c[m] >= NM) begin failures++; $display("FAIL: m%0d starved %0d cycles", m, wait_c[m]); end
      end else if ($urandom % 2 == 0) mreq[m] <= new_req();
    end
    foreach (gb[i]) if (gb[i] > 1) begin failures++; $display("FAIL: bank %0d granted twice", i); end
  end

  initial begin
    for (int m = 0; m < NM; m++) begin mreq[m] = '0; exp_v[m] = 0; exp_r[m] = 0; exp_d[m] = 0; wait_c[m] = 0; end
    for (int b = 0; b < NBI; b++) for (int i = 0; i < IW; i++) begin imem[b][i] = 0; ref_mem[i*NBI + b] = 0; end
    for (int b = 0; b < NBP; b++) for (int i = 0; i < PW; i++) begin pmem[b][i] = 0; ref_mem[NBI*IW + b*PW + i] = 0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int ph = 0; ph < 8; ph++) begin
      hot = ph % 2 == 1;
      repeat (1500) @(posedge clk);
    end
    checks++;
    if (conflicts == 0 || unmapped == 0) begin failures++; $display("FAIL: conflicts %0d unmapped %0d", conflicts, unmapped); end
    $display("conflict stalls %0d, unmapped accesses %0d", conflicts, unmapped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
