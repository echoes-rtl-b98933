// tb_private_mem: self-checking test of the private memory (2 banks, reduced to 256 words per bank).
//
// Every bank gets its own request stream.  Each cycle every bank receives a
// random read or a random byte-masked write; a shadow copy of all banks,
// updated with the same byte enables, gives the value a read must return one
// cycle later.  The words are first filled completely so that no read sees an
// uninitialised word.  Checks data, one-cycle read latency and that banks are
// independent (the same word index in different banks holds different data).
`timescale 1ns/1ps
module tb_private_mem;
  import echoes_pkg::*;
  localparam int NB = 2, W = 256;

  logic clk = 0;
  always #5 clk = ~clk;

  tcdm_req_t   req   [NB];
  logic [31:0] rdata [NB];
  logic [31:0] shadow [NB][W];
  logic [31:0] exp_q [NB];
  logic        chk_q [NB];
  int checks = 0, failures = 0;

  private_mem #(.NB_BANKS(NB), .BANK_WORDS(W)) dut (.clk_i(clk), .bank_req_i(req), .bank_rdata_o(rdata));

  task automatic step();
    @(posedge clk);
    #1;
    for (int b = 0; b < NB; b++)
      if (chk_q[b]) begin
        checks++;
        if (rdata[b] !== exp_q[b]) begin
          failures++;
          if (failures < 10) $display("FAIL: bank %0d got %h want %h", b, rdata[b], exp_q[b]);
        end
      end
  endtask

  initial begin
    for (int b = 0; b < NB; b++) begin req[b] = '0; chk_q[b] = 0; end
    // fill
    for (int i = 0; i < W; i++) begin
      for (int b = 0; b < NB; b++) begin
        shadow[b][i] = $urandom;
        req[b] = '{req: 1, we: 1, be: 4'hf, addr: 32'(i), wdata: shadow[b][i]};
        chk_q[b] = 0;
      end
      step();
    end
    // random traffic
    for (int c = 0; c < 4000; c++) begin
      for (int b = 0; b < NB; b++) begin
        int a;
        a = $urandom % W;
        chk_q[b] = 0;
        case ($urandom % 3)
          0: req[b] = '0;
          1: begin
            logic [3:0] be; logic [31:0] d;
            be = 4'($urandom); d = $urandom;
            req[b] = '{req: 1, we: 1, be: be, addr: 32'(a), wdata: d};
            for (int k = 0; k < 4; k++) if (be[k]) shadow[b][a][8*k +: 8] = d[8*k +: 8];
          end
          default: begin
            req[b] = '{req: 1, we: 0, be: 4'hf, addr: 32'(a), wdata: 0};
            exp_q[b] = shadow[b][a];
            chk_q[b] = 1;
          end
        endcase
      end
      step();
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
