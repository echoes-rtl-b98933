// tcdm_sram: one single-port SRAM bank of the SoC memories.
//
// Synchronous RAM written as an array: a request with we=1 writes the bytes
// selected by be; a request with we=0 reads, and rdata_o holds the word one
// cycle later (it keeps the last read word otherwise).  The bank always
// accepts, so grant and arbitration live in the interconnect.  This stands for
// the foundry SRAM macros of the chip; the one-cycle latency is this design's
// assumption.
module tcdm_sram
  import echoes_pkg::*;
#(
  parameter int unsigned WORDS = 4096
) (
  input  logic        clk_i,
  input  tcdm_req_t   req_i,     // addr = word index inside the bank
  output logic [31:0] rdata_o
);
  localparam int unsigned AW = $clog2(WORDS);

  logic [31:0] mem [WORDS];
  logic [AW-1:0] widx;

  assign widx = req_i.addr[AW-1:0];

  always_ff @(posedge clk_i) begin
    if (req_i.req) begin
      if (req_i.we) begin
        for (int b = 0; b < 4; b++)
          if (req_i.be[b]) mem[widx][8*b +: 8] <= req_i.wdata[8*b +: 8];
      end else begin
        rdata_o <= mem[widx];
      end
    end
  end
endmodule
