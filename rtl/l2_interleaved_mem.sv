// l2_interleaved_mem: the 256 KiB shared L2 memory, 16 banks of 16 KiB.
//
// Consecutive 32-bit words live in consecutive banks (bank = word address mod
// NB_BANKS); that mapping is made by the interconnect, which hands every bank
// its own request with the word index inside the bank.  All banks can be
// accessed in the same cycle, so 16 masters streaming consecutive words see
// 16 words per cycle (64 B/cycle, 22.4 GB/s at 350 MHz).  Read data follows
// one cycle after the request.  Bank count and size follow the paper; the
// bank timing is this design's choice.
module l2_interleaved_mem
  import echoes_pkg::*;
#(
  parameter int unsigned NB_BANKS   = 16,
  parameter int unsigned BANK_WORDS = 4096
) (
  input  logic        clk_i,
  input  tcdm_req_t   bank_req_i   [NB_BANKS],
  output logic [31:0] bank_rdata_o [NB_BANKS]
);
  for (genvar b = 0; b < NB_BANKS; b++) begin : g_bank
    tcdm_sram #(.WORDS(BANK_WORDS)) i_bank (
      .clk_i   (clk_i),
      .req_i   (bank_req_i[b]),
      .rdata_o (bank_rdata_o[b])
    );
  end
endmodule
