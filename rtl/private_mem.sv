// private_mem: the 64 KiB private memory, two contiguous 32 KiB banks.
//
// Unlike L2 the banks are not interleaved: the interconnect selects bank 0 for
// the lower 32 KiB and bank 1 for the upper 32 KiB, giving the core a region
// that the streaming masters rarely touch.  Each bank is a single-port SRAM
// with one-cycle read latency.  Sizes follow the paper; the placement on the
// same interconnect as L2 is this design's choice.
module private_mem
  import echoes_pkg::*;
#(
  parameter int unsigned NB_BANKS   = 2,
  parameter int unsigned BANK_WORDS = 8192
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
