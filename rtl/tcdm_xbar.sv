// tcdm_xbar: low-latency interconnect between the memory masters and the
// SRAM banks.
//
// Every master port decodes its byte address: the L2 window is word
// interleaved over NB_IL banks (bank = word address mod NB_IL, word in bank =
// word address / NB_IL); the private window is split into NB_PRIV contiguous
// banks.  Each bank grants one master per cycle with its own round-robin
// pointer, so masters hitting different banks never wait and a bank conflict
// costs the loser one cycle per competing request.  The response is routed
// back one cycle after the grant (rvalid for reads and writes).  Requests to
// unmapped addresses are granted at once and read as zero.
// The paper gives the bank organisation and the single-cycle character of the
// interconnect; the arbitration policy and address map are this design's.
module tcdm_xbar
  import echoes_pkg::*;
#(
  parameter int unsigned NM         = 12,
  parameter int unsigned NB_IL      = 16,
  parameter int unsigned NB_PRIV    = 2,
  parameter int unsigned IL_WORDS   = 4096,   // words per interleaved bank
  parameter int unsigned PV_WORDS   = 8192,   // words per private bank
  parameter logic [31:0] IL_BASE    = L2_BASE,
  parameter logic [31:0] PV_BASE    = PRIV_BASE
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  tcdm_req_t   mst_req_i  [NM],
  output tcdm_rsp_t   mst_rsp_o  [NM],
  output tcdm_req_t   il_req_o   [NB_IL],
  input  logic [31:0] il_rdata_i [NB_IL],
  output tcdm_req_t   pv_req_o   [NB_PRIV],
  input  logic [31:0] pv_rdata_i [NB_PRIV]
);
  localparam int unsigned NS     = NB_IL + NB_PRIV;
  localparam int unsigned SW     = $clog2(NS + 1);
  localparam int unsigned MW     = (NM > 1) ? $clog2(NM) : 1;
  localparam int unsigned IL_SH  = $clog2(NB_IL);
  localparam int unsigned PV_SH  = $clog2(PV_WORDS);
  localparam logic [31:0] IL_SIZE = 32'(NB_IL * IL_WORDS * 4);
  localparam logic [31:0] PV_SIZE = 32'(NB_PRIV * PV_WORDS * 4);

  logic [SW-1:0]  tgt   [NM];          // NS means "unmapped"
  logic [31:0]    lword [NM];          // word index inside the target bank
  logic [NM-1:0]  gnt;
  logic [MW-1:0]  rr_q  [NS];
  logic [MW-1:0]  win   [NS];
  logic [NS-1:0]  busy;
  tcdm_req_t      sreq  [NS];
  logic [31:0]    srdata[NS];

  // ---------------------------------------------------------------- decode
  always_comb begin
    for (int m = 0; m < NM; m++) begin
      logic [31:0] off;
      logic [31:0] w;
      tgt[m]   = SW'(NS);
      lword[m] = '0;
      off      = '0;
      w        = '0;
      if (mst_req_i[m].addr >= IL_BASE && mst_req_i[m].addr - IL_BASE < IL_SIZE) begin
        off      = mst_req_i[m].addr - IL_BASE;
        w        = off >> 2;
        tgt[m]   = SW'(w % NB_IL);
        lword[m] = w >> IL_SH;
      end else if (mst_req_i[m].addr >= PV_BASE && mst_req_i[m].addr - PV_BASE < PV_SIZE) begin
        off      = mst_req_i[m].addr - PV_BASE;
        w        = off >> 2;
        tgt[m]   = SW'(NB_IL + (w >> PV_SH));
        lword[m] = w % PV_WORDS;
      end
    end
  end

  // ------------------------------------------------ per-bank round robin
  always_comb begin
    gnt = '0;
    for (int s = 0; s < NS; s++) begin
      busy[s]       = 1'b0;
      win[s]        = '0;
      sreq[s]       = '0;
      for (int k = 0; k < NM; k++) begin
        logic [MW-1:0] m;
        m = MW'((int'(rr_q[s]) + k) % NM);
        if (!busy[s] && mst_req_i[m].req && tgt[m] == SW'(s)) begin
          busy[s] = 1'b1;
          win[s]  = MW'(m);
        end
      end
      if (busy[s]) begin
        sreq[s]       = mst_req_i[win[s]];
        sreq[s].addr  = lword[win[s]];
        gnt[win[s]]   = 1'b1;
      end
    end
    for (int m = 0; m < NM; m++)
      if (mst_req_i[m].req && tgt[m] == SW'(NS)) gnt[m] = 1'b1;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int s = 0; s < NS; s++) rr_q[s] <= '0;
    end else begin
      for (int s = 0; s < NS; s++)
        if (busy[s]) rr_q[s] <= (int'(win[s]) == NM - 1) ? '0 : win[s] + MW'(1);
    end
  end

  for (genvar s = 0; s < NB_IL; s++) begin : g_il
    assign il_req_o[s] = sreq[s];
    assign srdata[s]   = il_rdata_i[s];
  end
  for (genvar s = 0; s < NB_PRIV; s++) begin : g_pv
    assign pv_req_o[s]        = sreq[NB_IL + s];
    assign srdata[NB_IL + s]  = pv_rdata_i[s];
  end

  // -------------------------------------------------------- response path
  logic [NM-1:0] rvalid_q;
  logic [SW-1:0] rtgt_q [NM];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rvalid_q <= '0;
      for (int m = 0; m < NM; m++) rtgt_q[m] <= '0;
    end else begin
      rvalid_q <= gnt;
      for (int m = 0; m < NM; m++) if (gnt[m]) rtgt_q[m] <= tgt[m];
    end
  end

  always_comb begin
    for (int m = 0; m < NM; m++) begin
      mst_rsp_o[m].gnt    = gnt[m];
      mst_rsp_o[m].rvalid = rvalid_q[m];
      mst_rsp_o[m].rdata  = (rtgt_q[m] < SW'(NS)) ? srdata[rtgt_q[m]] : '0;
    end
  end

  // A master keeps its request and address stable until it is granted.
  for (genvar m = 0; m < NM; m++) begin : g_chk
    a_req_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
      mst_req_i[m].req && !gnt[m] |=> mst_req_i[m].req && $stable(mst_req_i[m].addr));
  end
endmodule
