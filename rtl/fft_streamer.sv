// fft_streamer: memory side of the FFT HWPE (four read and four write ports).
//
// For one stage of N points the butterflies read x[i] (left wings, first half
// of the source buffer) and x[i+N/2] (right wings, second half).  A group is
// 16 bytes of left wing plus 16 bytes of right wing; read port p fetches word
// p of each: left word at src + 16g + 4p, then right word at
// src + N*bytes/2 + 16g + 4p, for g = 0 .. groups-1.  All addresses are
// consecutive, so the four ports always hit four different banks.  Each port
// runs on its own and issues whenever its input butterfly registers have room
// (in_free_i), holding req until granted as the TCDM protocol requires.
// Write ports simply present the head of their output queue.
// stage_start_i restarts the read sequence for a new stage.
// The consecutive left/right wing access follows the paper; the per-port
// independence is this design's choice.
module fft_streamer
  import echoes_pkg::*;
#(
  parameter int unsigned NP = 4
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        stage_start_i,
  input  logic        run_i,
  input  logic [31:0] src_i,
  input  logic [31:0] half_bytes_i,      // N * bytes_per_sample / 2
  input  logic [10:0] ngroups_i,         // groups per stage
  input  logic        in_free_i [NP],
  output tcdm_req_t   rd_req_o  [NP],
  input  tcdm_rsp_t   rd_rsp_i  [NP],
  output logic        pend_o    [NP],     // read granted last cycle
  output logic        rvalid_o  [NP],
  output logic [31:0] rdata_o   [NP],
  input  logic        wvalid_i  [NP],
  input  fft_wr_t     whead_i   [NP],
  output tcdm_req_t   wr_req_o  [NP],
  input  tcdm_rsp_t   wr_rsp_i  [NP],
  output logic        wgnt_o    [NP]
);
  logic [11:0] rcnt_q [NP];     // requests granted in this stage (2 per group)
  logic        hold_q [NP];     // a request is pending, keep it up
  logic        pend_q [NP];

  for (genvar p = 0; p < NP; p++) begin : g_port
    logic        more;
    logic [31:0] addr;

    assign more = rcnt_q[p] < {ngroups_i, 1'b0};
    assign addr = src_i + (rcnt_q[p][0] ? half_bytes_i : 32'd0)
                + (32'(rcnt_q[p][11:1]) << 4) + 32'(4 * p);

    always_comb begin
      rd_req_o[p]       = '0;
      rd_req_o[p].req   = run_i && more && (hold_q[p] || in_free_i[p]);
      rd_req_o[p].be    = 4'hf;
      rd_req_o[p].addr  = addr;
    end

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        rcnt_q[p] <= '0;
        hold_q[p] <= 1'b0;
        pend_q[p] <= 1'b0;
      end else if (stage_start_i) begin
        rcnt_q[p] <= '0;
        hold_q[p] <= 1'b0;
        pend_q[p] <= 1'b0;
      end else begin
        pend_q[p] <= rd_req_o[p].req && rd_rsp_i[p].gnt;
        hold_q[p] <= rd_req_o[p].req && !rd_rsp_i[p].gnt;
        if (rd_req_o[p].req && rd_rsp_i[p].gnt) rcnt_q[p] <= rcnt_q[p] + 12'd1;
      end
    end

    assign pend_o[p]   = pend_q[p];
    assign rvalid_o[p] = rd_rsp_i[p].rvalid;
    assign rdata_o[p]  = rd_rsp_i[p].rdata;

    always_comb begin
      wr_req_o[p]       = '0;
      wr_req_o[p].req   = wvalid_i[p];
      wr_req_o[p].we    = 1'b1;
      wr_req_o[p].be    = whead_i[p].be;
      wr_req_o[p].addr  = whead_i[p].addr;
      wr_req_o[p].wdata = whead_i[p].data;
    end
    assign wgnt_o[p] = wr_rsp_i[p].gnt;
  end
endmodule
