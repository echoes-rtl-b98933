// fft_bfly_regs: the two sets of butterfly registers of the FFT HWPE.
//
// Input set: each of the NP read ports owns two 32-bit registers, one for its
// left-wing word and one for its right-wing word (four C64 samples over the
// four ports).  Words arrive in order (left then right) on rvalid.  A port is
// "available" when its left and right words are there, counting a right word
// that arrives in this very cycle (bypass), so a sub-step can consume a group
// the cycle its right wing comes back from memory.  Arrival is predicted from
// pend_i (the read was granted last cycle, so its data arrive now) rather
// than from rvalid, which keeps the issue decision free of any combinational
// path through the memory response.  pop_i consumes both words.
// in_free_o tells the streamer that a further read may be issued: stored plus
// arriving words, minus those popped now, stay below two.
// Output set: each of the NP write ports owns a two-entry queue of
// (address, data, byte enable); a sub-step pushes one entry (two in the last
// C16 stage) and the write port pops one entry per grant.
// The register count (four C64 per set) follows the paper; the bypass and
// queue discipline are this design's.
module fft_bfly_regs
  import echoes_pkg::*;
#(
  parameter int unsigned NP = 4
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // input set
  input  logic        pend_i    [NP],      // a read was granted last cycle
  input  logic        rvalid_i  [NP],
  input  logic [31:0] rdata_i   [NP],
  input  logic        pop_i     [NP],
  output logic        avail_o   [NP],
  output logic [31:0] wl_o      [NP],
  output logic [31:0] wr_o      [NP],
  output logic        in_free_o [NP],
  // output set
  input  logic [1:0]  push_n_i,            // entries pushed into every queue
  input  fft_wr_t     push_ent_i [NP][2],
  input  logic        wgnt_i     [NP],
  output logic        wvalid_o   [NP],
  output fft_wr_t     whead_o    [NP],
  output logic [1:0]  ocnt_o     [NP]
);
  // ------------------------------------------------------------ input set
  logic [1:0]  icnt_q [NP];
  logic [31:0] ireg_q [NP][2];

  for (genvar p = 0; p < NP; p++) begin : g_in
    assign avail_o[p]   = (icnt_q[p] == 2'd2) || (icnt_q[p] == 2'd1 && pend_i[p]);
    assign wl_o[p]      = ireg_q[p][0];
    assign wr_o[p]      = (icnt_q[p] == 2'd2) ? ireg_q[p][1] : rdata_i[p];
    assign in_free_o[p] = (3'(icnt_q[p]) + 3'(pend_i[p]) - (pop_i[p] ? 3'd2 : 3'd0)) < 3'd2;

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        icnt_q[p]    <= '0;
        ireg_q[p][0] <= '0;
        ireg_q[p][1] <= '0;
      end else if (pop_i[p]) begin
        // both words consumed; a word arriving beyond them becomes the new left
        if (icnt_q[p] == 2'd2 && rvalid_i[p]) begin
          ireg_q[p][0] <= rdata_i[p];
          icnt_q[p]    <= 2'd1;
        end else begin
          icnt_q[p]    <= 2'd0;
        end
      end else if (rvalid_i[p]) begin
        ireg_q[p][icnt_q[p][0]] <= rdata_i[p];
        icnt_q[p]               <= icnt_q[p] + 2'd1;
      end
    end

    a_rvalid_pend: assert property (@(posedge clk_i) disable iff (!rst_ni) rvalid_i[p] == pend_i[p]);
    a_no_overflow: assert property (@(posedge clk_i) disable iff (!rst_ni)
      !(icnt_q[p] == 2'd2 && rvalid_i[p] && !pop_i[p]));
    a_pop_avail: assert property (@(posedge clk_i) disable iff (!rst_ni)
      pop_i[p] |-> avail_o[p]);
  end

  // ----------------------------------------------------------- output set
  fft_wr_t    oq_q   [NP][2];
  logic [1:0] ocnt_q [NP];

  for (genvar p = 0; p < NP; p++) begin : g_out
    assign wvalid_o[p] = ocnt_q[p] != 2'd0;
    assign whead_o[p]  = oq_q[p][0];
    assign ocnt_o[p]   = ocnt_q[p];

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        ocnt_q[p]  <= '0;
        oq_q[p][0] <= '0;
        oq_q[p][1] <= '0;
      end else begin
        fft_wr_t    q [2];
        logic [1:0] n;
        q = oq_q[p];
        n = ocnt_q[p];
        if (wvalid_o[p] && wgnt_i[p]) begin
          q[0] = q[1];
          n    = n - 2'd1;
        end
        for (int e = 0; e < 2; e++)
          if (2'(e) < push_n_i) begin
            q[n[0]] = push_ent_i[p][e];
            n       = n + 2'd1;
          end
        oq_q[p]   <= q;
        ocnt_q[p] <= n;
      end
    end

    a_oq_overflow: assert property (@(posedge clk_i) disable iff (!rst_ni)
      (3'(ocnt_q[p]) + 3'(push_n_i)) <= 3'd2 + 3'(wvalid_o[p] && wgnt_i[p]));
  end
endmodule
