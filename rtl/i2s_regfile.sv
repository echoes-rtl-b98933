// i2s_regfile: memory-mapped 32-bit register file of the I2S peripheral.
//
// Zero-wait-state APB slave.  Byte offsets:
//   0x00 RX_CFG, 0x04 TX_CFG : bit 0 en, 1 dsp_en, 2 pdm_en (RX only),
//        3 ext_clk, 4 pol, 5 align, 10:6 word length-1, 14:11 devices-1
//   0x08 RX_CLKDIV, 0x0C TX_CLKDIV : BCLK = clk / (2*(div+1)), bits 15:0
//   0x10 STATUS : bit 0 transmit underrun (sticky, write 1 to clear)
// Reset values: interfaces disabled, 32-bit words, one device, align = 1.
// The paper gives a 32-bit register file with independent configuration
// of each interface; the register map is this design's.
module i2s_regfile
  import echoes_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  apb_req_t    apb_req_i,
  output apb_rsp_t    apb_rsp_o,
  output i2s_cfg_t    cfg_o [2],      // 0 = receive, 1 = transmit
  output logic [15:0] div_o [2],
  input  logic        underrun_i
);
  logic [14:0] cfg_q [2];
  logic [15:0] div_q [2];
  logic        urun_q;
  logic        wr;

  assign wr = apb_req_i.psel && apb_req_i.penable && apb_req_i.pwrite;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cfg_q[0] <= 15'h07E0;
      cfg_q[1] <= 15'h07E0;
      div_q[0] <= '0;
      div_q[1] <= '0;
      urun_q   <= 1'b0;
    end else begin
      if (underrun_i) urun_q <= 1'b1;
      if (wr) begin
        case (apb_req_i.paddr[7:0])
          8'h00: cfg_q[0] <= apb_req_i.pwdata[14:0];
          8'h04: cfg_q[1] <= {apb_req_i.pwdata[14:3], 1'b0, apb_req_i.pwdata[1:0]};
          8'h08: div_q[0] <= apb_req_i.pwdata[15:0];
          8'h0C: div_q[1] <= apb_req_i.pwdata[15:0];
          8'h10: if (apb_req_i.pwdata[0]) urun_q <= 1'b0;
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    apb_rsp_o = '{prdata: '0, pready: 1'b1, pslverr: 1'b0};
    case (apb_req_i.paddr[7:0])
      8'h00: apb_rsp_o.prdata = 32'(cfg_q[0]);
      8'h04: apb_rsp_o.prdata = 32'(cfg_q[1]);
      8'h08: apb_rsp_o.prdata = 32'(div_q[0]);
      8'h0C: apb_rsp_o.prdata = 32'(div_q[1]);
      8'h10: apb_rsp_o.prdata = 32'(urun_q);
      default: ;
    endcase
  end

  for (genvar i = 0; i < 2; i++) begin : g_cfg
    assign cfg_o[i] = i2s_cfg_t'(cfg_q[i]);
    assign div_o[i] = div_q[i];
  end
endmodule
