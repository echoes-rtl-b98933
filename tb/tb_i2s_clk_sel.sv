// tb_i2s_clk_sel: self-checking test of the clock and frame-sync selection.
//
// Random configurations are applied to both interfaces.  Internal clock:
// the sample / drive strobes must be the generator's rise / fall strobes
// (swapped when the polarity bit is set), FSYNC must be the I2S or DSP
// generator's according to DSP EN, and the pads must drive BCLK and FSYNC.
// External clock: the pads are inputs; a slow BCLK and FSYNC are applied at
// the pads and every BCLK edge must produce exactly one strobe of the right
// kind, two to three clocks later (synchroniser), with FSYNC synchronised
// the same way.
`timescale 1ns/1ps
module tb_i2s_clk_sel;
  import echoes_pkg::*;
  logic clk = 0, rst_n = 0;
  i2s_cfg_t cfg [2];
  logic gb [2], gr [2], gf [2], fi [2], fd [2];
  logic bp_i [2], bp_o [2], bp_oe [2], fp_i [2], fp_o [2], fp_oe [2];
  logic smp [2], drv [2], ws [2];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  i2s_clk_sel dut (.clk_i(clk), .rst_ni(rst_n), .cfg_i(cfg), .gen_bclk_i(gb), .gen_rise_i(gr),
    .gen_fall_i(gf), .fs_i2s_i(fi), .fs_dsp_i(fd), .bclk_pad_i(bp_i), .bclk_pad_o(bp_o),
    .bclk_pad_oe(bp_oe), .fs_pad_i(fp_i), .fs_pad_o(fp_o), .fs_pad_oe(fp_oe),
    .smp_o(smp), .drv_o(drv), .ws_o(ws));

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int i = 0; i < 2; i++) begin
      cfg[i] = '0; gb[i] = 0; gr[i] = 0; gf[i] = 0; fi[i] = 0; fd[i] = 0; bp_i[i] = 0; fp_i[i] = 0;
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      for (int i = 0; i < 2; i++) begin
        cfg[i] = i2s_cfg_t'($urandom);
        cfg[i].en = 1;
        cfg[i].pdm_en = 0;
      end
      #1;
      if (!cfg[0].ext_clk || !cfg[1].ext_clk) begin
        // internal clocks: combinational selection
        for (int c = 0; c < 20; c++) begin
          for (int i = 0; i < 2; i++) begin
            gb[i] = 1'($urandom); gr[i] = 1'($urandom); gf[i] = 1'($urandom);
            fi[i] = 1'($urandom); fd[i] = 1'($urandom);
          end
          #1;
          for (int i = 0; i < 2; i++) if (!cfg[i].ext_clk) begin
            chk(smp[i] === (cfg[i].pol ? gf[i] : gr[i]), "internal sample strobe");
            chk(drv[i] === (cfg[i].pol ? gr[i] : gf[i]), "internal drive strobe");
            chk(ws[i] === (cfg[i].dsp_en ? fd[i] : fi[i]), "internal FSYNC select");
            chk(bp_oe[i] && fp_oe[i] && bp_o[i] === gb[i] && fp_o[i] === ws[i], "pads driven");
          end
          @(posedge clk); #1;
        end
      end
      for (int i = 0; i < 2; i++) if (cfg[i].ext_clk) begin
        // external clock on pad i: toggle every 6 clocks
        int nr, nf, lat;
        bit fsv;
        chk(!bp_oe[i] && !fp_oe[i], "pads released in external mode");
        nr = 0; nf = 0;
        for (int e = 0; e < 8; e++) begin
          fsv = 1'($urandom);
          bp_i[i] = !bp_i[i]; fp_i[i] = fsv;
          lat = -1;
          for (int c = 0; c < 6; c++) begin
            @(posedge clk); #1;
            if (smp[i] || drv[i]) begin
              bit is_rise;
              is_rise = bp_i[i];
              chk(lat < 0, "one strobe per edge");
              lat = c;
              chk((cfg[i].pol ? drv[i] : smp[i]) == is_rise && (cfg[i].pol ? smp[i] : drv[i]) == !is_rise,
                  "strobe kind follows edge and polarity");
              chk(ws[i] === fsv, "FSYNC synchronised with BCLK");
            end
          end
          chk(lat >= 1 && lat <= 2, "strobe latency");
        end
      end
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
