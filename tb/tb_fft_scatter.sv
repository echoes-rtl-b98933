// tb_fft_scatter: self-checking test of the operand unpacker.
//
// Random left and right wing words are applied for each data type; the lane
// operands are compared with the sample packing worked out field by field
// (C64: real word, imaginary word; C32: {im16, re16}; C16: {im8, re8} per
// half word, lower half first), sign-extended, with unused lanes zero.
`timescale 1ns/1ps
module tb_fft_scatter;
  import echoes_pkg::*;

  fft_dtype_e  dt;
  logic [31:0] wl [2], wr [2];
  cplx_t       a [4], b [4];
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  fft_scatter dut (.dtype_i(dt), .wl_i(wl), .wr_i(wr), .a_o(a), .b_o(b));

  task automatic cmp(cplx_t g, longint er, longint ei, string what);
    checks++;
    if (longint'(g.re) != er || longint'(g.im) != ei) begin
      failures++;
      if (failures < 10) $display("FAIL: %s got (%0d,%0d) want (%0d,%0d)", what, g.re, g.im, er, ei);
    end
  endtask

  initial begin
    for (int it = 0; it < 3000; it++) begin
      dt = fft_dtype_e'(it % 3);
      for (int i = 0; i < 2; i++) begin wl[i] = $urandom; wr[i] = $urandom; end
      #1;
      case (it % 3)
        0: begin
          cmp(a[0], longint'(signed'(wl[0])), longint'(signed'(wl[1])), "c64 a");
          cmp(b[0], longint'(signed'(wr[0])), longint'(signed'(wr[1])), "c64 b");
          for (int l = 1; l < 4; l++) begin cmp(a[l], 0, 0, "c64 idle a"); cmp(b[l], 0, 0, "c64 idle b"); end
        end
        1: begin
          for (int l = 0; l < 2; l++) begin
            cmp(a[l], longint'($signed(wl[l][15:0])), longint'($signed(wl[l][31:16])), "c32 a");
            cmp(b[l], longint'($signed(wr[l][15:0])), longint'($signed(wr[l][31:16])), "c32 b");
          end
          for (int l = 2; l < 4; l++) begin cmp(a[l], 0, 0, "c32 idle a"); cmp(b[l], 0, 0, "c32 idle b"); end
        end
        default:
          for (int l = 0; l < 4; l++) begin
            logic [31:0] x, y;
            x = wl[l/2] >> (16 * (l % 2));
            y = wr[l/2] >> (16 * (l % 2));
            cmp(a[l], longint'($signed(x[7:0])), longint'($signed(x[15:8])), "c16 a");
            cmp(b[l], longint'($signed(y[7:0])), longint'($signed(y[15:8])), "c16 b");
          end
      endcase
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
