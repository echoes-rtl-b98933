// tb_i2s_clkgen: self-checking test of the BCLK divider.
//
// For random divider values (including 0, the fastest setting) the test
// measures every BCLK half period, which must be div+1 clock cycles, and
// checks that rise_o / fall_o pulse for one cycle exactly in the first cycle
// of the high / low phase.  While disabled BCLK must stay low with no
// strobes.
`timescale 1ns/1ps
module tb_i2s_clkgen;
  logic clk = 0, rst_n = 0, en = 0;
  logic [15:0] div, div_q = 0;
  logic bclk, rise, fall, bclk_d, en_q = 0;
  int checks = 0, failures = 0, run = 0, nhalf = 0;
  always #5 clk = ~clk;

  i2s_clkgen #(.DIV_W(16)) dut (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .div_i(div),
                                .bclk_o(bclk), .rise_o(rise), .fall_o(fall));

  always @(posedge clk) begin
    bclk_d <= bclk;
    en_q   <= en;                 // the enable the outputs were computed with
    div_q  <= div;
    if (rst_n && !en_q) begin
      run = 0;
      checks++;
      if (bclk || rise || fall) begin failures++; $display("FAIL: activity while disabled"); end
    end else if (rst_n) begin
      checks++;
      if (rise !== (bclk && !bclk_d) || fall !== (!bclk && bclk_d)) begin
        failures++; $display("FAIL: strobe mismatch");
      end
      if (bclk != bclk_d) begin
        if (run > 0) begin
          checks++;
          nhalf++;
          if (run != int'(div_q) + 1) begin failures++; $display("FAIL: half period %0d div %0d", run, div_q); end
        end
        run = 1;
      end else if (run > 0) run++;
    end
  end

  initial begin
    div = 0; bclk_d = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int it = 0; it < 40; it++) begin
      div = (it == 0) ? 16'd0 : 16'($urandom % 12);
      repeat (3) @(posedge clk);
      #1 en = 1;
      begin
        int h0;
        h0 = nhalf;
        repeat (20 * (int'(div) + 1) + 5) @(posedge clk);
        checks++;
        if (nhalf - h0 < 18) begin failures++; $display("FAIL: only %0d half periods with div %0d", nhalf - h0, div); end
      end
      #1 en = 0;
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
