// tb_ddc_reconfig_unit -- self-checking test of the reconfigurable unit.
// For random readout vectors it checks the std/pw routing (channel u summed
// over all 32 compartments) and both depthwise stages (Q and Qbar sides of
// compartments 0-15 and 16-31 as separate channels).
module tb_ddc_reconfig_unit;
  int checks = 0, failures = 0;
  logic [31:0][3:0][7:0] och;
  logic dw, stage;
  logic [3:0][7:0][5:0] cnt;
  int e;

  ddc_reconfig_unit #(.NCOMP(32)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      for (int c = 0; c < 32; c++) och[c] = $urandom();
      dw = (t % 3) != 0; stage = (t % 3) == 2;
      #1;
      for (int ch = 0; ch < 4; ch++)
        for (int k = 0; k < 8; k++) begin
          e = 0;
          if (!dw) begin
            for (int c = 0; c < 32; c++) e += och[c][ch][k];
          end else begin
            for (int c = 0; c < 16; c++) e += och[(ch / 2) * 16 + c][2 * stage + ch % 2][k];
          end
          checks++;
          if (int'(cnt[ch][k]) != e) begin
            failures++; $display("FAIL dw=%0d st=%0d ch=%0d k=%0d got %0d exp %0d", dw, stage, ch, k, cnt[ch][k], e);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
