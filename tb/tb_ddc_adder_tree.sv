// tb_ddc_adder_tree -- self-checking test of the per-bit adder tree.
// Random 16 x 8-bit vectors (plus all-ones and all-zeros) are counted per
// bit position by the testbench and compared with the tree's counts.
module tb_ddc_adder_tree;
  int checks = 0, failures = 0;
  logic [15:0][7:0] in_bits;
  logic [7:0][4:0]  cnt;
  int e;

  ddc_adder_tree #(.N(16), .W(8)) dut (.in_bits(in_bits), .cnt(cnt));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      if (t == 0)      in_bits = '1;
      else if (t == 1) in_bits = '0;
      else for (int i = 0; i < 16; i++) in_bits[i] = 8'($urandom());
      #1;
      for (int k = 0; k < 8; k++) begin
        e = 0;
        for (int i = 0; i < 16; i++) e += in_bits[i][k];
        checks++;
        if (int'(cnt[k]) != e) begin failures++; $display("FAIL t=%0d bit %0d got %0d exp %0d", t, k, cnt[k], e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
