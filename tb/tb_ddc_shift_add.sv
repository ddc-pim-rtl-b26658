// tb_ddc_shift_add -- self-checking test of the shift & add unit.
// Streams eight cycles of random per-bit counts (MSB first) and checks the
// signed partial sum sum_b s_b * 2^b * sum_k v_k * cnt_b[k], with
// s_7 = v_7 = -1 for the sign bits, and that it appears exactly one cycle
// after the LSB cycle.
module tb_ddc_shift_add;
  import ddc_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n;
  cmp_ctl_t ctl;
  logic [7:0][5:0] cnt;
  logic psum_valid, psum_row_first, psum_row_last;
  logic signed [31:0] psum;
  longint expv, t;

  ddc_shift_add #(.CW(6), .PW(32)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; ctl = '0; cnt = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      expv = 0;
      for (int b = 7; b >= 0; b--) begin
        @(negedge clk);
        for (int k = 0; k < 8; k++) cnt[k] = 6'($urandom_range(0, 32));
        t = 0;
        for (int k = 0; k < 8; k++) t += (k == 7 ? -128 : (1 << k)) * longint'(cnt[k]);
        expv += (b == 7 ? -128 : (1 << b)) * t;
        ctl = '0; ctl.valid = 1; ctl.bit_first = (b == 7); ctl.bit_last = (b == 0);
        ctl.row_first = (n % 2 == 0); ctl.row_last = (n % 3 == 0);
        @(posedge clk); #1;
        checks++;
        if (psum_valid !== (b == 0)) begin failures++; $display("FAIL timing n=%0d b=%0d", n, b); end
      end
      checks++;
      if (longint'(psum) != expv || psum_row_first !== (n % 2 == 0) || psum_row_last !== (n % 3 == 0)) begin
        failures++; $display("FAIL n=%0d got %0d exp %0d", n, psum, expv);
      end
      if (n % 5 == 0) begin @(negedge clk); ctl = '0; end  // idle gap
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
