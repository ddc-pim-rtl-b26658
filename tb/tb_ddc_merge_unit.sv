// tb_ddc_merge_unit -- self-checking test of the merge unit (4 lanes).
// Each MVM has 1..4 rows of 8 bit cycles with random counts per lane; the
// testbench computes every lane's bit-weighted, shift-accumulated sum over
// the rows plus (sum isum) * M and checks it when res_valid rises, two cycles
// after the LSB cycle of the last row.
module tb_ddc_merge_unit;
  import ddc_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, recover_en, res_valid;
  cmp_ctl_t ctl;
  logic [3:0][7:0][5:0] cnt;
  logic [3:0][15:0] isum;
  logic [3:0][7:0] m;
  logic [3:0][31:0] res;
  longint expv [4];
  longint t;
  int nr, lat;

  ddc_merge_unit #(.NCH(4), .CW(6)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; ctl = '0; cnt = '0; isum = '0; m = '0; recover_en = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      nr = $urandom_range(1, 4); recover_en = n % 2;
      for (int c = 0; c < 4; c++) begin expv[c] = 0; m[c] = 8'($urandom()); end
      for (int r = 0; r < nr; r++) begin
        for (int b = 7; b >= 0; b--) begin
          @(negedge clk);
          // a row's isum is held from its first bit until its psum is taken
          if (b == 7)
            for (int c = 0; c < 4; c++) begin
              isum[c] = 16'($signed($urandom_range(0, 8000)) - 4000);
              if (recover_en) expv[c] += longint'($signed(isum[c])) * longint'($signed(m[c]));
            end
          ctl = '0; ctl.valid = 1; ctl.bit_first = (b == 7); ctl.bit_last = (b == 0);
          ctl.row_first = (r == 0); ctl.row_last = (r == nr - 1);
          for (int c = 0; c < 4; c++) begin
            t = 0;
            for (int k = 0; k < 8; k++) begin
              cnt[c][k] = 6'($urandom_range(0, 32));
              t += (k == 7 ? -128 : (1 << k)) * longint'(cnt[c][k]);
            end
            expv[c] += (b == 7 ? -128 : (1 << b)) * t;
          end
        end
        @(negedge clk); ctl = '0;
      end
      lat = 0;
      while (!res_valid && lat < 10) begin @(posedge clk); #1; lat++; end
      checks++;
      if (lat != 1) begin failures++; $display("FAIL latency %0d", lat); end
      for (int c = 0; c < 4; c++) begin
        checks++;
        if (longint'($signed(res[c])) != expv[c]) begin
          failures++; $display("FAIL n=%0d lane %0d got %0d exp %0d", n, c, $signed(res[c]), expv[c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
