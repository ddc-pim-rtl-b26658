// tb_ddc_aru -- self-checking test of the accumulate and recover unit.
// Feeds random row partial sums and input sums for MVMs of 1..8 rows and
// checks sum(psum) + sum(isum) * M (recover on) or sum(psum) (off), with
// res_valid one cycle after the last row.
module tb_ddc_aru;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, psum_valid, row_first, row_last, recover_en, res_valid;
  logic signed [31:0] psum, res;
  logic signed [15:0] isum;
  logic signed [7:0] m;
  longint sp, si, expv;
  int nr;

  ddc_aru #(.PW(32), .IW(16)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; psum_valid = 0; row_first = 0; row_last = 0; recover_en = 0; psum = 0; isum = 0; m = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      nr = $urandom_range(1, 8); sp = 0; si = 0;
      m = 8'($urandom()); recover_en = n % 2;
      for (int r = 0; r < nr; r++) begin
        @(negedge clk);
        psum = $signed($urandom_range(0, 2000000)) - 1000000;
        isum = 16'($signed($urandom_range(0, 8000)) - 4000);
        sp += psum; si += isum;
        psum_valid = 1; row_first = (r == 0); row_last = (r == nr - 1);
        @(negedge clk); psum_valid = 0;
        checks++;
        if (res_valid !== (r == nr - 1)) begin failures++; $display("FAIL timing"); end
      end
      expv = recover_en ? sp + si * longint'(m) : sp;
      checks++;
      if (longint'(res) != expv) begin failures++; $display("FAIL n=%0d got %0d exp %0d", n, res, expv); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
