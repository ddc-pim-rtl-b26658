// tb_ddc_pingpong_mem -- self-checking test of the ping-pong memory.
// Loads both banks through the external port, checks that compute reads see
// bank `sel` and compute writes land in the other bank, for both values of
// sel, and that the external port reads either bank.
module tb_ddc_pingpong_mem;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic sel, c_re, c_we, e_bank, e_we, e_re;
  logic [11:0] c_raddr, c_waddr, e_addr;
  logic [127:0] c_rdata, c_wdata, e_wdata, e_rdata;
  logic [127:0] m [2][64];
  logic [127:0] v;

  ddc_pingpong_mem dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sel = 0; c_re = 0; c_we = 0; e_bank = 0; e_we = 0; e_re = 0;
    c_raddr = 0; c_waddr = 0; e_addr = 0; c_wdata = 0; e_wdata = 0;
    for (int b = 0; b < 2; b++)
      for (int i = 0; i < 64; i++) begin
        m[b][i] = {$urandom(), $urandom(), $urandom(), $urandom()};
        @(negedge clk); e_we = 1; e_bank = 1'(b); e_addr = 12'(i * 61); e_wdata = m[b][i];
      end
    @(negedge clk); e_we = 0;
    for (int s = 0; s < 2; s++) begin
      sel = 1'(s);
      for (int i = 0; i < 64; i++) begin
        @(negedge clk); c_re = 1; c_raddr = 12'(i * 61);
        @(negedge clk); c_re = 0; checks++;
        if (c_rdata !== m[s][i]) begin failures++; $display("FAIL c read sel=%0d i=%0d", s, i); end
      end
      for (int i = 0; i < 16; i++) begin
        v = {$urandom(), $urandom(), $urandom(), $urandom()};
        m[1 - s][i] = v;
        @(negedge clk); c_we = 1; c_waddr = 12'(i * 61); c_wdata = v;
      end
      @(negedge clk); c_we = 0;
      for (int b = 0; b < 2; b++)
        for (int i = 0; i < 64; i++) begin
          @(negedge clk); e_re = 1; e_bank = 1'(b); e_addr = 12'(i * 61);
          @(negedge clk); e_re = 0; checks++;
          if (e_rdata !== m[b][i]) begin failures++; $display("FAIL e read b=%0d i=%0d", b, i); end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
