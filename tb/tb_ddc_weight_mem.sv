// tb_ddc_weight_mem -- self-checking test of the weight memory (full size).
// Writes random words at random addresses spread over the whole 256 KB,
// including the first and last word, and reads them back with a one-cycle
// read latency; the read data must hold while re is low.
module tb_ddc_weight_mem;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we, re;
  logic [16:0] waddr, raddr;
  logic [15:0] wdata, rdata;
  logic [16:0] a [200];
  logic [15:0] d [200];

  ddc_weight_mem dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int i = 0; i < 200; i++) begin
      a[i] = (i == 0) ? 17'd0 : (i == 1) ? 17'h1FFFF : 17'(i * 655 + $urandom_range(0, 600));
      d[i] = 16'($urandom());
      @(negedge clk); we = 1; waddr = a[i]; wdata = d[i];
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk); re = 1; raddr = a[i];
      @(negedge clk); re = 0; checks++;
      if (rdata !== d[i]) begin failures++; $display("FAIL addr %h", a[i]); end
      @(negedge clk); checks++;
      if (rdata !== d[i]) begin failures++; $display("FAIL hold %h", a[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
