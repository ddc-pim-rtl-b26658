// tb_ddc_instr_mem -- self-checking test of the instruction memory.
// Fills all 1024 words with random 64-bit values and reads every one back
// one cycle after the request.
module tb_ddc_instr_mem;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we, re;
  logic [9:0] waddr, raddr;
  logic [63:0] wdata, rdata;
  logic [63:0] d [1024];

  ddc_instr_mem dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int i = 0; i < 1024; i++) begin
      d[i] = {$urandom(), $urandom()};
      @(negedge clk); we = 1; waddr = 10'(i); wdata = d[i];
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk); re = 1; raddr = 10'(1023 - i);
      @(negedge clk); re = 0; checks++;
      if (rdata !== d[1023 - i]) begin failures++; $display("FAIL %0d", 1023 - i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
