// tb_ddc_postprocess -- self-checking test of the post-process unit.
// Random 32-bit results go through shift, ReLU, INT8 saturation and max
// pooling windows of 1..4 results; the written word, its address and the
// write/done timing are compared with a model here.
module tb_ddc_postprocess;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, res_valid, relu, pool_first, pool_last, we, done;
  logic [15:0][31:0] res;
  logic [4:0] shift;
  logic [11:0] out_addr, waddr;
  logic [127:0] wdata;
  int pmax [16];
  int v, win;
  logic [127:0] expw;

  ddc_postprocess #(.NV(16)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; res_valid = 0; relu = 0; pool_first = 0; pool_last = 0; shift = 0; out_addr = 0; res = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 150; n++) begin
      win = $urandom_range(1, 4); relu = 1'($urandom()); shift = 5'($urandom_range(0, 12));
      out_addr = 12'($urandom());
      for (int w = 0; w < win; w++) begin
        @(negedge clk);
        res_valid = 1; pool_first = (w == 0); pool_last = (w == win - 1);
        for (int i = 0; i < 16; i++) begin
          res[i] = $urandom_range(0, 1 << 20) - (1 << 19);
          v = $signed(res[i]) >>> shift;
          if (relu && v < 0) v = 0;
          if (v > 127) v = 127;
          if (v < -128) v = -128;
          if (w == 0 || v > pmax[i]) pmax[i] = v;
        end
        @(negedge clk); res_valid = 0;
        checks++;
        if (we !== (w == win - 1) || done !== 1'b1) begin failures++; $display("FAIL we/done timing"); end
      end
      for (int i = 0; i < 16; i++) expw[8*i +: 8] = 8'(pmax[i]);
      checks++;
      if (wdata !== expw || waddr !== out_addr) begin failures++; $display("FAIL n=%0d got %h exp %h", n, wdata, expw); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
