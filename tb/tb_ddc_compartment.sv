// tb_ddc_compartment -- self-checking test of one compartment.
// Writes random {wA, wB} rows, reads them back, then drives random rows,
// INP/INN bits and per-half enables and checks the four registered channel
// vectors (wA&INP, ~wA&INN, wB&INP, ~wB&INN) one cycle later.
module tb_ddc_compartment;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, wr_en, inp, inn, sample;
  logic [5:0] wr_row, row;
  logic [15:0] wr_data, rd_data;
  logic [1:0] en_q, en_qb;
  logic [3:0][7:0] och, expv;
  logic [15:0] mem [64];

  ddc_compartment #(.ROWS(64)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; wr_en = 0; wr_row = 0; wr_data = 0; row = 0; inp = 0; inn = 0;
    en_q = 0; en_qb = 0; sample = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 64; r++) begin
      mem[r] = 16'($urandom());
      @(negedge clk); wr_en = 1; wr_row = 6'(r); wr_data = mem[r];
    end
    @(negedge clk); wr_en = 0;
    for (int r = 0; r < 64; r++) begin
      row = 6'(r); #1; checks++;
      if (rd_data !== mem[r]) begin failures++; $display("FAIL read %0d", r); end
    end
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      row = 6'($urandom_range(0, 63));
      {inp, inn} = 2'($urandom());
      en_q = 2'($urandom()); en_qb = 2'($urandom());
      sample = 1;
      for (int k = 0; k < 8; k++) begin
        expv[0][k] = en_q[0]  &  mem[row][8 + k] & inp;
        expv[1][k] = en_qb[0] & ~mem[row][8 + k] & inn;
        expv[2][k] = en_q[1]  &  mem[row][k] & inp;
        expv[3][k] = en_qb[1] & ~mem[row][k] & inn;
      end
      @(posedge clk); #1;
      checks++;
      if (och !== expv) begin failures++; $display("FAIL och row %0d got %h exp %h", row, och, expv); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
