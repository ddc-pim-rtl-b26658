// tb_ddc_dbmu -- self-checking test of one DBMU.
// Fills all 64 cells with random bits, reads them back, then checks the two
// LPU outputs (Q & INP, ~Q & INN) against the truth table for every row and
// random inputs and path enables.
module tb_ddc_dbmu;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en, wr_bit, inp, inn, en_q, en_qb, rd_bit, o_ch0, o_ch1;
  logic [5:0] wr_row, row;
  logic [63:0] ref_q;

  ddc_dbmu #(.ROWS(64)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_bit = 0; wr_row = 0; row = 0; inp = 0; inn = 0; en_q = 0; en_qb = 0;
    ref_q = {$urandom(), $urandom()};
    for (int r = 0; r < 64; r++) begin
      @(negedge clk); wr_en = 1; wr_row = 6'(r); wr_bit = ref_q[r];
    end
    @(negedge clk); wr_en = 0;
    for (int r = 0; r < 64; r++) begin
      row = 6'(r); #1;
      checks++; if (rd_bit !== ref_q[r]) begin failures++; $display("FAIL read row %0d", r); end
      for (int t = 0; t < 4; t++) begin
        {inp, inn, en_q, en_qb} = 4'($urandom());
        #1;
        checks++;
        if (o_ch0 !== (en_q & ref_q[r] & inp) || o_ch1 !== (en_qb & ~ref_q[r] & inn)) begin
          failures++; $display("FAIL lpu row %0d", r);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
