// tb_ddc_pim_core -- self-checking test of the PIM core.
// Writes random rows into all 32 compartments, reads a sample back in normal
// SRAM mode (one-cycle read latency), then runs compute cycles with random
// INP/INN bits in double (std/pw), depthwise (both stages) and regular
// configurations and compares the per-bit channel counts, one cycle later,
// with counts computed from the stored words.
module tb_ddc_pim_core;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, wr_en, rd_en, cmp_en, dw, stage;
  logic [4:0] wr_comp, rd_comp;
  logic [5:0] wr_row, rd_row, row;
  logic [15:0] wr_data, rd_data;
  logic [31:0] inp, inn;
  logic [1:0] en_q, en_qb;
  logic [3:0][7:0][5:0] cnt;
  logic [15:0] mem [32][64];
  int e [4][8];
  logic [7:0] w;
  int cc, ch_sel;

  ddc_pim_core #(.NCOMP(32), .ROWS(64)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; wr_en = 0; rd_en = 0; cmp_en = 0; dw = 0; stage = 0;
    wr_comp = 0; rd_comp = 0; wr_row = 0; rd_row = 0; row = 0; wr_data = 0;
    inp = 0; inn = 0; en_q = 0; en_qb = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int c = 0; c < 32; c++)
      for (int r = 0; r < 64; r++) begin
        mem[c][r] = 16'($urandom());
        @(negedge clk); wr_en = 1; wr_comp = 5'(c); wr_row = 6'(r); wr_data = mem[c][r];
      end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 64; t++) begin
      @(negedge clk); rd_en = 1; rd_comp = 5'($urandom()); rd_row = 6'($urandom());
      @(negedge clk); rd_en = 0; checks++;
      if (rd_data !== mem[rd_comp][rd_row]) begin failures++; $display("FAIL read"); end
    end
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      row = 6'($urandom()); inp = $urandom(); inn = $urandom(); cmp_en = 1;
      dw = (t % 4) >= 2; stage = (t % 4) == 3;
      if (t % 8 == 1) begin en_q = 2'b11; en_qb = 2'b00; end            // regular
      else if (!dw)   begin en_q = 2'b11; en_qb = 2'b11; end            // double
      else            begin en_q = stage ? 2'b10 : 2'b01; en_qb = en_q; end
      if (t % 8 == 1) dw = 0;
      for (int ch = 0; ch < 4; ch++)
        for (int k = 0; k < 8; k++) begin
          e[ch][k] = 0;
          for (int c = 0; c < 32; c++) begin
            if (!dw) begin cc = c; ch_sel = ch; end
            else if (c < 16) begin cc = (ch / 2) * 16 + c; ch_sel = 2 * stage + ch % 2; end
            else continue;
            w = (ch_sel < 2) ? mem[cc][row][15:8] : mem[cc][row][7:0];
            if (ch_sel % 2 == 0) e[ch][k] += en_q[ch_sel/2] & w[k] & inp[cc];
            else                 e[ch][k] += en_qb[ch_sel/2] & ~w[k] & inn[cc];
          end
        end
      @(posedge clk); #1;
      for (int ch = 0; ch < 4; ch++)
        for (int k = 0; k < 8; k++) begin
          checks++;
          if (int'(cnt[ch][k]) != e[ch][k]) begin
            failures++; $display("FAIL t=%0d ch=%0d k=%0d got %0d exp %0d", t, ch, k, cnt[ch][k], e[ch][k]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
