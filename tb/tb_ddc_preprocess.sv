// tb_ddc_preprocess -- self-checking test of the pre-process unit.
// A memory model with one-cycle read latency holds random input vectors.
// For std (2 words per step) and dw (4 words per step) MVMs of 1..5 steps
// the testbench rebuilds every compartment's byte from the eight broadcast
// bits, checks INP/INN, the row address, the row/bit flags and the four input
// sums, and checks that after the first step every step takes 8 cycles.
module tb_ddc_preprocess;
  import ddc_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, start, dw, fm_re, done;
  logic [11:0] in_addr, fm_addr;
  logic [5:0] row0, row;
  logic [6:0] nrows;
  logic [127:0] fm_rdata;
  cmp_ctl_t ctl;
  logic [31:0] inp, inn;
  logic [3:0][15:0] isum;
  logic [127:0] fmem [256];
  logic [7:0] gp [32], gn [32];
  int step, bitc, cyc, first_cyc, base, wpv;
  logic [7:0] ep, en;
  int es [4];

  ddc_preprocess #(.NCOMP(32)) dut (.*);

  always_ff @(posedge clk) if (fm_re) fm_rdata <= fmem[fm_addr];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; start = 0; dw = 0; in_addr = 0; row0 = 0; nrows = 1;
    for (int i = 0; i < 256; i++) fmem[i] = {$urandom(), $urandom(), $urandom(), $urandom()};
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 30; n++) begin
      @(negedge clk);
      dw = n % 2; nrows = 7'($urandom_range(1, 5)); row0 = 6'($urandom_range(0, 50));
      base = $urandom_range(0, 200); in_addr = 12'(base); start = 1;
      wpv = dw ? 4 : 2;
      @(negedge clk); start = 0;
      step = 0; bitc = 0; cyc = 0; first_cyc = -1;
      while (step < nrows && cyc < 500) begin
        @(posedge clk); #1; cyc++;
        if (ctl.valid) begin
          if (first_cyc < 0) first_cyc = cyc;
          for (int c = 0; c < 32; c++) begin gp[c][7 - bitc] = inp[c]; gn[c][7 - bitc] = inn[c]; end
          checks++;
          if (ctl.bit_first !== (bitc == 0) || ctl.bit_last !== (bitc == 7) ||
              ctl.row_first !== (step == 0) || ctl.row_last !== (step == nrows - 1) ||
              row !== 6'(row0 + step) || done !== (bitc == 7 && step == nrows - 1)) begin
            failures++; $display("FAIL flags n=%0d step=%0d bit=%0d", n, step, bitc);
          end
          if (bitc == 0) begin
            es = '{0, 0, 0, 0};
            for (int c = 0; c < 32; c++) begin
              ep = fmem[base + step * wpv + c / 16][8 * (c % 16) +: 8];
              en = dw ? fmem[base + step * wpv + 2 + c / 16][8 * (c % 16) +: 8] : ep;
              if (!dw) for (int k = 0; k < 4; k++) es[k] += $signed(ep);
              else begin es[c < 16 ? 0 : 2] += $signed(ep); es[c < 16 ? 1 : 3] += $signed(en); end
            end
            for (int k = 0; k < 4; k++) begin
              checks++;
              if ($signed(isum[k]) != es[k]) begin failures++; $display("FAIL isum n=%0d k=%0d", n, k); end
            end
          end
          if (bitc == 7) begin
            for (int c = 0; c < 32; c++) begin
              ep = fmem[base + step * wpv + c / 16][8 * (c % 16) +: 8];
              en = dw ? fmem[base + step * wpv + 2 + c / 16][8 * (c % 16) +: 8] : ep;
              checks++;
              if (gp[c] !== ep || gn[c] !== en) begin failures++; $display("FAIL data n=%0d step=%0d c=%0d", n, step, c); end
            end
            step++;
          end
          bitc = (bitc + 1) % 8;
        end
      end
      checks++;
      if (cyc - first_cyc + 1 != 8 * nrows) begin
        failures++; $display("FAIL rate: %0d cycles for %0d steps", cyc - first_cyc + 1, nrows);
      end
      repeat (3) @(negedge clk);
      checks++;
      if (ctl.valid) begin failures++; $display("FAIL still valid after MVM"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
