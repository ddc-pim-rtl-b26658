// tb_ddc_mbv2_block -- workload test: a MobileNetV2-style layer pair on the
// full-size accelerator.
//
// Layer 1 is a 3x3 depthwise convolution (stride 1, zero padding 1, ReLU) on
// a 6x6x32 INT8 feature map; layer 2 is a 1x1 pointwise projection 32 -> 16
// with no activation (linear bottleneck).  Both use FCC weights: every
// filter pair is (w_c + M, ~w_c + M) for a stored w_c and a mean value M.
//
// Mapping used:
//   depthwise  macro 0, rows 0..3.  Channel group g (4 channels, g = 0..7)
//              runs in stage g%2 on row g/2: channels 4g+0 / 4g+1 are the Q
//              and Qbar side of compartments 0..8 (INP / INN), channels
//              4g+2 / 4g+3 the same on compartments 16..24.  One MVM per
//              pixel and group, output bytes 0..3.  Stage s and lane pair
//              share M[2s], M[2s+1] over the groups of that stage.
//   pointwise  row 10 of all four macros; output channel 4m+c is lane c of
//              macro m; one MVM (one row step of 32 inputs) per pixel.
// The off-chip side is played by the testbench: it writes the weights (the
// pointwise ones while the depthwise layer is running, as a weight prefetch
// for the next layer, counted and checked), the
// im2col-arranged depthwise inputs and, between the two programs, gathers
// the depthwise outputs into the pointwise input layout.  The final 6x6x16
// map is compared with a direct convolution computed here from the real
// filters, with the same requantisation (shift, ReLU, INT8 saturation).
module tb_ddc_mbv2_block;
  import ddc_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, start, busy, done, bank_sel;
  logic ext_im_we; logic [9:0] ext_im_addr; logic [63:0] ext_im_wdata;
  logic ext_wm_we; logic [16:0] ext_wm_addr; logic [15:0] ext_wm_wdata;
  logic ext_fm_we, ext_fm_re, ext_fm_bank; logic [11:0] ext_fm_addr;
  logic [127:0] ext_fm_wdata, ext_fm_rdata;
  logic ext_pim_rd_en; logic [12:0] ext_pim_rd_addr; logic [15:0] ext_pim_rd_data;

  ddc_top dut (.*);

  localparam int H = 6, W = 6, C = 32, CO = 16, SH1 = 7, SH2 = 8;
  localparam int DW_IN = 0, DW_OUT = 0, PW_IN = 512, PW_OUT = 1024;

  logic signed [7:0] x   [H][W][C];
  logic signed [7:0] wdw [4][32];      // [row][comp] -> {wA,wB} halves below
  logic [15:0]       dwrow [4][32];
  logic [15:0]       pwrow [4][32];    // [macro][comp]
  logic signed [7:0] mdw [4];
  logic signed [7:0] mpw [4][2];
  int                fdw [C][9];       // real depthwise filters
  int                fpw [CO][C];      // real pointwise filters
  logic signed [7:0] y1 [H][W][C];
  logic signed [7:0] y2 [H][W][CO];
  logic [63:0]       prog [1024];
  int                np, cyc1, cyc2, n_overlap;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [7:0] requant(longint v, int sh, bit relu);
    longint q;
    q = v >>> sh;
    if (relu && q < 0) q = 0;
    if (q > 127) q = 127;
    if (q < -128) q = -128;
    return 8'(q);
  endfunction

  function automatic logic [63:0] mvm(int in_addr, int out_addr, int row0, bit dw, bit stage, bit relu, int shift);
    mvm_instr_t mi;
    mi = '0;
    mi.op = OP_MVM; mi.in_addr = 12'(in_addr); mi.out_addr = 12'(out_addr); mi.row0 = 6'(row0);
    mi.nrows = 7'd1; mi.mode = 2'(MODE_DOUBLE); mi.dw = dw; mi.stage = stage; mi.recover = 1'b1;
    mi.relu = relu; mi.shift = 5'(shift); mi.pool_first = 1'b1; mi.pool_last = 1'b1;
    return mi;
  endfunction

  task automatic wm_write(int a, logic [15:0] d);
    @(negedge clk); ext_wm_we = 1; ext_wm_addr = 17'(a); ext_wm_wdata = d;
    @(negedge clk); ext_wm_we = 0;
  endtask

  task automatic fm_write(bit b, int a, logic [127:0] d);
    @(negedge clk); ext_fm_we = 1; ext_fm_bank = b; ext_fm_addr = 12'(a); ext_fm_wdata = d;
    @(negedge clk); ext_fm_we = 0;
  endtask

  task automatic fm_read(bit b, int a, output logic [127:0] d);
    @(negedge clk); ext_fm_re = 1; ext_fm_bank = b; ext_fm_addr = 12'(a);
    @(negedge clk); ext_fm_re = 0; d = ext_fm_rdata;
  endtask

  task automatic run_prog(output int cyc);
    for (int i = 0; i < np; i++) begin
      @(negedge clk); ext_im_we = 1; ext_im_addr = 10'(i); ext_im_wdata = prog[i];
    end
    @(negedge clk); ext_im_we = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 0;
    while (!done && cyc < 300000) begin @(negedge clk); cyc++; end
  endtask

  logic [127:0] wd, w0, w1, w2, w3;
  int tap, ch, lane, s, g, r, cmp;
  longint acc;
  initial begin
    rst_n = 0; start = 0;
    ext_im_we = 0; ext_im_addr = 0; ext_im_wdata = 0;
    ext_wm_we = 0; ext_wm_addr = 0; ext_wm_wdata = 0;
    ext_fm_we = 0; ext_fm_re = 0; ext_fm_bank = 0; ext_fm_addr = 0; ext_fm_wdata = 0;
    ext_pim_rd_en = 0; ext_pim_rd_addr = 0;
    repeat (3) @(negedge clk); rst_n = 1;

    // ---- data and FCC weights ----
    for (int i = 0; i < H; i++) for (int j = 0; j < W; j++) for (int c = 0; c < C; c++)
      x[i][j][c] = 8'($urandom_range(0, 127) - 64);
    for (int k = 0; k < 4; k++) mdw[k] = 8'($urandom_range(0, 10) - 5);
    for (int rr = 0; rr < 4; rr++) for (int c = 0; c < 32; c++)
      dwrow[rr][c] = (c % 16 < 9) ? 16'($urandom()) : 16'h0000;
    // real depthwise filters from the stored words
    for (int gg = 0; gg < 8; gg++) for (int ln = 0; ln < 4; ln++) for (int t = 0; t < 9; t++) begin
      logic [7:0] wv;
      s = gg % 2; r = gg / 2; cmp = (ln < 2 ? 0 : 16) + t;
      wv = s ? dwrow[r][cmp][7:0] : dwrow[r][cmp][15:8];
      if (ln % 2) wv = ~wv;
      fdw[4*gg + ln][t] = int'($signed(wv)) + int'(mdw[2*s + ln/2]);
    end
    for (int m = 0; m < 4; m++) begin
      mpw[m][0] = 8'($urandom_range(0, 10) - 5); mpw[m][1] = 8'($urandom_range(0, 10) - 5);
      for (int c = 0; c < 32; c++) pwrow[m][c] = 16'($urandom());
      for (int ln = 0; ln < 4; ln++) for (int c = 0; c < 32; c++) begin
        logic [7:0] wv;
        wv = (ln < 2) ? pwrow[m][c][15:8] : pwrow[m][c][7:0];
        if (ln % 2) wv = ~wv;
        fpw[4*m + ln][c] = int'($signed(wv)) + int'(mpw[m][ln/2]);
      end
    end

    // ---- golden model ----
    for (int i = 0; i < H; i++) for (int j = 0; j < W; j++) for (int c = 0; c < C; c++) begin
      acc = 0;
      for (int di = -1; di <= 1; di++) for (int dj = -1; dj <= 1; dj++)
        if (i + di >= 0 && i + di < H && j + dj >= 0 && j + dj < W)
          acc += longint'(x[i+di][j+dj][c]) * fdw[c][3*(di+1) + (dj+1)];
      y1[i][j][c] = requant(acc, SH1, 1);
    end
    for (int i = 0; i < H; i++) for (int j = 0; j < W; j++) for (int o = 0; o < CO; o++) begin
      acc = 0;
      for (int c = 0; c < C; c++) acc += longint'(y1[i][j][c]) * fpw[o][c];
      y2[i][j][o] = requant(acc, SH2, 0);
    end

    // ---- weight memory: dw rows at 0.., pw rows at 256.., M at 1024 / 1032 ----
    for (int rr = 0; rr < 4; rr++) for (int c = 0; c < 32; c++) wm_write(rr * 32 + c, dwrow[rr][c]);
    for (int j = 0; j < 8; j++) begin
      wm_write(1024 + j, (j < 2) ? {mdw[2*j+1], mdw[2*j]} : 16'h0000);
    end

    // ---- depthwise inputs, im2col by the host: 4 words per pixel and group ----
    for (int i = 0; i < H; i++) for (int j = 0; j < W; j++) for (int gg = 0; gg < 8; gg++) begin
      w0 = '0; w1 = '0; w2 = '0; w3 = '0;
      for (int t = 0; t < 9; t++) begin
        int ii, jj; logic [7:0] a, b, c2, d;
        ii = i + t / 3 - 1; jj = j + t % 3 - 1;
        if (ii >= 0 && ii < H && jj >= 0 && jj < W) begin
          a = x[ii][jj][4*gg]; b = x[ii][jj][4*gg+1]; c2 = x[ii][jj][4*gg+2]; d = x[ii][jj][4*gg+3];
        end else begin a = 0; b = 0; c2 = 0; d = 0; end
        w0[8*t +: 8] = a; w1[8*t +: 8] = c2; w2[8*t +: 8] = b; w3[8*t +: 8] = d;
      end
      fm_write(0, DW_IN + ((i*W + j)*8 + gg)*4 + 0, w0);
      fm_write(0, DW_IN + ((i*W + j)*8 + gg)*4 + 1, w1);
      fm_write(0, DW_IN + ((i*W + j)*8 + gg)*4 + 2, w2);
      fm_write(0, DW_IN + ((i*W + j)*8 + gg)*4 + 3, w3);
    end

    // ---- program 1: depthwise layer ----
    np = 0;
    prog[np++] = {4'(OP_LOADW), 17'd0,   13'd0,    13'd128, 17'd0};   // macro 0 rows 0..3
    prog[np++] = {4'(OP_LOADM), 17'd1024, 43'd0};
    for (int p = 0; p < H * W; p++) for (int gg = 0; gg < 8; gg++)
      prog[np++] = mvm(DW_IN + (p*8 + gg)*4, DW_OUT + p*8 + gg, gg / 2, 1, gg % 2, 1, SH1);
    prog[np++] = {4'(OP_SWAP), 60'd0};
    prog[np++] = {4'(OP_HALT), 60'd0};
    // the pointwise weights and M values are brought in while the depthwise
    // layer runs (weight prefetch for the next layer)
    fork
      run_prog(cyc1);
      begin
        @(posedge busy); repeat (50) @(negedge clk);
        for (int m = 0; m < 4; m++) for (int c = 0; c < 32; c++) begin
          wm_write(256 + m * 32 + c, pwrow[m][c]);
          if (busy) n_overlap++;
        end
        for (int j = 0; j < 8; j++) wm_write(1032 + j, {mpw[j/2][1], mpw[j/2][0]});
      end
    join
    checks++;
    if (n_overlap != 128) begin failures++; $display("FAIL weight prefetch overlapped %0d of 128 writes", n_overlap); end
    checks++;
    if (!done) begin failures++; $display("FAIL depthwise program did not finish"); end

    // ---- host: gather depthwise outputs (bank 1) into pointwise inputs ----
    for (int p = 0; p < H * W; p++) begin
      logic [255:0] v;
      v = '0;
      for (int gg = 0; gg < 8; gg++) begin
        fm_read(1, DW_OUT + p*8 + gg, wd);
        for (int ln = 0; ln < 4; ln++) begin
          v[8*(4*gg+ln) +: 8] = wd[8*ln +: 8];
          checks++;
          if (wd[8*ln +: 8] !== y1[p / W][p % W][4*gg+ln]) begin
            failures++; $display("FAIL dw p=%0d ch=%0d got %0d exp %0d", p, 4*gg+ln, $signed(wd[8*ln +: 8]), y1[p/W][p%W][4*gg+ln]);
          end
        end
      end
      fm_write(1, PW_IN + 2*p, v[127:0]);
      fm_write(1, PW_IN + 2*p + 1, v[255:128]);
    end

    // ---- program 2: pointwise layer (bank 1 is now the input bank) ----
    np = 0;
    for (int m = 0; m < 4; m++)
      prog[np++] = {4'(OP_LOADW), 17'(256 + m*32), 13'(m*2048 + 10*32), 13'd32, 17'd0};
    prog[np++] = {4'(OP_LOADM), 17'd1032, 43'd0};
    for (int p = 0; p < H * W; p++) prog[np++] = mvm(PW_IN + 2*p, PW_OUT + p, 10, 0, 0, 0, SH2);
    prog[np++] = {4'(OP_HALT), 60'd0};
    run_prog(cyc2);
    checks++;
    if (!done || bank_sel !== 1'b1) begin failures++; $display("FAIL pointwise program"); end

    for (int p = 0; p < H * W; p++) begin
      fm_read(0, PW_OUT + p, wd);
      for (int o = 0; o < CO; o++) begin
        checks++;
        if (wd[8*o +: 8] !== y2[p / W][p % W][o]) begin
          failures++; $display("FAIL pw p=%0d o=%0d got %0d exp %0d", p, o, $signed(wd[8*o +: 8]), y2[p/W][p%W][o]);
        end
      end
    end
    $display("depthwise: %0d MVMs in %0d cycles; pointwise: %0d MVMs in %0d cycles", H*W*8, cyc1, H*W, cyc2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
