// tb_ddc_top -- end-to-end test of the DDC-PIM accelerator at its default
// (paper) size: four macros of 32 compartments x 64 rows.
//
// Through the off-chip ports the testbench fills the weight memory with
// FCC-style weights (for every stored weight w_c and mean M of its filter
// pair, the two biased-comp filters are w_c + M and ~w_c + M), the M values
// and the input feature map, then writes a program:
//   LOADW x2 (all 8192 PIM rows), LOADM,
//   MVM double std conv with recover (8 rows),
//   MVM depthwise stage 0 and stage 1 (4 rows each, recover),
//   MVM FC in regular mode with ReLU (5 rows),
//   two MVMs pooled into one output word (max pooling),
//   one MVM over all 64 rows (peak rate: at most 8 cycles per row + 16),
//   SWAP, then an MVM whose input is the output of the first MVMs,
//   HALT.
// A program-level model here interprets the same program over a copy of the
// feature memory; after `done` every written output word is read back from
// both banks and compared.  It also reads PIM rows back in normal SRAM mode,
// checks that every row step of a running MVM takes 8 cycles with no gap
// (input prefetch), and that res_valid follows the last input bit by three
// cycles.  Each mechanism is counted and a mechanism never seen to work
// counts as a failure.
module tb_ddc_top;
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

  // ---------------- reference state ----------------
  logic [15:0]       pim [4][64][32];   // [macro][row][comp]
  logic signed [7:0] mv  [4][4];        // M values per macro
  logic [127:0]      fm  [2][4096];     // feature memory model
  logic [63:0]       prog [32];
  int                nprog;

  // mechanism counters
  int n_full, n_rate, mvm_t0;
  int n_double, n_regular, n_dw0, n_dw1, n_recover, n_pool, n_swap, n_stream, n_lat, n_sram, n_chain;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- monitors ----------------
  // row-step streaming: count valid cycles from pre_start to pre-process done
  int  vcnt, ncyc, nrows_run; bit running; int lat_cnt; bit lat_arm;
  always @(posedge clk) if (rst_n) begin
    if (dut.pre_start) begin running <= 1; vcnt <= 0; ncyc <= 0; nrows_run <= int'(dut.pre_nrows); end
    else if (running) begin
      if (dut.ctl.valid || vcnt > 0) ncyc <= ncyc + 1;
      if (dut.ctl.valid) vcnt <= vcnt + 1;
      if (dut.pre_done) begin
        running <= 0;
        checks++;
        if (vcnt + 1 != 8 * nrows_run || ncyc + 1 != 8 * nrows_run) begin
          failures++; $display("FAIL stream: %0d valid in %0d cycles for %0d rows", vcnt + 1, ncyc + 1, nrows_run);
        end else n_stream++;
      end
    end
    // pipeline latency: res_valid three cycles after the last input bit
    if (dut.pre_done) begin lat_arm <= 1; lat_cnt <= 0; end
    else if (lat_arm) begin
      lat_cnt <= lat_cnt + 1;
      if (dut.res_valid[0]) begin
        lat_arm <= 0; checks++;
        if (lat_cnt + 1 != 3) begin failures++; $display("FAIL latency %0d", lat_cnt + 1); end
        else n_lat++;
      end
    end
  end

  // peak rate: a 64-row MVM over all four macros is 4 x 4 x 32 x 64 MACs
  // (65536 operations); from pre_start to the output write it must take no
  // more than 8 cycles per row plus 16 cycles of fill and drain.
  always @(posedge clk) if (rst_n) begin
    if (dut.pre_start) mvm_t0 <= 0; else mvm_t0 <= mvm_t0 + 1;
    if (dut.pp_we && nrows_run == 64) begin
      checks++;
      $display("64-row MVM: %0d cycles, %0d operations per cycle", mvm_t0 + 1, 65536 / (mvm_t0 + 1));
      if (mvm_t0 + 1 > 8 * 64 + 16) begin failures++; $display("FAIL 64-row MVM took %0d cycles", mvm_t0 + 1); end
      else n_rate++;
    end
  end

  // ---------------- program model ----------------
  function automatic logic [7:0] in_byte(logic [127:0] w, int c);
    return w[8 * (c % 16) +: 8];
  endfunction

  task automatic run_model();
    logic sel; mvm_instr_t mi; int pool [16];
    logic signed [7:0] x [32], y [32];
    longint acc [16];
    logic [127:0] ow;
    int step, lane, mix, v;
    logic [7:0] wa, wb;
    sel = 0;
    for (int p = 0; p < nprog; p++) begin
      mi = mvm_instr_t'(prog[p]);
      if (mi.op == OP_SWAP) sel = ~sel;
      if (mi.op != OP_MVM) continue;
      for (int i = 0; i < 16; i++) acc[i] = 0;
      step = mi.dw ? 4 : 2;
      for (int k = 0; k < int'(mi.nrows); k++) begin
        for (int c = 0; c < 32; c++) begin
          x[c] = in_byte(fm[sel][12'(mi.in_addr + 12'(k * step + c / 16))], c);
          y[c] = mi.dw ? in_byte(fm[sel][12'(mi.in_addr + 12'(k * step + 2 + c / 16))], c) : x[c];
        end
        for (int m = 0; m < 4; m++)
          for (int c = 0; c < 32; c++) begin
            wa = pim[m][mi.row0 + k][c][15:8];
            wb = pim[m][mi.row0 + k][c][7:0];
            if (!mi.dw) begin
              if (mi.mode == 2'(MODE_DOUBLE) && mi.recover) begin
                // FCC: the four channels are the biased-comp filters
                acc[4*m+0] += x[c] * (longint'($signed(wa))  + mv[m][0]);
                acc[4*m+1] += x[c] * (longint'($signed(~wa)) + mv[m][0]);
                acc[4*m+2] += x[c] * (longint'($signed(wb))  + mv[m][1]);
                acc[4*m+3] += x[c] * (longint'($signed(~wb)) + mv[m][1]);
              end else begin
                acc[4*m+0] += x[c] * $signed(wa);
                acc[4*m+2] += x[c] * $signed(wb);
                if (mi.mode == 2'(MODE_DOUBLE)) begin
                  acc[4*m+1] += x[c] * $signed(~wa);
                  acc[4*m+3] += x[c] * $signed(~wb);
                end
              end
            end else begin
              lane = (c < 16) ? 0 : 2;
              mix  = 2 * int'(mi.stage) + lane / 2;
              acc[4*m+lane]   += x[c] * ($signed(mi.stage ? wb : wa)  + (mi.recover ? longint'(mv[m][mix]) : 0));
              acc[4*m+lane+1] += y[c] * ($signed(mi.stage ? ~wb : ~wa) + (mi.recover ? longint'(mv[m][mix]) : 0));
            end
          end
      end
      for (int i = 0; i < 16; i++) begin
        v = int'(acc[i] >>> mi.shift);
        if (mi.relu && v < 0) v = 0;
        if (v > 127) v = 127;
        if (v < -128) v = -128;
        if (mi.pool_first || v > pool[i]) pool[i] = v;
        ow[8*i +: 8] = 8'(pool[i]);
      end
      if (mi.pool_last) fm[~sel][mi.out_addr] = ow;
    end
  endtask

  function automatic logic [63:0] mvm(int in_addr, int out_addr, int row0, int nrows, core_mode_e mode,
                                      bit dw, bit stage, bit recover, bit relu, int shift, bit pf, bit pl);
    mvm_instr_t mi;
    mi = '0;
    mi.op = OP_MVM; mi.in_addr = 12'(in_addr); mi.out_addr = 12'(out_addr);
    mi.row0 = 6'(row0); mi.nrows = 7'(nrows); mi.mode = 2'(mode); mi.dw = dw; mi.stage = stage;
    mi.recover = recover; mi.relu = relu; mi.shift = 5'(shift); mi.pool_first = pf; mi.pool_last = pl;
    return mi;
  endfunction

  // ---------------- stimulus ----------------
  logic [127:0] w; int cyc; logic [12:0] ra; mvm_instr_t pi;
  initial begin
    rst_n = 0; start = 0;
    ext_im_we = 0; ext_im_addr = 0; ext_im_wdata = 0;
    ext_wm_we = 0; ext_wm_addr = 0; ext_wm_wdata = 0;
    ext_fm_we = 0; ext_fm_re = 0; ext_fm_bank = 0; ext_fm_addr = 0; ext_fm_wdata = 0;
    ext_pim_rd_en = 0; ext_pim_rd_addr = 0;
    for (int b = 0; b < 2; b++) for (int a = 0; a < 4096; a++) fm[b][a] = '0;
    repeat (3) @(negedge clk); rst_n = 1;

    // weights: weight-memory address = PIM address {macro, row, comp}
    for (int m = 0; m < 4; m++) for (int r = 0; r < 64; r++) for (int c = 0; c < 32; c++) begin
      pim[m][r][c] = 16'($urandom());
      @(negedge clk); ext_wm_we = 1; ext_wm_addr = 17'(m * 2048 + r * 32 + c); ext_wm_wdata = pim[m][r][c];
    end
    // mean values (small, as the mean of a filter pair)
    for (int j = 0; j < 8; j++) begin
      mv[j / 2][2 * (j % 2)]     = 8'($urandom_range(0, 16) - 8);
      mv[j / 2][2 * (j % 2) + 1] = 8'($urandom_range(0, 16) - 8);
      @(negedge clk); ext_wm_we = 1; ext_wm_addr = 17'(8192 + j);
      ext_wm_wdata = {mv[j / 2][2 * (j % 2) + 1], mv[j / 2][2 * (j % 2)]};
    end
    @(negedge clk); ext_wm_we = 0;
    // input feature map in bank 0
    for (int a = 0; a < 256; a++) begin
      w = {$urandom(), $urandom(), $urandom(), $urandom()};
      fm[0][a] = w;
      @(negedge clk); ext_fm_we = 1; ext_fm_bank = 0; ext_fm_addr = 12'(a); ext_fm_wdata = w;
    end
    @(negedge clk); ext_fm_we = 0;

    // program
    nprog = 0;
    prog[nprog++] = {4'(OP_LOADW), 17'd0,    13'd0,    13'd4096, 17'd0};
    prog[nprog++] = {4'(OP_LOADW), 17'd4096, 13'd4096, 13'd4096, 17'd0};
    prog[nprog++] = {4'(OP_LOADM), 17'd8192, 43'd0};
    prog[nprog++] = mvm(0,  100, 0,  8, MODE_DOUBLE,  0, 0, 1, 0, 12, 1, 1);  // std conv, FCC
    prog[nprog++] = mvm(16, 101, 10, 4, MODE_DOUBLE,  1, 0, 1, 0, 11, 1, 1);  // dw stage 0
    prog[nprog++] = mvm(16, 102, 10, 4, MODE_DOUBLE,  1, 1, 1, 0, 11, 1, 1);  // dw stage 1
    prog[nprog++] = mvm(40, 103, 20, 5, MODE_REGULAR, 0, 0, 0, 1, 12, 1, 1);  // FC, regular
    prog[nprog++] = mvm(60, 104, 30, 6, MODE_DOUBLE,  0, 0, 1, 0, 12, 1, 0);  // pool window
    prog[nprog++] = mvm(80, 104, 40, 6, MODE_DOUBLE,  0, 0, 1, 0, 12, 0, 1);
    prog[nprog++] = mvm(120, 105, 0, 64, MODE_DOUBLE, 0, 0, 1, 0, 14, 1, 1); // all 64 rows
    prog[nprog++] = {4'(OP_SWAP), 60'd0};
    prog[nprog++] = mvm(100, 200, 50, 1, MODE_DOUBLE, 0, 0, 1, 1, 8, 1, 1);  // next layer
    prog[nprog++] = {4'(OP_HALT), 60'd0};
    for (int i = 0; i < nprog; i++) begin
      @(negedge clk); ext_im_we = 1; ext_im_addr = 10'(i); ext_im_wdata = prog[i];
    end
    @(negedge clk); ext_im_we = 0;
    run_model();

    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    $display("program ran in %0d cycles", cyc);

    // mechanism results
    for (int p = 0; p < nprog; p++) begin
      pi = mvm_instr_t'(prog[p]);
      if (pi.op != OP_MVM || !pi.pool_last) continue;
      @(negedge clk); ext_fm_re = 1; ext_fm_bank = (pi.out_addr == 200) ? 1'b0 : 1'b1; ext_fm_addr = pi.out_addr;
      @(negedge clk); ext_fm_re = 0; checks++;
      if (ext_fm_rdata !== fm[ext_fm_bank][pi.out_addr]) begin
        failures++; $display("FAIL output %0d: got %h exp %h", pi.out_addr, ext_fm_rdata, fm[ext_fm_bank][pi.out_addr]);
      end else begin
        if (pi.out_addr == 100) begin n_double++; n_recover++; end
        if (pi.out_addr == 101) n_dw0++;
        if (pi.out_addr == 102) n_dw1++;
        if (pi.out_addr == 103) n_regular++;
        if (pi.out_addr == 104) n_pool++;
        if (pi.out_addr == 105) n_full++;
        if (pi.out_addr == 200) begin n_chain++; n_swap += (bank_sel == 1'b1); end
      end
    end
    // the outputs must hold real data, not a trivially matching zero word
    checks++;
    if (fm[1][100] == '0 || fm[1][103] == '0) begin failures++; $display("FAIL trivial outputs"); end
    // normal SRAM mode readback of PIM rows
    for (int t = 0; t < 64; t++) begin
      ra = 13'($urandom());
      @(negedge clk); ext_pim_rd_en = 1; ext_pim_rd_addr = ra;
      @(negedge clk); ext_pim_rd_en = 0; checks++;
      if (ext_pim_rd_data !== pim[ra[12:11]][ra[10:5]][ra[4:0]]) begin failures++; $display("FAIL pim read %h", ra); end
      else n_sram++;
    end

    $display("mechanisms: double %0d regular %0d dw0 %0d dw1 %0d recover %0d pool %0d swap %0d chain %0d stream %0d latency %0d sram %0d",
             n_double, n_regular, n_dw0, n_dw1, n_recover, n_pool, n_swap, n_chain, n_stream, n_lat, n_sram);
    checks += 13;
    if (n_full == 0)    begin failures++; $display("FAIL no full-array MVM"); end
    if (n_rate == 0)    begin failures++; $display("FAIL peak rate not reached"); end
    if (n_double == 0)  begin failures++; $display("FAIL no double computing"); end
    if (n_regular == 0) begin failures++; $display("FAIL no regular computing"); end
    if (n_dw0 == 0)     begin failures++; $display("FAIL no dw stage 0"); end
    if (n_dw1 == 0)     begin failures++; $display("FAIL no dw stage 1"); end
    if (n_recover == 0) begin failures++; $display("FAIL no recover"); end
    if (n_pool == 0)    begin failures++; $display("FAIL no pooling"); end
    if (n_swap == 0)    begin failures++; $display("FAIL no bank swap"); end
    if (n_chain == 0)   begin failures++; $display("FAIL no layer chaining"); end
    if (n_stream != 8)  begin failures++; $display("FAIL row streaming seen %0d times", n_stream); end
    if (n_lat != 8)     begin failures++; $display("FAIL latency seen %0d times", n_lat); end
    if (n_sram == 0)    begin failures++; $display("FAIL no SRAM readback"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
