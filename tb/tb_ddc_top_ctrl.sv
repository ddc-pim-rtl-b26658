// tb_ddc_top_ctrl -- self-checking test of the top controller.
// The testbench models the instruction and weight memories (one-cycle read
// latency) and answers each MVM with a post-process done pulse a random
// number of cycles after pre_start.  A random program of LOADW, LOADM, MVM
// and SWAP instructions ending in HALT is run twice; every PIM row write,
// every M write, the decoded MVM fields, the bank swaps and the final done
// are compared with the program, and LOADW must move one word per cycle.
module tb_ddc_top_ctrl;
  import ddc_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, start, busy, done;
  logic im_re; logic [9:0] im_addr; logic [63:0] im_rdata;
  logic wm_re; logic [16:0] wm_addr; logic [15:0] wm_rdata;
  logic [3:0] pim_wr_en, m_wr_en; logic [4:0] pim_wr_comp; logic [5:0] pim_wr_row;
  logic [15:0] pim_wr_data, m_data; logic m_idx;
  core_cfg_t cfg;
  logic pre_start; logic [11:0] pre_in_addr; logic [5:0] pre_row0; logic [6:0] pre_nrows;
  logic post_relu, post_pool_first, post_pool_last, post_done, bank_sel;
  logic [4:0] post_shift; logic [11:0] post_out_addr;

  ddc_top_ctrl dut (.*);

  logic [63:0] imem [64];
  logic [15:0] wmem [4096];
  always_ff @(posedge clk) begin
    if (im_re) im_rdata <= imem[im_addr[5:0]];
    if (wm_re) wm_rdata <= wmem[wm_addr[11:0]];
  end

  // expected write streams
  logic [12:0] exp_pa [$];
  logic [15:0] exp_pd [$];
  logic [2:0]  exp_mj [$];
  logic [15:0] exp_md [$];
  mvm_instr_t  exp_mvm [$];
  int nswap, nmvm, loadw_cycles, loadw_words, nloadw;
  logic exp_bank;

  // post-process model
  int delay_left = -1;
  always @(posedge clk) begin
    post_done <= 1'b0;
    if (pre_start) delay_left <= $urandom_range(3, 40);
    else if (delay_left > 0) delay_left <= delay_left - 1;
    else if (delay_left == 0) begin post_done <= 1'b1; delay_left <= -1; end
  end

  // write checkers
  logic [12:0] pa; logic [2:0] mj; mvm_instr_t e;
  always @(posedge clk) if (rst_n) begin
    if (dut.state == dut.S_LOADW) loadw_cycles++;
    if (pim_wr_en != 0) begin
      loadw_words++;
      checks++;
      pa = {2'(0), pim_wr_row, pim_wr_comp};
      for (int m = 0; m < 4; m++) if (pim_wr_en[m]) pa[12:11] = 2'(m);
      if ($countones(pim_wr_en) != 1 || exp_pa.size() == 0 || pa !== exp_pa[0] || pim_wr_data !== exp_pd[0]) begin
        failures++; $display("FAIL pim write %h %h", pa, pim_wr_data);
      end
      if (exp_pa.size() != 0) begin void'(exp_pa.pop_front()); void'(exp_pd.pop_front()); end
    end
    if (m_wr_en != 0) begin
      checks++;
      mj = {2'(0), m_idx};
      for (int m = 0; m < 4; m++) if (m_wr_en[m]) mj[2:1] = 2'(m);
      if ($countones(m_wr_en) != 1 || exp_mj.size() == 0 || mj !== exp_mj[0] || m_data !== exp_md[0]) begin
        failures++; $display("FAIL m write %0d %h", mj, m_data);
      end
      if (exp_mj.size() != 0) begin void'(exp_mj.pop_front()); void'(exp_md.pop_front()); end
    end
    if (pre_start) begin
      checks++;
      if (exp_mvm.size() == 0) begin failures++; $display("FAIL unexpected MVM"); end
      else begin
        e = exp_mvm.pop_front();
        if (cfg.mode !== core_mode_e'(e.mode) || cfg.dw !== e.dw || cfg.stage !== e.stage ||
            cfg.recover_en !== e.recover || pre_in_addr !== e.in_addr || pre_row0 !== e.row0 ||
            pre_nrows !== e.nrows || post_relu !== e.relu || post_shift !== e.shift ||
            post_pool_first !== e.pool_first || post_pool_last !== e.pool_last ||
            post_out_addr !== e.out_addr || bank_sel !== exp_bank) begin
          failures++; $display("FAIL MVM fields");
        end
        nmvm++;
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [63:0] ins; int op, n; logic [16:0] wa; logic [12:0] p0; mvm_instr_t mv;
  initial begin
    rst_n = 0; start = 0;
    for (int i = 0; i < 4096; i++) wmem[i] = 16'($urandom());
    repeat (3) @(negedge clk); rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      nswap = 0; nloadw = 0; exp_bank = bank_sel;
      loadw_cycles = 0; loadw_words = 0;
      // build program
      for (int i = 0; i < 63; i++) begin
        op = (i == 62) ? 0 : $urandom_range(1, 4);
        ins = '0;
        case (op)
          1: begin
            n = $urandom_range(1, 40); wa = 17'($urandom_range(0, 4000)); p0 = 13'($urandom_range(0, 8191 - 40));
            ins = {4'(OP_LOADW), wa, p0, 13'(n), 17'(0)};
          end
          2: begin wa = 17'($urandom_range(0, 4000)); ins = {4'(OP_LOADM), wa, 43'(0)}; end
          3: begin mv = mvm_instr_t'({$urandom(), $urandom()}); mv.op = OP_MVM; mv.mode = 2'($urandom_range(0, 2)); ins = mv; end
          4: ins = {4'(OP_SWAP), 60'($urandom())};
          default: ins = '0;
        endcase
        imem[i] = ins;
      end
      imem[63] = '0;
      // expected streams, simulating the program order
      begin
        logic bk; bk = bank_sel;
        for (int i = 0; i < 63; i++) begin
          ins = imem[i];
          case (ins[63:60])
            4'(OP_LOADW): nloadw++;
            default: ;
          endcase
          case (ins[63:60])
            4'(OP_LOADW): for (int k = 0; k < ins[29:17]; k++) begin
              exp_pa.push_back(ins[42:30] + 13'(k)); exp_pd.push_back(wmem[12'(ins[59:43] + 17'(k))]);
            end
            4'(OP_LOADM): for (int k = 0; k < 8; k++) begin
              exp_mj.push_back(3'(k)); exp_md.push_back(wmem[12'(ins[59:43] + 17'(k))]);
            end
            4'(OP_MVM): exp_mvm.push_back(mvm_instr_t'(ins));
            4'(OP_SWAP): nswap++;
            default: ;
          endcase
          if (ins[63:60] == 4'(OP_HALT)) break;
        end
      end
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      // track the bank for MVM checks
      while (!done) begin
        @(posedge clk);
        if (dut.state == dut.S_DECODE && im_rdata[63:60] == 4'(OP_SWAP)) begin
          @(negedge clk); checks++;
          if (bank_sel !== ~exp_bank) begin failures++; $display("FAIL swap"); end
          exp_bank = bank_sel;
        end
      end
      checks++;
      if (exp_pa.size() != 0 || exp_mj.size() != 0 || exp_mvm.size() != 0) begin
        failures++; $display("FAIL leftover %0d %0d %0d", exp_pa.size(), exp_mj.size(), exp_mvm.size());
      end
      // LOADW moves one word per cycle: the state lasts words + 2 cycles per instruction
      checks++;
      if (loadw_cycles != loadw_words + 2 * nloadw) begin
        failures++; $display("FAIL LOADW rate: %0d words %0d cycles", loadw_words, loadw_cycles);
      end
      checks++;
      if (busy !== 1'b0) begin failures++; $display("FAIL busy at done"); end
      $display("run %0d: loadw words %0d in %0d cycles, swaps %0d, mvm %0d", run, loadw_words, loadw_cycles, nswap, nmvm);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
