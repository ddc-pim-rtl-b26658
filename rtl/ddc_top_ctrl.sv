// ddc_top_ctrl -- top controller.
//
// After `start` it fetches 64-bit instructions from address 0 of the
// instruction memory and executes them one at a time (encoding in ddc_pkg):
//   LOADW  copies `count` 16-bit words from the weight memory into PIM rows
//          (normal SRAM mode), one word per cycle; PIM address
//          {macro[1:0], row[5:0], compartment[4:0]} increments per word.
//   LOADM  copies 8 words of mean values: word j goes to macro j/2, M pair
//          j%2 (low byte first).
//   MVM    latches the macro configuration and the post-process settings,
//          starts the pre-process unit and waits for the post-process unit's
//          done pulse.
//   SWAP   swaps the ping-pong banks.
//   HALT   stops; `done` stays high until the next start.
// A fetch takes two cycles (request, decode).  The paper gives this unit's
// role but no instruction set; everything about the encoding and the
// sequencing is this design's choice.
// Lint note: the unused low 10 bits of an MVM instruction are reserved.
// pim_wr_data and m_data carry the weight-memory read data straight through.
module ddc_top_ctrl
  import ddc_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  output logic               busy,
  output logic               done,
  // instruction memory
  output logic               im_re,
  output logic [9:0]         im_addr,
  input  logic [63:0]        im_rdata,
  // weight memory
  output logic               wm_re,
  output logic [16:0]        wm_addr,
  input  logic [15:0]        wm_rdata,
  // PIM row writes and M writes
  output logic [3:0]         pim_wr_en,
  output logic [4:0]         pim_wr_comp,
  output logic [5:0]         pim_wr_row,
  output logic [15:0]        pim_wr_data,
  output logic [3:0]         m_wr_en,
  output logic               m_idx,
  output logic [15:0]        m_data,
  // MVM
  output core_cfg_t          cfg,
  output logic               pre_start,
  output logic [11:0]        pre_in_addr,
  output logic [5:0]         pre_row0,
  output logic [6:0]         pre_nrows,
  output logic               post_relu,
  output logic [4:0]         post_shift,
  output logic               post_pool_first,
  output logic               post_pool_last,
  output logic [11:0]        post_out_addr,
  input  logic               post_done,
  output logic               bank_sel
);

  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_DECODE, S_LOADW, S_LOADM, S_MVM, S_HALT} state_e;

  state_e       state;
  logic [9:0]   pc;
  logic [16:0]  wa;
  logic [12:0]  pa, cnt, issued;
  logic         rv;          // weight-memory data valid this cycle
  logic [12:0]  rv_pa;       // destination of that data
  logic         is_m;        // the copy in flight is a LOADM
  mvm_instr_t   mi;

  assign mi      = mvm_instr_t'(im_rdata);
  assign im_re   = (state == S_FETCH);
  assign im_addr = pc;
  assign busy    = (state != S_IDLE) && (state != S_HALT);
  assign done    = (state == S_HALT);

  assign wm_re   = ((state == S_LOADW) || (state == S_LOADM)) && (issued < cnt);
  assign wm_addr = wa + 17'(issued);

  always_comb begin
    pim_wr_en   = '0;
    m_wr_en     = '0;
    pim_wr_comp = rv_pa[4:0];
    pim_wr_row  = rv_pa[10:5];
    pim_wr_data = wm_rdata;
    m_idx       = rv_pa[0];
    m_data      = wm_rdata;
    if (rv && !is_m) pim_wr_en[rv_pa[12:11]] = 1'b1;
    if (rv &&  is_m) m_wr_en[rv_pa[2:1]]     = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state           <= S_IDLE;
      pc              <= '0;
      wa              <= '0;
      pa              <= '0;
      cnt             <= '0;
      issued          <= '0;
      rv              <= 1'b0;
      rv_pa           <= '0;
      is_m            <= 1'b0;
      cfg             <= '0;
      pre_start       <= 1'b0;
      pre_in_addr     <= '0;
      pre_row0        <= '0;
      pre_nrows       <= '0;
      post_relu       <= 1'b0;
      post_shift      <= '0;
      post_pool_first <= 1'b0;
      post_pool_last  <= 1'b0;
      post_out_addr   <= '0;
      bank_sel        <= 1'b0;
    end else begin
      pre_start <= 1'b0;
      rv        <= wm_re;
      rv_pa     <= pa + issued;
      if (wm_re) issued <= issued + 13'd1;
      unique case (state)
        S_IDLE, S_HALT: if (start) begin pc <= '0; state <= S_FETCH; end
        S_FETCH: state <= S_DECODE;
        S_DECODE: begin
          issued <= '0;
          unique case (mi.op)
            OP_LOADW: begin
              wa <= im_rdata[59:43]; pa <= im_rdata[42:30]; cnt <= im_rdata[29:17];
              is_m <= 1'b0; state <= S_LOADW;
            end
            OP_LOADM: begin
              wa <= im_rdata[59:43]; pa <= '0; cnt <= 13'd8;
              is_m <= 1'b1; state <= S_LOADM;
            end
            OP_MVM: begin
              cfg.mode        <= core_mode_e'(mi.mode);
              cfg.dw          <= mi.dw;
              cfg.stage       <= mi.stage;
              cfg.recover_en  <= mi.recover;
              pre_in_addr     <= mi.in_addr;
              pre_row0        <= mi.row0;
              pre_nrows       <= mi.nrows;
              post_relu       <= mi.relu;
              post_shift      <= mi.shift;
              post_pool_first <= mi.pool_first;
              post_pool_last  <= mi.pool_last;
              post_out_addr   <= mi.out_addr;
              pre_start       <= 1'b1;
              state           <= S_MVM;
            end
            OP_SWAP: begin bank_sel <= ~bank_sel; pc <= pc + 10'd1; state <= S_FETCH; end
            default: state <= S_HALT;  // OP_HALT and unused codes
          endcase
        end
        S_LOADW, S_LOADM:
          if (issued == cnt && !rv) begin pc <= pc + 10'd1; state <= S_FETCH; end
        S_MVM:
          if (post_done) begin pc <= pc + 10'd1; state <= S_FETCH; end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
