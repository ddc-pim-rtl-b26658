// ddc_top -- DDC-PIM accelerator top level.
//
// Blocks (after the paper's top-level architecture): top controller,
// instruction memory, weight memory, ping-pong feature memory, pre-process
// unit, NMACRO PIM macros and post-process unit.  The pre-process unit
// broadcasts the same bit-serial INP/INN inputs, row address and control to
// all macros; each macro computes four output channels of its own filters,
// and the post-process unit packs the 4 x NMACRO channel results into one
// 128-bit word written back to the ping-pong memory.
//
// The off-chip DRAM is outside this design: its transfers appear as the
// ext_* write ports of the three memories and a read port on the ping-pong
// memory.  ext_pim_* reads back a PIM row (normal SRAM mode) while the
// controller is idle.  Drive `start` for one cycle to run the program in the
// instruction memory; `done` rises when it reaches HALT.
// Lint notes: NMACRO shadows the package constant of the same name on
// purpose (same default).  Only macro 0's res_valid is used, as all macros
// run in lock step, and the pre-process done pulse is not needed because
// the controller waits for the post-process write.
module ddc_top
  import ddc_pkg::*;
#(
  parameter int unsigned NMACRO = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  output logic                busy,
  output logic                done,
  // off-chip transfers
  input  logic                ext_im_we,
  input  logic [9:0]          ext_im_addr,
  input  logic [63:0]         ext_im_wdata,
  input  logic                ext_wm_we,
  input  logic [16:0]         ext_wm_addr,
  input  logic [15:0]         ext_wm_wdata,
  input  logic                ext_fm_we,
  input  logic                ext_fm_re,
  input  logic                ext_fm_bank,
  input  logic [11:0]         ext_fm_addr,
  input  logic [127:0]        ext_fm_wdata,
  output logic [127:0]        ext_fm_rdata,
  input  logic                ext_pim_rd_en,
  input  logic [12:0]         ext_pim_rd_addr,
  output logic [15:0]         ext_pim_rd_data,
  output logic                bank_sel
);

  // controller <-> memories
  logic        im_re;  logic [9:0]  im_addr; logic [63:0] im_rdata;
  logic        wm_re;  logic [16:0] wm_addr; logic [15:0] wm_rdata;
  logic [3:0]  pim_wr_en_c, m_wr_en_c;
  logic [4:0]  pim_wr_comp; logic [5:0] pim_wr_row; logic [15:0] pim_wr_data;
  logic        m_idx;  logic [15:0] m_data;
  core_cfg_t   cfg;
  logic        pre_start; logic [11:0] pre_in_addr; logic [5:0] pre_row0; logic [6:0] pre_nrows;
  logic        post_relu, post_pool_first, post_pool_last; logic [4:0] post_shift;
  logic [11:0] post_out_addr;
  logic        post_done;

  // pre-process <-> memory / macros
  logic        fm_re;  logic [11:0] fm_addr; logic [127:0] fm_rdata;
  cmp_ctl_t    ctl;    logic [5:0] row;
  logic [NCOMP-1:0] inp, inn;
  logic [3:0][ISW-1:0] isum;
  logic        pre_done;

  // macros -> post-process
  logic [NMACRO-1:0]             res_valid;
  logic [NMACRO-1:0][3:0][PSW-1:0] res;
  logic [NMACRO-1:0][15:0]       rd_data;
  logic                          pp_we; logic [11:0] pp_waddr; logic [127:0] pp_wdata;
  logic [1:0]                    pim_rd_sel;

  ddc_top_ctrl u_ctrl (
    .clk, .rst_n, .start, .busy, .done,
    .im_re, .im_addr, .im_rdata,
    .wm_re, .wm_addr, .wm_rdata,
    .pim_wr_en (pim_wr_en_c), .pim_wr_comp, .pim_wr_row, .pim_wr_data,
    .m_wr_en (m_wr_en_c), .m_idx, .m_data,
    .cfg, .pre_start, .pre_in_addr, .pre_row0, .pre_nrows,
    .post_relu, .post_shift, .post_pool_first, .post_pool_last, .post_out_addr,
    .post_done, .bank_sel
  );

  ddc_instr_mem #(.DEPTH(1024)) u_imem (
    .clk, .we (ext_im_we), .waddr (ext_im_addr), .wdata (ext_im_wdata),
    .re (im_re), .raddr (im_addr), .rdata (im_rdata)
  );

  ddc_weight_mem #(.WORDS(131072)) u_wmem (
    .clk, .we (ext_wm_we), .waddr (ext_wm_addr), .wdata (ext_wm_wdata),
    .re (wm_re), .raddr (wm_addr), .rdata (wm_rdata)
  );

  ddc_pingpong_mem #(.WORDS(4096)) u_fmem (
    .clk, .sel (bank_sel),
    .c_re (fm_re), .c_raddr (fm_addr), .c_rdata (fm_rdata),
    .c_we (pp_we), .c_waddr (pp_waddr), .c_wdata (pp_wdata),
    .e_bank (ext_fm_bank), .e_we (ext_fm_we), .e_re (ext_fm_re),
    .e_addr (ext_fm_addr), .e_wdata (ext_fm_wdata), .e_rdata (ext_fm_rdata)
  );

  ddc_preprocess #(.NCOMP(NCOMP)) u_pre (
    .clk, .rst_n, .start (pre_start), .in_addr (pre_in_addr), .row0 (pre_row0),
    .nrows (pre_nrows), .dw (cfg.dw),
    .fm_re, .fm_addr, .fm_rdata,
    .ctl, .row, .inp, .inn, .isum, .done (pre_done)
  );

  for (genvar m = 0; m < NMACRO; m++) begin : g_macro
    logic rd_en_m;
    assign rd_en_m = ext_pim_rd_en && !busy && (ext_pim_rd_addr[12:11] == 2'(m));
    ddc_pim_macro #(.NCOMP(NCOMP), .ROWS(NROWS)) u_macro (
      .clk, .rst_n,
      .wr_en   (pim_wr_en_c[m]),
      .wr_comp (pim_wr_comp),
      .wr_row  (pim_wr_row),
      .wr_data (pim_wr_data),
      .rd_en   (rd_en_m),
      .rd_comp (ext_pim_rd_addr[4:0]),
      .rd_row  (ext_pim_rd_addr[10:5]),
      .rd_data (rd_data[m]),
      .m_wr_en (m_wr_en_c[m]),
      .m_idx   (m_idx),
      .m_data  (m_data),
      .cfg     (cfg),
      .ctl     (ctl),
      .row     (row),
      .inp     (inp),
      .inn     (inn),
      .isum    (isum),
      .res_valid (res_valid[m]),
      .res     (res[m])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)             pim_rd_sel <= '0;
    else if (ext_pim_rd_en) pim_rd_sel <= ext_pim_rd_addr[12:11];
  end
  assign ext_pim_rd_data = rd_data[pim_rd_sel];

  ddc_postprocess #(.NV(4 * NMACRO)) u_post (
    .clk, .rst_n,
    .res_valid  (res_valid[0]),
    .res        (res),
    .relu       (post_relu),
    .shift      (post_shift),
    .pool_first (post_pool_first),
    .pool_last  (post_pool_last),
    .out_addr   (post_out_addr),
    .we         (pp_we),
    .waddr      (pp_waddr),
    .wdata      (pp_wdata),
    .done       (post_done)
  );

endmodule
