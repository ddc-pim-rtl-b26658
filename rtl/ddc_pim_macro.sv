// ddc_pim_macro -- one PIM macro: PIM core, merge unit, macro controller
// and the mean-value (M) registers.
//
// Weights are written a compartment row at a time in normal SRAM mode.  An
// MVM streams one input bit per cycle (ctl.valid) for every compartment on
// inp/inn, MSB first, eight cycles per row; `row` selects the word line.
// Four M registers, written two at a time (m_idx selects M[1:0] or
// M[3:2], low byte first), hold the mean values of the filter pairs: in std/pw-conv
// channels 0/1 use M[0] and channels 2/3 use M[1]; in dw-conv stage s they
// use M[2s] and M[2s+1].  isum carries, per channel, the sum of the current
// row's inputs that feed that channel (held for the whole row).
// res_valid pulses three cycles after the cycle carrying the LSB of the last
// row; res holds the four recovered channel results.  cfg must stay stable
// during an MVM and until res_valid.
// Lint note: NCOMP shadows the package constant of the same name on purpose
// (same default), so the macro can be built smaller for tests.
module ddc_pim_macro
  import ddc_pkg::*;
#(
  parameter int unsigned NCOMP = 32,
  parameter int unsigned ROWS  = 64
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   wr_en,
  input  logic [$clog2(NCOMP)-1:0]               wr_comp,
  input  logic [$clog2(ROWS)-1:0]                wr_row,
  input  logic [15:0]                            wr_data,
  input  logic                                   rd_en,
  input  logic [$clog2(NCOMP)-1:0]               rd_comp,
  input  logic [$clog2(ROWS)-1:0]                rd_row,
  output logic [15:0]                            rd_data,
  input  logic                                   m_wr_en,
  input  logic                                   m_idx,
  input  logic [15:0]                            m_data,
  input  core_cfg_t                              cfg,
  input  cmp_ctl_t                               ctl,
  input  logic [$clog2(ROWS)-1:0]                row,
  input  logic [NCOMP-1:0]                       inp,
  input  logic [NCOMP-1:0]                       inn,
  input  logic [3:0][ISW-1:0]                    isum,
  output logic                                   res_valid,
  output logic [3:0][PSW-1:0]                    res
);

  localparam int unsigned CW = $clog2(NCOMP + 1);

  logic [1:0]               en_q, en_qb;
  logic                     sample;
  cmp_ctl_t                 ctl_s1;
  logic [3:0][ISW-1:0]      isum_s2;
  logic [3:0][7:0][CW-1:0]  cnt;
  logic [3:0][7:0]          mreg, msel;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       mreg <= '0;
    else if (m_wr_en) begin
      mreg[2 * int'(m_idx)]     <= m_data[7:0];
      mreg[2 * int'(m_idx) + 1] <= m_data[15:8];
    end
  end

  always_comb begin
    for (int c = 0; c < 4; c++)
      msel[c] = cfg.dw ? mreg[2 * int'(cfg.stage) + c / 2] : mreg[c / 2];
  end

  ddc_macro_ctrl u_ctrl (
    .clk     (clk),
    .rst_n   (rst_n),
    .cfg     (cfg),
    .ctl     (ctl),
    .isum    (isum),
    .en_q    (en_q),
    .en_qb   (en_qb),
    .sample  (sample),
    .ctl_s1  (ctl_s1),
    .isum_s2 (isum_s2)
  );

  ddc_pim_core #(.NCOMP(NCOMP), .ROWS(ROWS)) u_core (
    .clk     (clk),
    .rst_n   (rst_n),
    .wr_en   (wr_en),
    .wr_comp (wr_comp),
    .wr_row  (wr_row),
    .wr_data (wr_data),
    .rd_en   (rd_en),
    .rd_comp (rd_comp),
    .rd_row  (rd_row),
    .rd_data (rd_data),
    .cmp_en  (sample),
    .row     (row),
    .inp     (inp),
    .inn     (inn),
    .en_q    (en_q),
    .en_qb   (en_qb),
    .dw      (cfg.dw),
    .stage   (cfg.stage),
    .cnt     (cnt)
  );

  ddc_merge_unit #(.NCH(4), .CW(CW)) u_merge (
    .clk        (clk),
    .rst_n      (rst_n),
    .ctl        (ctl_s1),
    .cnt        (cnt),
    .isum       (isum_s2),
    .m          (msel),
    .recover_en (cfg.recover_en),
    .res_valid  (res_valid),
    .res        (res)
  );

endmodule
