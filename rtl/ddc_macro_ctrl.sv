// ddc_macro_ctrl -- controller inside one PIM macro.
//
// The paper only names this block.  Here it does two things:
//  * decodes the operating mode into the LPU path enables per weight half:
//      normal SRAM mode        : all paths off, readout DFFs idle
//      regular computing mode  : Q paths only (EN0/EN2), both halves
//      double computing mode   : Q and Qbar paths (EN0..EN3), both halves
//      depthwise (dw = 1)      : only the half selected by `stage`
//  * delays the control flags and the per-channel input sums so that they
//    arrive with the data: ctl_s1 lines up with the readout-DFF outputs
//    (shift & add stage), isum_s2 with the partial sums (ARU stage).
// Both outputs are plain registers, one and two cycles after the inputs.
// Lint note: cfg.recover_en is not used here (it acts in the ARU), so one
// bit of cfg is reported unused.
module ddc_macro_ctrl
  import ddc_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  input  core_cfg_t                    cfg,
  input  cmp_ctl_t                     ctl,
  input  logic [3:0][ISW-1:0]          isum,
  output logic [1:0]                   en_q,
  output logic [1:0]                   en_qb,
  output logic                         sample,
  output cmp_ctl_t                     ctl_s1,
  output logic [3:0][ISW-1:0]          isum_s2
);

  logic [1:0]          half;
  logic [3:0][ISW-1:0] isum_s1;

  always_comb begin
    half = cfg.dw ? (cfg.stage ? 2'b10 : 2'b01) : 2'b11;
    unique case (cfg.mode)
      MODE_REGULAR: begin en_q = half;  en_qb = 2'b00; end
      MODE_DOUBLE:  begin en_q = half;  en_qb = half;  end
      default:      begin en_q = 2'b00; en_qb = 2'b00; end
    endcase
    sample = ctl.valid && (cfg.mode != MODE_SRAM);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctl_s1  <= '0;
      isum_s1 <= '0;
      isum_s2 <= '0;
    end else begin
      ctl_s1       <= ctl;
      ctl_s1.valid <= sample;
      isum_s1      <= isum;
      isum_s2      <= isum_s1;
    end
  end

endmodule
