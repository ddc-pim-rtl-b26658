// ddc_merge_unit -- merge unit of one PIM macro.
//
// Four lanes, one per channel output of the reconfigurable unit; each lane
// is a shift & add unit followed by an accumulate-and-recover unit (ARU).
// Latency: a row's partial sums are registered one cycle after its LSB
// counts, and the recovered results two cycles after the last row's LSB
// counts.  All lanes run in lock step, so res_valid is common.
// Lint notes: the NCH parameter shadows the package constant of the same
// name on purpose (same default); res_valid of lanes 1-3 equals lane 0's
// and is left unused.
module ddc_merge_unit
  import ddc_pkg::*;
#(
  parameter int unsigned NCH = 4,
  parameter int unsigned CW  = 6
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  cmp_ctl_t                          ctl,
  input  logic [NCH-1:0][7:0][CW-1:0]       cnt,
  input  logic [NCH-1:0][ISW-1:0]           isum,
  input  logic [NCH-1:0][7:0]               m,
  input  logic                              recover_en,
  output logic                              res_valid,
  output logic [NCH-1:0][PSW-1:0]           res
);

  logic [NCH-1:0]          pv, prf, prl, rv;
  logic [NCH-1:0][PSW-1:0] psum;

  for (genvar c = 0; c < NCH; c++) begin : g_lane
    ddc_shift_add #(.CW(CW), .PW(PSW)) u_sa (
      .clk            (clk),
      .rst_n          (rst_n),
      .ctl            (ctl),
      .cnt            (cnt[c]),
      .psum_valid     (pv[c]),
      .psum           (psum[c]),
      .psum_row_first (prf[c]),
      .psum_row_last  (prl[c])
    );
    ddc_aru #(.PW(PSW), .IW(ISW)) u_aru (
      .clk        (clk),
      .rst_n      (rst_n),
      .psum_valid (pv[c]),
      .psum       (psum[c]),
      .row_first  (prf[c]),
      .row_last   (prl[c]),
      .isum       (isum[c]),
      .m          (m[c]),
      .recover_en (recover_en),
      .res_valid  (rv[c]),
      .res        (res[c])
    );
  end

  assign res_valid = rv[0];

endmodule
