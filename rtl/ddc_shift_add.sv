// ddc_shift_add -- shift & add unit of the merge unit (one channel).
//
// Input: per weight-bit counts for one input bit (one compute cycle).  The
// counts are first weighted by their bit position as a signed INT8 weight:
//   t = sum_{k<7} cnt[k]*2^k - cnt[7]*2^7.
// Input bits arrive MSB first.  For the input MSB the signed transform
// inverts t and the adder adds 1 ("1 for inv"), i.e. t is negated, because
// the MSB of a signed INT8 input weighs -2^7.  The DFF and "<<" then form
//   acc = (acc << 1) + t
// over the eight input bits.  After the LSB (bit_last) the partial sum is
// registered on psum with psum_valid and the row flags for the ARU, one cycle
// after the LSB counts.  The structure follows the paper's merge-unit figure;
// the MSB-first order and the 32-bit width are this design's choices.
module ddc_shift_add
  import ddc_pkg::*;
#(
  parameter int unsigned CW = 6,
  parameter int unsigned PW = 32
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  cmp_ctl_t                     ctl,
  input  logic [7:0][CW-1:0]           cnt,
  output logic                         psum_valid,
  output logic signed [PW-1:0]         psum,
  output logic                         psum_row_first,
  output logic                         psum_row_last
);

  logic signed [PW-1:0] acc, t, term, acc_n;

  always_comb begin
    t = '0;
    for (int k = 0; k < 7; k++) t = t + (PW'(cnt[k]) << k);
    t = t - (PW'(cnt[7]) << 7);
    term  = ctl.bit_first ? (~t + PW'(1)) : t;   // signed transform
    acc_n = ctl.bit_first ? term : ((acc <<< 1) + term);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc            <= '0;
      psum           <= '0;
      psum_valid     <= 1'b0;
      psum_row_first <= 1'b0;
      psum_row_last  <= 1'b0;
    end else begin
      psum_valid <= ctl.valid && ctl.bit_last;
      if (ctl.valid) acc <= acc_n;
      if (ctl.valid && ctl.bit_last) begin
        psum           <= acc_n;
        psum_row_first <= ctl.row_first;
        psum_row_last  <= ctl.row_last;
      end
    end
  end

endmodule
