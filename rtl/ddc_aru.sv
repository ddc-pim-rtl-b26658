// ddc_aru -- accumulate and recover unit (one channel).
//
// The accumulator adds the partial sums of all rows of one MVM (the
// "vector-wise" accumulation).  The recover unit accumulates the sum of the
// inputs that fed this channel and multiplies it by the pair's mean value M,
// recovering the result of the biased-complementary filter:
//   O = sum(I * f_c) + (sum I) * M,   since f_bc = f_c + M.
// With recover_en low (FC layers, non-FCC layers) only the Psums are summed.
// A row's psum and isum arrive together on psum_valid; row_first restarts
// both accumulators.  The result is registered one cycle after the last
// row's psum (res_valid pulses for one cycle).  Widths are this design's.
module ddc_aru #(
  parameter int unsigned PW = 32,
  parameter int unsigned IW = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  psum_valid,
  input  logic signed [PW-1:0]  psum,
  input  logic                  row_first,
  input  logic                  row_last,
  input  logic signed [IW-1:0]  isum,
  input  logic signed [7:0]     m,
  input  logic                  recover_en,
  output logic                  res_valid,
  output logic signed [PW-1:0]  res
);

  logic signed [PW-1:0] acc, iacc, acc_n, iacc_n;

  always_comb begin
    acc_n  = row_first ? psum         : acc + psum;
    iacc_n = row_first ? PW'(isum)    : iacc + PW'(isum);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      iacc      <= '0;
      res       <= '0;
      res_valid <= 1'b0;
    end else begin
      res_valid <= psum_valid && row_last;
      if (psum_valid) begin
        acc  <= acc_n;
        iacc <= iacc_n;
        if (row_last) res <= recover_en ? (acc_n + iacc_n * PW'(m)) : acc_n;
      end
    end
  end

endmodule
