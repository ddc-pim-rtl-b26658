// ddc_dbmu -- double bitwise multiply unit (DBMU).
//
// One SRAM column of ROWS cells sharing one local processing unit (LPU), as
// in the paper.  Each cell stores a bit Q; its complement Qbar is the matching
// bit of the twin weight (the filter-wise complementary pair), so one column
// serves two output channels.  For the row selected by `row` the LPU forms
//   o_ch0 = Q    & INP   (Q-side path, enabled by en_q   -- EN0/EN2)
//   o_ch1 = ~Q   & INN   (Qbar-side path, enabled by en_qb -- EN1/EN3)
// In regular computing mode only the Q path is enabled, in double computing
// mode both.  The paper's LPU is precharged dynamic logic; here it is plain
// combinational AND logic whose result the compartment's readout DFFs sample.
// The cells are written one bit per cycle (normal SRAM mode) and read back
// combinationally through rd_bit.  Cells are not reset, like an SRAM.
module ddc_dbmu #(
  parameter int unsigned ROWS = 64
) (
  input  logic                    clk,
  input  logic                    wr_en,
  input  logic [$clog2(ROWS)-1:0] wr_row,
  input  logic                    wr_bit,
  input  logic [$clog2(ROWS)-1:0] row,
  output logic                    rd_bit,
  input  logic                    inp,
  input  logic                    inn,
  input  logic                    en_q,
  input  logic                    en_qb,
  output logic                    o_ch0,
  output logic                    o_ch1
);

  logic [ROWS-1:0] q;  // Q of every cell; Qbar is ~q

  always_ff @(posedge clk) begin
    if (wr_en) q[wr_row] <= wr_bit;
  end

  always_comb begin
    rd_bit = q[row];
    o_ch0  = en_q  &  q[row] & inp;
    o_ch1  = en_qb & ~q[row] & inn;
  end

endmodule
