// ddc_adder_unit -- one adder unit of the reconfigurable unit.
//
// Two adder trees of 16 compartments each.  The unit offers both trees'
// counts separately (two output channels, used by depthwise convolution) and
// their sum (one channel over 32 compartments, used by standard, pointwise
// and fully connected layers); the reconfigurable unit's mux picks one.
// Counts are per weight-bit position.  Purely combinational.
module ddc_adder_unit #(
  parameter int unsigned N = 16
) (
  input  logic [N-1:0][7:0]                  t0_in,
  input  logic [N-1:0][7:0]                  t1_in,
  output logic [7:0][$clog2(2*N+1)-1:0]      sep0,
  output logic [7:0][$clog2(2*N+1)-1:0]      sep1,
  output logic [7:0][$clog2(2*N+1)-1:0]      comb
);

  localparam int unsigned CW  = $clog2(N + 1);
  localparam int unsigned CW2 = $clog2(2 * N + 1);

  logic [7:0][CW-1:0] c0, c1;

  ddc_adder_tree #(.N(N), .W(8)) u_tree0 (.in_bits(t0_in), .cnt(c0));
  ddc_adder_tree #(.N(N), .W(8)) u_tree1 (.in_bits(t1_in), .cnt(c1));

  always_comb begin
    for (int k = 0; k < 8; k++) begin
      sep0[k] = CW2'(c0[k]);
      sep1[k] = CW2'(c1[k]);
      comb[k] = CW2'(c0[k]) + CW2'(c1[k]);
    end
  end

endmodule
