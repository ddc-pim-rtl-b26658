// ddc_adder_tree -- one adder tree of the reconfigurable unit.
//
// Adds the AND results of N compartments separately for each weight-bit
// position: cnt[k] is the number of compartments whose vector has bit k set.
// The paper states only that a tree accumulates the AND results of 16
// compartments; it is written here as a sum per bit position and left to
// synthesis to build as a tree.
// Purely combinational.
module ddc_adder_tree #(
  parameter int unsigned N = 16,
  parameter int unsigned W = 8
) (
  input  logic [N-1:0][W-1:0]               in_bits,
  output logic [W-1:0][$clog2(N+1)-1:0]     cnt
);

  localparam int unsigned CW = $clog2(N + 1);

  always_comb begin
    for (int k = 0; k < W; k++) begin
      cnt[k] = '0;
      for (int i = 0; i < N; i++) cnt[k] = cnt[k] + CW'(in_bits[i][k]);
    end
  end

endmodule
