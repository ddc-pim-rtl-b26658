// ddc_reconfig_unit -- reconfigurable unit of the PIM core.
//
// Four adder units and an output mux combine the readout-block vectors of
// the 32 compartments into four channel results (per-bit counts).
//
// Standard / pointwise / FC (dw = 0): adder unit u sums channel u of
// compartments 0-15 (tree 0) and 16-31 (tree 1) and outputs their sum, so
// the four outputs are the four filters stored in the rows (wA, ~wA, wB, ~wB).
//
// Depthwise (dw = 1): only weight half `stage` holds live filters and only
// two adder units work per stage.  Adder unit 2*stage takes the Q side and
// the Qbar side of compartments 0-15 on its two trees and outputs both as two
// channels; adder unit 2*stage+1 does the same for compartments 16-31.  This
// gives four output channels per stage, as in the paper.  Which units serve
// the second stage (2 and 3) is this design's choice.  Idle units see zeros.
// Purely combinational.
module ddc_reconfig_unit #(
  parameter int unsigned NCOMP = 32
) (
  input  logic [NCOMP-1:0][3:0][7:0]                 och,
  input  logic                                       dw,
  input  logic                                       stage,
  output logic [3:0][7:0][$clog2(NCOMP+1)-1:0]       cnt
);

  localparam int unsigned H  = NCOMP / 2;
  localparam int unsigned CW = $clog2(NCOMP + 1);

  logic [3:0][H-1:0][7:0]  t0_in, t1_in;
  logic [3:0][7:0][CW-1:0] sep0, sep1, comb;

  always_comb begin
    t0_in = '0;
    t1_in = '0;
    for (int u = 0; u < 4; u++) begin
      for (int i = 0; i < H; i++) begin
        if (!dw) begin
          t0_in[u][i] = och[i][u];
          t1_in[u][i] = och[H+i][u];
        end else if ((u >> 1) == int'(stage)) begin
          // unit 2s: compartments 0..H-1, unit 2s+1: compartments H..NCOMP-1
          t0_in[u][i] = och[(u % 2) * H + i][2 * int'(stage)];
          t1_in[u][i] = och[(u % 2) * H + i][2 * int'(stage) + 1];
        end
      end
    end
  end

  for (genvar u = 0; u < 4; u++) begin : g_unit
    ddc_adder_unit #(.N(H)) u_au (
      .t0_in (t0_in[u]),
      .t1_in (t1_in[u]),
      .sep0  (sep0[u]),
      .sep1  (sep1[u]),
      .comb  (comb[u])
    );
  end

  // Output mux.
  always_comb begin
    if (!dw) begin
      cnt = comb;
    end else begin
      cnt[0] = sep0[2 * int'(stage)];
      cnt[1] = sep1[2 * int'(stage)];
      cnt[2] = sep0[2 * int'(stage) + 1];
      cnt[3] = sep1[2 * int'(stage) + 1];
    end
  end

endmodule
