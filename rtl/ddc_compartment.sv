// ddc_compartment -- one compartment of the PIM core.
//
// Sixteen DBMUs share one active row.  A row holds two spliced signed 8-bit
// weights {wA, wB}: DBMU #0..#7 store wA bits 7..0 and DBMU #8..#15 store wB
// bits 7..0 (the column order printed in the paper's std-conv mapping figure).
// Because each cell also exposes Qbar, the row stands for four weights
// wA, ~wA, wB, ~wB -- two complementary twin pairs.
//
// The dual-broadcast input structure (DBIS) drives the same INP and INN bits
// to every LPU.  The readout block is a rank of 32 DFFs that samples, when
// `sample` is high, the four channel vectors
//   och[0][k] = wA[k] & INP     och[1][k] = ~wA[k] & INN
//   och[2][k] = wB[k] & INP     och[3][k] = ~wB[k] & INN
// so results appear one cycle after the inputs.  en_q/en_qb carry one enable
// per weight half (index 0 = wA, 1 = wB); splitting the enables per half is
// this design's way of switching off the unused half in depthwise stages.
// Writes and reads move one whole 16-bit row; rd_data is combinational.
module ddc_compartment #(
  parameter int unsigned ROWS = 64
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          wr_en,
  input  logic [$clog2(ROWS)-1:0]       wr_row,
  input  logic [15:0]                   wr_data,
  input  logic [$clog2(ROWS)-1:0]       row,
  output logic [15:0]                   rd_data,
  input  logic                          inp,
  input  logic                          inn,
  input  logic [1:0]                    en_q,
  input  logic [1:0]                    en_qb,
  input  logic                          sample,
  output logic [3:0][7:0]               och
);

  logic [15:0] ch0, ch1;  // LPU outputs, indexed by DBMU number

  for (genvar d = 0; d < 16; d++) begin : g_dbmu
    localparam int unsigned HALF = d / 8;
    ddc_dbmu #(.ROWS(ROWS)) u_dbmu (
      .clk    (clk),
      .wr_en  (wr_en),
      .wr_row (wr_row),
      .wr_bit (wr_data[15-d]),
      .row    (row),
      .rd_bit (rd_data[15-d]),
      .inp    (inp),
      .inn    (inn),
      .en_q   (en_q[HALF]),
      .en_qb  (en_qb[HALF]),
      .o_ch0  (ch0[d]),
      .o_ch1  (ch1[d])
    );
  end

  // Readout block: DBMU #(7-k) carries bit k of wA, DBMU #(15-k) bit k of wB.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      och <= '0;
    end else if (sample) begin
      for (int k = 0; k < 8; k++) begin
        och[0][k] <= ch0[7-k];
        och[1][k] <= ch1[7-k];
        och[2][k] <= ch0[15-k];
        och[3][k] <= ch1[15-k];
      end
    end
  end

endmodule
