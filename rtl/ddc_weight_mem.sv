// ddc_weight_mem -- on-chip weight memory.
//
// Holds the 16-bit vectors of spliced Comp-filter weights (two 8-bit weights
// per word, only one filter of each complementary pair is stored) and the
// mean values M.  Default size is the paper's 256 KB (131072 x 16 bit).
// One write port for transfers from off-chip DRAM and one read port for the
// top controller; read data is registered (one-cycle latency).  Port
// structure and latency are this design's choices.
module ddc_weight_mem #(
  parameter int unsigned WORDS = 131072
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [$clog2(WORDS)-1:0]  waddr,
  input  logic [15:0]               wdata,
  input  logic                      re,
  input  logic [$clog2(WORDS)-1:0]  raddr,
  output logic [15:0]               rdata
);

  logic [15:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
