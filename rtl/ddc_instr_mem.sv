// ddc_instr_mem -- instruction memory of the top controller.
//
// DEPTH 64-bit instruction words (encoding in ddc_pkg).  Written from
// off-chip DRAM through the write port, read by the top controller with one
// cycle of latency.  The paper names this memory but gives neither its size
// nor its width; 1024 x 64 bit is this design's choice.
module ddc_instr_mem #(
  parameter int unsigned DEPTH = 1024
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [$clog2(DEPTH)-1:0]  waddr,
  input  logic [63:0]               wdata,
  input  logic                      re,
  input  logic [$clog2(DEPTH)-1:0]  raddr,
  output logic [63:0]               rdata
);

  logic [63:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
