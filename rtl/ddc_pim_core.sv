// ddc_pim_core -- PIM core: 32 compartments, word-line drivers, memory
// read/write circuit, DBIS input distribution and reconfigurable unit.
//
// Normal SRAM mode: one 16-bit compartment row is written per cycle
// (wr_en/wr_comp/wr_row/wr_data) or read (rd_en/rd_comp/rd_row); read data
// appears on rd_data the cycle after rd_en.  A read takes the word line away
// from compute, so the controller issues reads only between MVMs.
//
// Computing modes: on a cycle with cmp_en high every compartment activates
// word line `row`, its LPUs AND the row with that compartment's INP/INN bit
// (inp[c], inn[c]), gated by the path enables en_q/en_qb from the macro
// controller, and the readout DFFs capture the result at the clock edge.  In
// the following cycle the reconfigurable unit turns the 32 registered vectors
// into four per-bit count vectors `cnt` according to dw/stage.  So `cnt`
// belongs to the inputs of the previous cmp_en cycle (one cycle latency).
// Geometry (32 x 16 x 64 cells = 4 KB) is the paper's.
module ddc_pim_core #(
  parameter int unsigned NCOMP = 32,
  parameter int unsigned ROWS  = 64
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  // normal SRAM mode
  input  logic                                   wr_en,
  input  logic [$clog2(NCOMP)-1:0]               wr_comp,
  input  logic [$clog2(ROWS)-1:0]                wr_row,
  input  logic [15:0]                            wr_data,
  input  logic                                   rd_en,
  input  logic [$clog2(NCOMP)-1:0]               rd_comp,
  input  logic [$clog2(ROWS)-1:0]                rd_row,
  output logic [15:0]                            rd_data,
  // computing modes
  input  logic                                   cmp_en,
  input  logic [$clog2(ROWS)-1:0]                row,
  input  logic [NCOMP-1:0]                       inp,
  input  logic [NCOMP-1:0]                       inn,
  input  logic [1:0]                             en_q,
  input  logic [1:0]                             en_qb,
  input  logic                                   dw,
  input  logic                                   stage,
  output logic [3:0][7:0][$clog2(NCOMP+1)-1:0]   cnt
);

  logic [$clog2(ROWS)-1:0]   wl_row;              // word-line driver address
  logic [NCOMP-1:0][15:0]    rdata;
  logic [NCOMP-1:0][3:0][7:0] och;

  assign wl_row = rd_en ? rd_row : row;

  for (genvar c = 0; c < NCOMP; c++) begin : g_comp
    ddc_compartment #(.ROWS(ROWS)) u_comp (
      .clk     (clk),
      .rst_n   (rst_n),
      .wr_en   (wr_en && (wr_comp == c)),
      .wr_row  (wr_row),
      .wr_data (wr_data),
      .row     (wl_row),
      .rd_data (rdata[c]),
      .inp     (inp[c]),
      .inn     (inn[c]),
      .en_q    (en_q),
      .en_qb   (en_qb),
      .sample  (cmp_en),
      .och     (och[c])
    );
  end

  // Memory read circuit: registered read data.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     rd_data <= '0;
    else if (rd_en) rd_data <= rdata[rd_comp];
  end

  ddc_reconfig_unit #(.NCOMP(NCOMP)) u_ru (
    .och   (och),
    .dw    (dw),
    .stage (stage),
    .cnt   (cnt)
  );

endmodule
