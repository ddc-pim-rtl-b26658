// ddc_pingpong_mem -- ping-pong feature memory.
//
// Two banks (feature memory 0 and 1), each WORDS x 128 bit; the default
// 2 x 4096 x 16 B = 128 KB is the paper's size.  `sel` names the bank that
// holds the current layer's input: compute reads (c_re/c_raddr) go to bank
// sel, compute writes of output features (c_we) go to the other bank, so a
// layer's output becomes the next layer's input after the banks swap.  The
// external port (e_*) reaches either bank by e_bank for DRAM transfers; on a
// bank, a compute access of the same kind takes precedence over it.  Read
// data is registered (one-cycle latency).  Word width and arbitration are
// this design's choices.
module ddc_pingpong_mem #(
  parameter int unsigned WORDS = 4096
) (
  input  logic                      clk,
  input  logic                      sel,
  // compute side
  input  logic                      c_re,
  input  logic [$clog2(WORDS)-1:0]  c_raddr,
  output logic [127:0]              c_rdata,
  input  logic                      c_we,
  input  logic [$clog2(WORDS)-1:0]  c_waddr,
  input  logic [127:0]              c_wdata,
  // external (DRAM) side
  input  logic                      e_bank,
  input  logic                      e_we,
  input  logic                      e_re,
  input  logic [$clog2(WORDS)-1:0]  e_addr,
  input  logic [127:0]              e_wdata,
  output logic [127:0]              e_rdata
);

  localparam int unsigned AW = $clog2(WORDS);

  logic [127:0] bank0 [WORDS];
  logic [127:0] bank1 [WORDS];

  logic [1:0]          we, re;
  logic [1:0][AW-1:0]  wa, ra;
  logic [1:0][127:0]   wd, rd;
  logic [1:0]          rd_to_c;
  logic                rsel_c, rsel_e;

  // Ping-pong interface: route each bank's single read and write port.
  always_comb begin
    for (int b = 0; b < 2; b++) begin
      if (c_we && (b != int'(sel))) begin
        we[b] = 1'b1; wa[b] = c_waddr; wd[b] = c_wdata;
      end else begin
        we[b] = e_we && (b == int'(e_bank)); wa[b] = e_addr; wd[b] = e_wdata;
      end
      rd_to_c[b] = c_re && (b == int'(sel));
      re[b]      = rd_to_c[b] || (e_re && (b == int'(e_bank)));
      ra[b]      = rd_to_c[b] ? c_raddr : e_addr;
    end
  end

  always_ff @(posedge clk) begin
    if (we[0]) bank0[wa[0]] <= wd[0];
    if (we[1]) bank1[wa[1]] <= wd[1];
    if (re[0]) rd[0] <= bank0[ra[0]];
    if (re[1]) rd[1] <= bank1[ra[1]];
    if (c_re) rsel_c <= sel;
    if (e_re) rsel_e <= e_bank;
  end

  assign c_rdata = rd[rsel_c];
  assign e_rdata = rd[rsel_e];

endmodule
