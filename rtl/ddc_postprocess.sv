// ddc_postprocess -- post-process unit.
//
// Receives the recovered results of all macros (NV = 16 channels: byte
// 4*m + c of the output word is channel c of macro m) when res_valid pulses.
// Each value is requantised to INT8: arithmetic right shift by `shift`,
// optional ReLU, saturation to [-128, 127].  Max pooling works across
// consecutive MVMs: pool_first starts a new window, later results are merged
// by element-wise maximum, and with pool_last the window's result is written
// as one 128-bit word to address out_addr of the ping-pong memory, one cycle
// after res_valid; done pulses with that cycle whether or not a word is
// written.  The paper only says this unit performs "pooling and other
// operations"; the operations and their order are this design's choices.
module ddc_postprocess #(
  parameter int unsigned NV = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   res_valid,
  input  logic [NV-1:0][31:0]    res,
  input  logic                   relu,
  input  logic [4:0]             shift,
  input  logic                   pool_first,
  input  logic                   pool_last,
  input  logic [11:0]            out_addr,
  output logic                   we,
  output logic [11:0]            waddr,
  output logic [NV*8-1:0]        wdata,
  output logic                   done
);

  logic signed [NV-1:0][7:0] q, pool, pool_n;

  always_comb begin
    for (int i = 0; i < NV; i++) begin
      logic signed [31:0] v;
      v = signed'(res[i]) >>> shift;
      if (relu && v < 0) v = '0;
      if (v > 32'sd127)       q[i] = 8'sd127;
      else if (v < -32'sd128) q[i] = -8'sd128;
      else                    q[i] = v[7:0];
      pool_n[i] = (pool_first || signed'(q[i]) > signed'(pool[i])) ? q[i] : pool[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pool  <= '0;
      we    <= 1'b0;
      waddr <= '0;
      wdata <= '0;
      done  <= 1'b0;
    end else begin
      we   <= res_valid && pool_last;
      done <= res_valid;
      if (res_valid) begin
        pool  <= pool_n;
        waddr <= out_addr;
        wdata <= pool_n;
      end
    end
  end

endmodule
