// ddc_preprocess -- pre-process unit: feature fetch, bit-serial conversion
// and dual broadcast to the PIM macros.
//
// An MVM covers `nrows` row steps.  For each step the unit reads, from
// consecutive 128-bit words of the ping-pong memory starting at in_addr, one
// signed INT8 input per compartment for INP (2 words, byte c = compartment c)
// and, in depthwise mode, a second set for INN (2 more words).  Otherwise INN
// carries the same inputs as INP, as standard/pointwise layers share the
// input among filters.  The inputs must already be unrolled (im2col) in
// memory and unused compartments must get zero; that layout is this design's
// assumption.
//
// The vector of step k+1 is fetched into a second buffer while step k is
// broadcast, so a step takes exactly 8 cycles after the first one: in each
// cycle inp[c]/inn[c] carry one bit of compartment c's input, MSB first, with
// the control flags in `ctl` and the word line `row` = row0 + k.  isum gives,
// for each of the four macro channels, the sum of the current step's inputs
// that feed it (all 32 INP inputs in std/pw/FC mode; INP or INN of
// compartments 0-15 or 16-31 in dw mode), for the recover unit.  done pulses
// with the last bit of the last step.  Memory read latency is one cycle.
// Lint note: NCOMP shadows the package constant of the same name on purpose
// (same default), so the unit can be built smaller for tests.
module ddc_preprocess
  import ddc_pkg::*;
#(
  parameter int unsigned NCOMP = 32
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [11:0]               in_addr,
  input  logic [5:0]                row0,
  input  logic [6:0]                nrows,
  input  logic                      dw,
  // ping-pong memory read port
  output logic                      fm_re,
  output logic [11:0]               fm_addr,
  input  logic [127:0]              fm_rdata,
  // broadcast to the macros
  output cmp_ctl_t                  ctl,
  output logic [5:0]                row,
  output logic [NCOMP-1:0]          inp,
  output logic [NCOMP-1:0]          inn,
  output logic [3:0][ISW-1:0]       isum,
  output logic                      done
);

  localparam int unsigned WPV = NCOMP / 16;  // 128-bit words per input vector

  logic [2*NCOMP-1:0][7:0] nxt, cur;  // [0..NCOMP-1] INP, [NCOMP..] INN
  logic                    nxt_full, cur_act;
  logic                    fetching, issued_all;
  logic [6:0]              f_steps, s_step, nrows_q;
  logic [2:0]              fidx, ridx;
  logic                    rvalid;
  logic [2:0]              bitn;
  logic                    dw_q;
  logic [5:0]              row0_q;
  logic [2:0]              nwords;

  assign nwords = dw_q ? 3'(2 * WPV) : 3'(WPV);

  // ---------------- fetch ----------------
  logic [11:0] aptr;
  logic        load;  // move the fetched vector into the broadcast buffer

  assign fm_re   = fetching && !nxt_full && !issued_all;
  assign fm_addr = aptr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fetching   <= 1'b0;
      issued_all <= 1'b0;
      nxt_full   <= 1'b0;
      f_steps    <= '0;
      fidx       <= '0;
      ridx       <= '0;
      rvalid     <= 1'b0;
      aptr       <= '0;
      dw_q       <= 1'b0;
      nrows_q    <= '0;
      row0_q     <= '0;
      nxt        <= '0;
    end else begin
      rvalid <= fm_re;
      ridx   <= fidx;
      if (start) begin
        fetching   <= 1'b1;
        issued_all <= 1'b0;
        nxt_full   <= 1'b0;
        f_steps    <= '0;
        fidx       <= '0;
        aptr       <= in_addr;
        dw_q       <= dw;
        nrows_q    <= nrows;
        row0_q     <= row0;
      end else begin
        if (fm_re) begin
          aptr <= aptr + 12'd1;
          fidx <= fidx + 3'd1;
          if (fidx == nwords - 3'd1) issued_all <= 1'b1;
        end
        if (rvalid) begin
          for (int b = 0; b < 16; b++) begin
            nxt[16 * int'(ridx) + b] <= fm_rdata[8*b +: 8];
            if (!dw_q && (16 * int'(ridx) + b < NCOMP))
              nxt[NCOMP + 16 * int'(ridx) + b] <= fm_rdata[8*b +: 8];
          end
          if (ridx == nwords - 3'd1) begin
            nxt_full   <= 1'b1;
            issued_all <= 1'b0;
            fidx       <= '0;
            f_steps    <= f_steps + 7'd1;
            if (f_steps + 7'd1 == nrows_q) fetching <= 1'b0;
          end
        end
        if (load) nxt_full <= 1'b0;
      end
    end
  end

  // ---------------- serializer ----------------
  assign load = nxt_full && (!cur_act || bitn == 3'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_act <= 1'b0;
      cur     <= '0;
      bitn    <= '0;
      s_step  <= '0;
    end else if (start) begin
      cur_act <= 1'b0;
      s_step  <= '0;
    end else begin
      if (cur_act && bitn != 3'd0) begin
        bitn <= bitn - 3'd1;
      end else if (load) begin
        cur     <= nxt;
        cur_act <= 1'b1;
        bitn    <= 3'd7;
        if (cur_act) s_step <= s_step + 7'd1;
      end else if (cur_act) begin
        cur_act <= 1'b0;
      end
    end
  end

  always_comb begin
    for (int c = 0; c < NCOMP; c++) begin
      inp[c] = cur[c][bitn];
      inn[c] = cur[NCOMP + c][bitn];
    end
    ctl.valid     = cur_act;
    ctl.bit_first = cur_act && (bitn == 3'd7);
    ctl.bit_last  = cur_act && (bitn == 3'd0);
    ctl.row_first = cur_act && (s_step == 7'd0);
    ctl.row_last  = cur_act && (s_step == nrows_q - 7'd1);
    row           = row0_q + s_step[5:0];
    done          = ctl.bit_last && ctl.row_last;
  end

  // Per-channel input sums of the current step.
  logic signed [ISW-1:0] sp_lo, sp_hi, sn_lo, sn_hi;
  always_comb begin
    sp_lo = '0; sp_hi = '0; sn_lo = '0; sn_hi = '0;
    for (int c = 0; c < NCOMP / 2; c++) begin
      sp_lo = sp_lo + ISW'(signed'(cur[c]));
      sp_hi = sp_hi + ISW'(signed'(cur[NCOMP / 2 + c]));
      sn_lo = sn_lo + ISW'(signed'(cur[NCOMP + c]));
      sn_hi = sn_hi + ISW'(signed'(cur[NCOMP + NCOMP / 2 + c]));
    end
    if (dw_q) begin
      isum[0] = sp_lo;  isum[1] = sn_lo;
      isum[2] = sp_hi;  isum[3] = sn_hi;
    end else begin
      for (int k = 0; k < 4; k++) isum[k] = sp_lo + sp_hi;
    end
  end

endmodule
