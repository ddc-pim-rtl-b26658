// tb_ddc_pim_macro -- self-checking test of one PIM macro.
// Loads random signed weight rows and M values, then runs MVMs of 1..6 rows
// with random signed INT8 inputs, back to back at eight cycles per row, in
// double computing mode (std/pw, recover on), depthwise stages 0 and 1
// (distinct INP/INN inputs) and regular mode (recover off).  Results are
// compared with dot products computed here from the stored weights, the
// twin weights ~w, the inputs and M, and res_valid must come three cycles
// after the cycle carrying the last LSB.
module tb_ddc_pim_macro;
  import ddc_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, wr_en, rd_en, m_wr_en, m_idx, res_valid;
  logic [4:0] wr_comp, rd_comp;
  logic [5:0] wr_row, rd_row, row;
  logic [15:0] wr_data, rd_data, m_data;
  core_cfg_t cfg;
  cmp_ctl_t ctl;
  logic [31:0] inp, inn;
  logic [3:0][15:0] isum;
  logic [3:0][31:0] res;

  logic [15:0] mem [32][64];
  logic signed [7:0] mv [4];
  logic signed [7:0] xin [32], yin [32];
  longint expv [4], acc [4], is [4];
  int nr, r0, lat, modesel;

  ddc_pim_macro #(.NCOMP(32), .ROWS(64)) dut (.*);

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [7:0] wsel(int c, int r, int half, bit inv);
    logic [7:0] w;
    w = half ? mem[c][r][7:0] : mem[c][r][15:8];
    return inv ? ~w : w;
  endfunction

  initial begin
    rst_n = 0; wr_en = 0; rd_en = 0; m_wr_en = 0; m_idx = 0; m_data = 0;
    wr_comp = 0; rd_comp = 0; wr_row = 0; rd_row = 0; row = 0; wr_data = 0;
    cfg = '0; ctl = '0; inp = 0; inn = 0; isum = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int c = 0; c < 32; c++)
      for (int r = 0; r < 64; r++) begin
        mem[c][r] = 16'($urandom());
        @(negedge clk); wr_en = 1; wr_comp = 5'(c); wr_row = 6'(r); wr_data = mem[c][r];
      end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 2; i++) begin
      mv[2*i] = 8'($urandom()); mv[2*i+1] = 8'($urandom());
      @(negedge clk); m_wr_en = 1; m_idx = 1'(i); m_data = {mv[2*i+1], mv[2*i]};
    end
    @(negedge clk); m_wr_en = 0;
    // normal SRAM mode read back
    for (int t = 0; t < 16; t++) begin
      @(negedge clk); rd_en = 1; rd_comp = 5'($urandom()); rd_row = 6'($urandom());
      @(negedge clk); rd_en = 0; checks++;
      if (rd_data !== mem[rd_comp][rd_row]) begin failures++; $display("FAIL sram read"); end
    end

    for (int n = 0; n < 40; n++) begin
      modesel = n % 4;  // 0 double std, 1 dw stage 0, 2 dw stage 1, 3 regular
      cfg = '0;
      cfg.mode = (modesel == 3) ? MODE_REGULAR : MODE_DOUBLE;
      cfg.dw = (modesel == 1 || modesel == 2);
      cfg.stage = (modesel == 2);
      cfg.recover_en = (modesel != 3);
      nr = $urandom_range(1, 6); r0 = $urandom_range(0, 64 - nr);
      for (int c = 0; c < 4; c++) begin acc[c] = 0; is[c] = 0; end
      for (int r = 0; r < nr; r++) begin
        for (int c = 0; c < 32; c++) begin
          xin[c] = 8'($urandom());
          yin[c] = cfg.dw ? 8'($urandom()) : xin[c];
        end
        for (int c = 0; c < 32; c++) begin
          if (!cfg.dw) begin
            acc[0] += xin[c] * wsel(c, r0 + r, 0, 0);
            acc[1] += (modesel == 3) ? 0 : yin[c] * wsel(c, r0 + r, 0, 1);
            acc[2] += xin[c] * wsel(c, r0 + r, 1, 0);
            acc[3] += (modesel == 3) ? 0 : yin[c] * wsel(c, r0 + r, 1, 1);
            for (int k = 0; k < 4; k++) is[k] += xin[c];
          end else begin
            int lane;
            lane = (c < 16) ? 0 : 2;
            acc[lane]     += xin[c] * wsel(c, r0 + r, cfg.stage, 0);
            acc[lane + 1] += yin[c] * wsel(c, r0 + r, cfg.stage, 1);
            is[lane] += xin[c]; is[lane + 1] += yin[c];
          end
        end
        for (int b = 7; b >= 0; b--) begin
          @(negedge clk);
          row = 6'(r0 + r);
          for (int c = 0; c < 32; c++) begin inp[c] = xin[c][b]; inn[c] = yin[c][b]; end
          if (b == 7) begin
            isum = '0;
            for (int c = 0; c < 32; c++) begin
              if (!cfg.dw) for (int k = 0; k < 4; k++) isum[k] = isum[k] + 16'(xin[c]);
              else begin
                isum[c < 16 ? 0 : 2] = isum[c < 16 ? 0 : 2] + 16'(xin[c]);
                isum[c < 16 ? 1 : 3] = isum[c < 16 ? 1 : 3] + 16'(yin[c]);
              end
            end
          end
          ctl = '0; ctl.valid = 1; ctl.bit_first = (b == 7); ctl.bit_last = (b == 0);
          ctl.row_first = (r == 0); ctl.row_last = (r == nr - 1);
        end
      end
      @(negedge clk); ctl = '0;
      lat = 1;
      while (!res_valid && lat < 20) begin @(posedge clk); #1; lat++; end
      checks++;
      if (lat != 3) begin failures++; $display("FAIL latency %0d", lat); end
      for (int c = 0; c < 4; c++) begin
        int mi;
        mi = cfg.dw ? 2 * cfg.stage + c / 2 : c / 2;
        expv[c] = acc[c] + (cfg.recover_en ? is[c] * longint'(mv[mi]) : 0);
        checks++;
        if (longint'($signed(res[c])) != expv[c]) begin
          failures++; $display("FAIL n=%0d mode=%0d ch=%0d got %0d exp %0d", n, modesel, c, $signed(res[c]), expv[c]);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
