// tb_ddc_macro_ctrl -- self-checking test of the macro controller.
// Checks the path enables and the readout sample enable for every mode and
// depthwise stage, and that control flags come out one cycle and input sums
// two cycles after they go in.
module tb_ddc_macro_ctrl;
  import ddc_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, sample;
  core_cfg_t cfg;
  cmp_ctl_t ctl, ctl_s1, ctl_d;
  logic [3:0][15:0] isum, isum_s2, isum_d1, isum_d2;
  logic [1:0] en_q, en_qb, eq, eqb;

  ddc_macro_ctrl dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; cfg = '0; ctl = '0; isum = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    isum_d1 = '0; isum_d2 = '0; ctl_d = '0;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      cfg.mode = core_mode_e'($urandom_range(0, 2)); cfg.dw = 1'($urandom()); cfg.stage = 1'($urandom());
      cfg.recover_en = 1'($urandom());
      ctl = cmp_ctl_t'($urandom()); isum = {$urandom(), $urandom()};
      #1;
      case (cfg.mode)
        MODE_REGULAR: begin eq = cfg.dw ? (cfg.stage ? 2'b10 : 2'b01) : 2'b11; eqb = 2'b00; end
        MODE_DOUBLE:  begin eq = cfg.dw ? (cfg.stage ? 2'b10 : 2'b01) : 2'b11; eqb = eq; end
        default:      begin eq = 2'b00; eqb = 2'b00; end
      endcase
      checks++;
      if (en_q !== eq || en_qb !== eqb || sample !== (ctl.valid && cfg.mode != MODE_SRAM)) begin
        failures++; $display("FAIL enables mode=%0d", cfg.mode);
      end
      ctl_d = ctl; ctl_d.valid = ctl.valid && cfg.mode != MODE_SRAM;
      @(posedge clk); #1;
      isum_d2 = isum_d1; isum_d1 = isum;
      checks++;
      if (ctl_s1 !== ctl_d) begin failures++; $display("FAIL ctl delay"); end
      if (t > 0) begin
        checks++;
        if (isum_s2 !== isum_d2) begin failures++; $display("FAIL isum delay"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
