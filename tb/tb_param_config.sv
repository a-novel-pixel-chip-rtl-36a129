// tb_param_config: checks that CLK_PIX is clk divided by 5 with its rising
// edge inside the phase-0 clk cycle (PIX_LAST marks the cycle before), and
// that after SNAP the six serial lines carry the six 10-bit parameters MSB
// first, one bit per clk cycle with SHIFT_EN high, holding while it is low.
//
// No ports; a watchdog stops a hung run. From the paper: 50 MHz CLK_SHIFT
// and 10 MHz CLK_PIX; the MSB-first order and the CLK_PIX phase are own
// choices.
`timescale 1ns/1ps
module tb_param_config;
  import roirc_pkg::*;
  logic clk = 0, rst_n = 1;
  always #10 clk = !clk;
  logic snap = 0, shift_en = 0;
  scan_cfg_t cfg;
  logic clk_shift, clk_pix, pix_last;
  logic s0, s1, s2, s3, s4, s5;
  int checks = 0, failures = 0;

  param_config u_dut (.clk, .rst_n, .snap, .cfg, .shift_en, .clk_shift, .clk_pix, .pix_last,
                      .row_start_o(s0), .row_step_o(s1), .row_end_o(s2),
                      .col_start_o(s3), .col_step_o(s4), .col_end_o(s5));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  // clock relation
  realtime last_rise = 0;
  int rises = 0, last_cnt = -1;
  bit prev_last = 0;
  always @(posedge clk) prev_last <= pix_last;
  always @(posedge clk_pix) begin
    if (rises > 1) check($realtime - last_rise == 100.0, $sformatf("CLK_PIX period %0t", $realtime - last_rise));
    if (rises > 0) check(prev_last, "CLK_PIX rose outside the cycle after PIX_LAST");
    last_rise = $realtime;
    rises++;
  end
  realtime rise_t;
  always @(posedge clk_pix) rise_t = $realtime;
  always @(negedge clk_pix) if (rises > 1) check($realtime - rise_t == 40.0, "CLK_PIX high time");

  initial begin
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    check(clk_shift === clk, "CLK_SHIFT is the clock");
    for (int t = 0; t < 30; t++) begin
      cfg = scan_cfg_t'({$urandom, $urandom});
      @(negedge clk); snap = 1;
      @(negedge clk); snap = 0;
      for (int k = 9; k >= 0; k--) begin
        check(s0 == cfg.row.start[k] && s1 == cfg.row.step[k] && s2 == cfg.row.stop[k] &&
              s3 == cfg.col.start[k] && s4 == cfg.col.step[k] && s5 == cfg.col.stop[k],
              $sformatf("bit %0d of the parameters", k));
        if (k == 5) begin repeat (2) @(negedge clk); end  // SHIFT_EN low: hold
        shift_en = 1;
        @(negedge clk);
        shift_en = 0;
      end
    end
    check(rises > 50, "CLK_PIX is running");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
