// tb_adc_data_analysis: feeds frames of sentinel samples (one every 5 clk
// cycles, as in the real scan) into the analysis block and compares its
// trigger pulses with a reference model kept here: no triggers in the first
// frame, a trigger exactly where value - previous value > THR, none for
// masked sentinels or falling values; in calibration mode no triggers but
// a mask bit for every |difference| > MASK_THR; MASK_CLR empties the mask.
//
// No ports; a watchdog stops a hung run. From the paper: subtraction of
// the previous sentinel frame and the threshold test, masking of pixels
// that change without signal; the rising-only trigger and |difference| for
// masking are this design's reading, and the random values are own choice.
`timescale 1ns/1ps
module tb_adc_data_analysis;
  localparam int NSEN = 40, TAGW = 8, IW = $clog2(NSEN);
  logic clk = 0, rst_n = 1;
  always #10 clk = !clk;
  logic smp_vld = 0, compare_en = 0, cal_mode = 0, mask_clr = 0;
  logic [IW-1:0] smp_idx = 0;
  logic [TAGW-1:0] smp_tag = 0;
  logic [11:0] smp_val = 0;
  logic [11:0] thr = 12'd200, mask_thr = 12'd205;
  logic trig_vld;
  logic [TAGW-1:0] trig_tag;
  logic [IW:0] mask_cnt;
  int checks = 0, failures = 0;

  adc_data_analysis #(.NSEN(NSEN), .TAGW(TAGW)) u_dut (
    .clk, .rst_n, .smp_vld, .smp_idx, .smp_tag, .smp_val, .compare_en, .cal_mode, .mask_clr,
    .thr, .mask_thr, .trig_vld, .trig_tag, .mask_cnt);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  int prev [NSEN];
  bit mask [NSEN];
  int nmask = 0, ntrig_total = 0, nmask_events = 0;

  // One frame; vals chosen by kind: 0 quiet, 1 some events, 2 noise.
  task automatic frame(int kind, bit cmp, bit cal);
    compare_en = cmp; cal_mode = cal;
    for (int i = 0; i < NSEN; i++) begin
      int v, d;
      bit exp_t;
      v = 1000 + i;
      if (kind == 1 && $urandom_range(0, 3) == 0) v += $urandom_range(150, 400);
      if (kind == 2 && (i % 7 == 3)) v += ($urandom_range(0, 1) ? 300 : -300);
      d = v - prev[i];
      exp_t = cmp && !cal && !mask[i] && d > 200;
      @(negedge clk);
      smp_vld = 1; smp_idx = IW'(i); smp_tag = TAGW'(i + 100); smp_val = 12'(v);
      @(negedge clk);
      smp_vld = 0;
      @(negedge clk);
      check(trig_vld == exp_t, $sformatf("sentinel %0d diff %0d: trigger %0d expected %0d", i, d, trig_vld, exp_t));
      if (trig_vld) begin check(trig_tag == TAGW'(i + 100), "trigger tag"); ntrig_total++; end
      if (cmp && cal && !mask[i] && (d > 205 || d < -205)) begin mask[i] = 1; nmask++; nmask_events++; end
      prev[i] = v;
      @(negedge clk); @(negedge clk);
      check(int'(mask_cnt) == nmask, $sformatf("mask count %0d expected %0d", mask_cnt, nmask));
    end
  endtask

  initial begin
    for (int i = 0; i < NSEN; i++) begin prev[i] = 0; mask[i] = 0; end
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    frame(0, 0, 0);          // first frame: nothing to compare
    frame(1, 1, 0);          // events
    frame(0, 1, 0);          // values fall back: no trigger
    frame(2, 1, 1);          // calibration with noise
    frame(2, 1, 1);
    check(nmask > 0, "calibration masked nothing");
    frame(2, 1, 0);          // noisy sentinels are masked now
    frame(1, 1, 0);
    @(negedge clk); mask_clr = 1; @(negedge clk); mask_clr = 0;
    for (int i = 0; i < NSEN; i++) mask[i] = 0;
    nmask = 0;
    @(negedge clk);
    check(mask_cnt == 0, "mask not cleared");
    frame(2, 1, 0);          // noise triggers again without the mask
    check(ntrig_total > 0, "no trigger seen at all");
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
