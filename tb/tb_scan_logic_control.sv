// tb_scan_logic_control: runs the scan controller inside the full ROIRC on a
// small 30 x 40 array (sentinel pitch 5) so that every decision can be
// checked record by record. Checks: the frame header and the sentinel
// samples of each frame in grid order; the exact pixel rectangles
// (REC_BLOCK records) of the block runs for events at two opposite corners,
// including clipping at the array edge, in row-column order; the region
// pixels inside each rectangle in row-column order at one pixel per CLK_PIX
// period; no comparison in the first frame after the sentinel grid changed;
// the return to sentinel scanning; and that clearing ENABLE stops the
// controller at the end of a frame.
//
// No ports; a watchdog stops a hung run. From the paper: sentinel frames,
// region scans of inflated blocks and the return to sentinel mode; the
// small array, the record format and the merging of adjacent blocks into
// one run are this design's own choices.
`timescale 1ns/1ps
module tb_scan_logic_control;
  import roirc_pkg::*;
  localparam int NR = 30, NC = 40, STEP = 5;
  localparam int SRN = 6, SCN = 8;

  logic clk = 0, rst_n = 1;
  always #10 clk = !clk;
  logic enable = 0, cal_mode = 0, mask_clr = 0, dilate_en = 1;
  scan_cfg_t sen_cfg;
  logic [NR-1:0] row_sel;
  logic [NC-1:0] col_sel;
  logic clk_pix, out_valid, in_region, cfg_busy;
  logic [11:0] adc_data;
  rec_t out_rec;
  logic [31:0] frame_cnt, region_cnt, run_cnt, overflow_cnt, word_cnt;
  logic [$clog2(SRN * SCN):0] mask_cnt;
  logic [$clog2(SRN+1)+$clog2(SCN+1)-1:0] trig_cnt;

  roirc_top #(.N_ROWS(NR), .N_COLS(NC)) u_dut (
    .clk, .rst_n, .enable, .cal_mode, .mask_clr, .dilate_en, .sen_cfg,
    .threshold(12'd200), .mask_threshold(12'd205), .row_sel, .col_sel, .clk_pix, .adc_data,
    .out_valid, .out_ready(1'b1), .out_rec, .frame_cnt, .region_cnt, .run_cnt,
    .overflow_cnt, .mask_cnt, .trig_cnt, .word_cnt, .in_region, .cfg_busy);

  pixel_adc_model #(.N_ROWS(NR), .N_COLS(NC)) u_pix (.clk_pix, .row_sel, .col_sel, .adc(adc_data));

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0d: %s", cyc, what); end
  endtask

  // record checker: sentinel order and region order
  int blk_log [$];
  int exp_r, exp_c, sen_r, sen_c, rect [4];
  bit in_rect = 0, first_sen = 0;
  int sen_c0 = 0;
  longint last_reg = -1;
  int n_blocks = 0, n_region_pix = 0, n_sen = 0, bad_order = 0, bad_rate = 0, n_frames = 0;

  always @(posedge clk) if (rst_n && out_valid) begin
    unique case (out_rec.kind)
      REC_FRAME: begin
        n_frames++;
        check(!in_rect, "frame started inside a block run");
        first_sen = 1;
      end
      REC_SENTINEL: begin
        n_sen++;
        if (first_sen) begin
          // the grid start is whatever the frame was configured with
          first_sen = 0;
          sen_r = int'(out_rec.row); sen_c = int'(out_rec.col); sen_c0 = sen_c;
          if (!((sen_r == 0 && sen_c == 0) || (sen_r == 2 && sen_c == 2))) bad_order++;
        end
        if (int'(out_rec.row) != sen_r || int'(out_rec.col) != sen_c) bad_order++;
        sen_c += STEP;
        if (sen_c > NC - 1) begin sen_c = sen_c0; sen_r += STEP; end
      end
      REC_BLOCK: begin
        check(!in_rect, "block run started before the previous one ended");
        rect[0] = int'(out_rec.row); rect[1] = int'(out_rec.col);
        rect[2] = int'(out_rec.data[19:10]); rect[3] = int'(out_rec.data[9:0]);
        blk_log.push_back(rect[0]); blk_log.push_back(rect[1]);
        blk_log.push_back(rect[2]); blk_log.push_back(rect[3]);
        exp_r = rect[0]; exp_c = rect[1];
        in_rect = 1; last_reg = -1; n_blocks++;
      end
      REC_REGION: begin
        n_region_pix++;
        if (!in_rect || int'(out_rec.row) != exp_r || int'(out_rec.col) != exp_c) bad_order++;
        if (last_reg >= 0 && cyc - last_reg != 5) bad_rate++;
        last_reg = cyc;
        exp_c++;
        if (exp_c > rect[3]) begin exp_c = rect[1]; exp_r++; end
        if (exp_r > rect[2]) in_rect = 0;
      end
      default: ;
    endcase
  end

  task automatic wait_frames(int n);
    repeat (n) begin
      logic [31:0] f0;
      f0 = frame_cnt;
      while (frame_cnt == f0) @(posedge clk);
      @(posedge clk);
      while (in_region) @(posedge clk);
    end
  endtask

  task automatic expect_blocks(int exp [$], string what);
    check(blk_log.size() == exp.size(), $sformatf("%s: %0d block values, expected %0d", what, blk_log.size(), exp.size()));
    for (int k = 0; k < exp.size() && k < blk_log.size(); k++)
      check(blk_log[k] == exp[k], $sformatf("%s: block value %0d is %0d, expected %0d", what, k, blk_log[k], exp[k]));
    blk_log.delete();
  endtask

  initial begin
    logic [31:0] rc0, f0;
    sen_cfg = '{row: '{start: 10'd0, step: 10'd5, stop: 10'(NR - 1)},
                col: '{start: 10'd0, step: 10'd5, stop: 10'(NC - 1)}};
    #1 rst_n = 0;
    repeat (4) @(posedge clk);
    @(negedge clk); rst_n = 1;
    enable = 1;
    wait_frames(2);
    check(n_sen == 2 * SRN * SCN && bad_order == 0, $sformatf("sentinel samples %0d, %0d out of order", n_sen, bad_order));
    check(region_cnt == 0 && blk_log.size() == 0, "region scan without event");

    // event at the top-left corner: sentinel (0,0); blocks rows 0-1, cols 0-1
    u_pix.add_event(0, 1, 1, 2, 800);
    wait_frames(1);
    expect_blocks('{0, 0, 2, 7,  3, 0, 7, 7}, "corner event");
    check(region_cnt == 1, "corner event: one region phase");

    // event at the far corner: sentinel (25,35); blocks rows 4-5, cols 6-7
    u_pix.clear_event(0);
    wait_frames(1);
    blk_log.delete();
    u_pix.add_event(1, 26, 36, 2, 800);
    wait_frames(1);
    expect_blocks('{18, 28, 22, 37,  23, 28, 27, 37}, "far corner event");

    // two events in one frame, blocks from both, row-column order
    u_pix.clear_event(1);
    wait_frames(1);
    blk_log.delete();
    u_pix.add_event(2, 10, 10, 1, 900);   // sentinel (10,10) -> grid (2,2)
    u_pix.add_event(3, 15, 30, 1, 900);   // sentinel (15,30) -> grid (3,6)
    wait_frames(1);
    // grid rows 1-3 x cols 1-3 and rows 2-4 x cols 5-7: six runs
    expect_blocks('{ 3,  3,  7, 17,
                     8,  3, 12, 17,  8, 23, 12, 37,
                    13,  3, 17, 17, 13, 23, 17, 37,
                    18, 23, 22, 37}, "two events");

    // grid change: no comparison in the first frame with the new grid
    u_pix.clear_event(2);
    u_pix.clear_event(3);
    wait_frames(1);
    blk_log.delete();
    rc0 = region_cnt;
    sen_cfg.row.start = 10'd2; sen_cfg.col.start = 10'd2;
    wait_frames(2);
    check(region_cnt == rc0, "grid change caused a false trigger");
    check(bad_order == 0, $sformatf("%0d records out of order", bad_order));
    check(bad_rate == 0, $sformatf("%0d region pixels not 5 clk apart", bad_rate));
    check(n_region_pix == 64 + 100 + 6 * 5 * 15, $sformatf("region pixels %0d", n_region_pix));

    // enable low: stops after the frame
    enable = 0;
    wait_frames(1);
    f0 = frame_cnt;
    repeat (20000) @(posedge clk);
    check(frame_cnt == f0 && !cfg_busy && row_sel == '0, "controller did not stop");
    $display("blocks=%0d region_pixels=%0d frames=%0d", n_blocks, n_region_pix, n_frames);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
