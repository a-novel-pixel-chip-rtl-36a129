// tb_roirc_top: end-to-end test of the region-of-interest readout at the
// full 356 x 512 array with sentinel pitch 5, every top parameter at its
// default.
//
// A behavioural pixel array and ADC answer the select switches. The test
// runs, in order: calibration frames with one noisy sentinel (which must end
// up masked); normal frames in which that noisy pixel must not trigger; a
// single track-like event (the region read must be exactly the inflated
// blocks around the trigger sentinels, and cover the whole event); a frame
// with the event unchanged (no new trigger); two distant events in one frame
// (two separate areas); a long track whose faint end triggers no sentinel
// and must be read through inflation alone (every event pixel read); and
// an event read with inflation switched off (only the trigger blocks). The
// expected pixel sets are computed here from the model's event discs,
// independent of the design. It also checks the frame period (one pixel
// per 5 clk cycles plus the configuration) and the pixel rate inside a
// region. Each mechanism is counted; one that never happened
// is a failure.
//
// No ports; a watchdog stops a hung run. From the paper: array size, pitch
// 5, 25-pixel blocks centred on sentinels, 100 ns per pixel, inflation by
// the eight neighbouring blocks (its Fig. 10), masking of noisy sentinels;
// the thresholds in ADC codes and the event shapes are own choices.
`timescale 1ns/1ps
module tb_roirc_top;
  import roirc_pkg::*;

  localparam int NR   = 356;
  localparam int NC   = 512;
  localparam int STEP = 5;
  localparam int DIVR = 5;
  localparam int THR  = 200;
  localparam int SRN  = (NR + STEP - 1) / STEP;
  localparam int SCN  = (NC + STEP - 1) / STEP;
  localparam int NSEN = SRN * SCN;

  logic clk = 0, rst_n = 1;  // falls at 1 ns so that asynchronous resets see an edge
  always #10 clk = !clk;

  logic enable = 0, cal_mode = 0, mask_clr = 0, dilate_en = 1;
  scan_cfg_t sen_cfg;
  logic [11:0] threshold = 12'(THR), mask_threshold = 12'd205;
  logic [NR-1:0] row_sel;
  logic [NC-1:0] col_sel;
  logic clk_pix;
  logic [11:0] adc_data;
  logic out_valid, out_ready = 1;
  rec_t out_rec;
  logic [31:0] frame_cnt, region_cnt, run_cnt, overflow_cnt, word_cnt;
  logic [$clog2(NSEN):0] mask_cnt;
  logic [$clog2(SRN+1)+$clog2(SCN+1)-1:0] trig_cnt;
  logic in_region, cfg_busy;

  roirc_top u_dut (
    .clk, .rst_n, .enable, .cal_mode, .mask_clr, .dilate_en, .sen_cfg,
    .threshold, .mask_threshold, .row_sel, .col_sel, .clk_pix, .adc_data,
    .out_valid, .out_ready, .out_rec, .frame_cnt, .region_cnt, .run_cnt,
    .overflow_cnt, .mask_cnt, .trig_cnt, .word_cnt, .in_region, .cfg_busy
  );

  pixel_adc_model #(.N_ROWS(NR), .N_COLS(NC)) u_pix (
    .clk_pix, .row_sel, .col_sel, .adc(adc_data)
  );

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  // ---------------- record collection ----------------
  bit seen [NR][NC];
  int region_pix = 0, dup_pix = 0, bad_val = 0, sen_recs = 0;
  longint last_frame_cyc = -1, frame_period = 0, last_reg_cyc = -1;
  int reg_gap_bad = 0, reg_gaps = 0;
  int cur_blk_r0, cur_blk_c0;

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    unique case (out_rec.kind)
      REC_FRAME: begin
        if (last_frame_cyc >= 0) frame_period = cyc - last_frame_cyc;
        last_frame_cyc = cyc;
      end
      REC_SENTINEL: begin
        sen_recs++;
        if (int'(out_rec.row) % STEP != 0 || int'(out_rec.col) % STEP != 0) bad_val++;
      end
      REC_BLOCK: begin
        last_reg_cyc = -1;
      end
      REC_REGION: begin
        int r, c;
        r = int'(out_rec.row);
        c = int'(out_rec.col);
        if (last_reg_cyc >= 0) begin
          reg_gaps++;
          if (cyc - last_reg_cyc != DIVR) reg_gap_bad++;
        end
        last_reg_cyc = cyc;
        if (r < NR && c < NC) begin
          if (seen[r][c]) dup_pix++;
          seen[r][c] = 1;
          if (!(r == 100 && c == 100) &&
              int'(out_rec.data) != u_pix.baseline(r, c) + u_pix.signal_at(r, c)) bad_val++;
        end
        region_pix++;
      end
      default: ;
    endcase
  end

  // ---------------- expected region ----------------
  bit trig [SRN][SCN];
  bit blk  [SRN][SCN];

  // Sentinels whose value rose by more than THR since the previous frame:
  // new_sig is the event signal now, old_sig the one of the frame before.
  task automatic expect_region(bit dil, output int n_exp, output int n_mis, output int n_missed_ev);
    n_exp = 0; n_mis = 0; n_missed_ev = 0;
    for (int i = 0; i < SRN; i++) for (int j = 0; j < SCN; j++) begin
      int r, c;
      r = i * STEP;
      c = j * STEP;
      trig[i][j] = (r < NR && c < NC) && (u_pix.signal_at(r, c) - prev_sig[i][j] > THR);
    end
    for (int i = 0; i < SRN; i++) for (int j = 0; j < SCN; j++) begin
      blk[i][j] = 0;
      for (int di = -1; di <= 1; di++) for (int dj = -1; dj <= 1; dj++) begin
        int a, b;
        a = i + di;
        b = j + dj;
        if ((dil || (di == 0 && dj == 0)) && a >= 0 && a < SRN && b >= 0 && b < SCN && trig[a][b])
          blk[i][j] = 1;
      end
    end
    for (int r = 0; r < NR; r++) for (int c = 0; c < NC; c++) begin
      // block of pixel (r,c): the sentinel it is nearest to, pitch STEP, centred
      int i, j;
      bit e;
      i = (r + STEP / 2) / STEP;
      j = (c + STEP / 2) / STEP;
      e = (i < SRN && j < SCN) ? blk[i][j] : 0;
      if (e) n_exp++;
      if (e != seen[r][c]) n_mis++;
      if (u_pix.signal_at(r, c) > 0 && !seen[r][c]) n_missed_ev++;
    end
  endtask

  int prev_sig [SRN][SCN];
  task automatic snapshot_signal();
    for (int i = 0; i < SRN; i++) for (int j = 0; j < SCN; j++)
      prev_sig[i][j] = (i * STEP < NR && j * STEP < NC) ? u_pix.signal_at(i * STEP, j * STEP) : 0;
  endtask

  task automatic clear_seen();
    for (int r = 0; r < NR; r++) for (int c = 0; c < NC; c++) seen[r][c] = 0;
    region_pix = 0;
  endtask

  // Wait for the end of the current sentinel frame (and region scan, if any).
  task automatic wait_frames(int n);
    repeat (n) begin
      logic [31:0] f0;
      f0 = frame_cnt;
      while (frame_cnt == f0) @(posedge clk);
      @(posedge clk);
      while (in_region) @(posedge clk);
      // now at the start of the next frame's configuration
    end
  endtask

  // mechanism counters
  int m_track = 0, m_mask = 0, m_suppress = 0, m_region = 0, m_multi = 0, m_dil_on = 0, m_dil_off = 0, m_repeat = 0;

  initial begin
    int n_exp, n_mis, n_miss_ev;
    logic [31:0] rc0, runs0;
    sen_cfg = '{row: '{start: 10'd0, step: 10'(STEP), stop: 10'(NR - 1)},
                col: '{start: 10'd0, step: 10'(STEP), stop: 10'(NC - 1)}};
    for (int i = 0; i < SRN; i++) for (int j = 0; j < SCN; j++) prev_sig[i][j] = 0;
    u_pix.set_noisy(100, 100);
    #1 rst_n = 0;
    repeat (5) @(posedge clk);
    @(negedge clk); rst_n = 1;
    repeat (5) @(posedge clk);

    // --- calibration: learn the noisy sentinel ---
    cal_mode = 1; enable = 1;
    wait_frames(3);
    check(mask_cnt == 1, $sformatf("calibration masked %0d sentinels, expected 1", mask_cnt));
    if (mask_cnt == 1) m_mask++;
    check(region_cnt == 0, "no region scan in calibration mode");
    check(sen_recs == 3 * NSEN, $sformatf("sentinel records %0d, expected %0d", sen_recs, 3 * NSEN));
    check(frame_period >= NSEN * DIVR && frame_period <= NSEN * DIVR + 40,
          $sformatf("sentinel frame period %0d clk, expected %0d + configuration", frame_period, NSEN * DIVR));

    // --- normal mode: noisy pixel must be ignored ---
    cal_mode = 0;
    wait_frames(2);
    check(region_cnt == 0, "masked noisy sentinel caused a region scan");
    if (region_cnt == 0) m_suppress++;

    // --- one event ---
    clear_seen();
    snapshot_signal();
    u_pix.add_event(0, 130, 62, 4, 800);
    rc0 = region_cnt;
    wait_frames(1);
    check(region_cnt == rc0 + 1, "event did not start a region scan");
    expect_region(1, n_exp, n_mis, n_miss_ev);
    check(n_exp == 300, $sformatf("expected region of single event is %0d pixels, expected 300", n_exp));
    check(n_mis == 0, $sformatf("single event: %0d pixels differ from expected region", n_mis));
    check(n_miss_ev == 0, $sformatf("single event: %0d event pixels not read", n_miss_ev));
    check(dup_pix == 0, "pixel read twice in a region scan");
    if (region_cnt == rc0 + 1 && n_mis == 0) begin m_region++; m_dil_on++; end

    // --- unchanged event: no retrigger ---
    snapshot_signal();
    rc0 = region_cnt;
    wait_frames(1);
    check(region_cnt == rc0, "unchanged event triggered again");
    if (region_cnt == rc0) m_repeat++;

    // --- two distant events in one frame ---
    u_pix.clear_event(0);
    wait_frames(1);
    clear_seen();
    snapshot_signal();
    u_pix.add_event(1, 50, 401, 3, 600);
    u_pix.add_event(2, 300, 100, 6, 600);
    rc0 = region_cnt; runs0 = run_cnt;
    wait_frames(1);
    check(region_cnt == rc0 + 1, "two events: one region phase expected");
    expect_region(1, n_exp, n_mis, n_miss_ev);
    check(n_mis == 0, $sformatf("two events: %0d pixels differ from expected region", n_mis));
    check(n_miss_ev == 0, $sformatf("two events: %0d event pixels not read", n_miss_ev));
    check(region_pix == n_exp, $sformatf("two events: %0d pixels read, expected %0d", region_pix, n_exp));
    check(run_cnt - runs0 >= 2, "two events need at least two block runs");
    if (n_mis == 0 && run_cnt - runs0 >= 2) m_multi++;

    // --- long track whose faint end triggers no sentinel ---
    u_pix.clear_event(1);
    u_pix.clear_event(2);
    wait_frames(1);
    clear_seen();
    snapshot_signal();
    for (int k = 0; k < 7; k++) u_pix.add_event(k, 240 + 4 * k, 300 + 6 * k, 3, 700);
    u_pix.add_event(7, 266, 340, 2, THR * 3 / 4);
    rc0 = region_cnt;
    wait_frames(1);
    check(region_cnt == rc0 + 1, "track: no region scan");
    expect_region(1, n_exp, n_mis, n_miss_ev);
    check(n_mis == 0, $sformatf("track: %0d pixels differ from expected region", n_mis));
    check(n_miss_ev == 0, $sformatf("track: %0d event pixels not read", n_miss_ev));
    check(trig[53][68] == 0 && blk[53][68] == 1, "track: faint end should be read only through inflation");
    if (n_mis == 0 && n_miss_ev == 0 && trig[53][68] == 0) m_track++;
    for (int k = 0; k < 8; k++) u_pix.clear_event(k);

    // --- inflation off ---
    wait_frames(1);
    dilate_en = 0;
    clear_seen();
    snapshot_signal();
    u_pix.add_event(3, 200, 250, 6, 700);
    wait_frames(1);
    expect_region(0, n_exp, n_mis, n_miss_ev);
    check(n_mis == 0, $sformatf("no inflation: %0d pixels differ from expected region", n_mis));
    check(n_exp > 0 && region_pix == n_exp, $sformatf("no inflation: %0d pixels read, expected %0d", region_pix, n_exp));
    if (n_mis == 0 && n_exp > 0) m_dil_off++;

    check(reg_gaps > 0 && reg_gap_bad == 0, $sformatf("region pixel period not %0d clk in %0d of %0d gaps", DIVR, reg_gap_bad, reg_gaps));
    check(bad_val == 0, $sformatf("%0d records with wrong value or address", bad_val));
    check(overflow_cnt == 0, "readout buffer overflowed");
    check(u_pix.sel_errors == 0, "more than one row or column selected");

    $display("mechanisms: mask_learned=%0d noise_suppressed=%0d region_scan=%0d no_retrigger=%0d multi_event=%0d inflation_on=%0d inflation_off=%0d long_track=%0d",
             m_mask, m_suppress, m_region, m_repeat, m_multi, m_dil_on, m_dil_off, m_track);
    check(m_mask > 0 && m_suppress > 0 && m_region > 0 && m_repeat > 0 && m_multi > 0 && m_dil_on > 0 && m_dil_off > 0 && m_track > 0,
          "a mechanism never happened");
    $display("frames=%0d regions=%0d runs=%0d records=%0d cycles=%0d", frame_cnt, region_cnt, run_cnt, word_cnt, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
