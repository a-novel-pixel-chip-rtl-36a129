// roirc_top: the complete region-of-interest readout (ROIRC): the scanning
// module of the pixel chip wired to the FPGA co-processing module.
//
// The co-processor (param_config, enable_control, scan_logic_control,
// adc_data_analysis, trigger_detection, data_readout) repeatedly scans a
// sparse grid of sentinel pixels. When a sentinel's value rises by more
// than THRESHOLD against the previous sentinel frame, the block of pixels
// around it, inflated by the neighbouring blocks when DILATE_EN is set, is
// read out pixel by pixel; then sentinel scanning resumes. In calibration
// mode (CAL_MODE) no region is read; instead the sentinels whose value
// jumps by more than MASK_THRESHOLD between frames are masked for good.
//
// Outside this module: the pixel array, which takes ROW_SEL/COL_SEL and puts
// the selected pixel on the analog output, and the ADC, whose code arrives
// on ADC_DATA. ADC_DATA is sampled in the last clk cycle of each CLK_PIX
// period, i.e. just before the select switches move on. Records leave on a
// valid/ready stream towards the host.
//
// clk is the 50 MHz co-processor clock, also used as CLK_SHIFT; CLK_PIX is
// clk/DIV (10 MHz). The sentinel memories are sized for a pitch of at least
// MIN_STEP pixels; samples of a finer grid fall outside them and are not
// compared.
//
// From the paper: the split into these blocks, the two clocks, 100 ns per
// pixel, sentinel monitoring followed by region scans with inflation, and
// bad-pixel masking. Own choices: a single co-processor clock, the sample
// moment, the record stream and the status counters.
module roirc_top
  import roirc_pkg::*;
#(
  parameter int unsigned N_ROWS     = N_ROWS_DEF,
  parameter int unsigned N_COLS     = N_COLS_DEF,
  parameter int unsigned MIN_STEP   = MIN_STEP_DEF,
  parameter int unsigned DIV        = DIV_DEF,
  parameter int unsigned FIFO_DEPTH = 16,
  localparam int unsigned SR  = (N_ROWS + MIN_STEP - 1) / MIN_STEP,
  localparam int unsigned SC  = (N_COLS + MIN_STEP - 1) / MIN_STEP,
  localparam int unsigned SRW = $clog2(SR + 1),
  localparam int unsigned SCW = $clog2(SC + 1),
  localparam int unsigned IW  = $clog2(SR * SC)
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration from the host
  input  logic              enable,
  input  logic              cal_mode,
  input  logic              mask_clr,
  input  logic              dilate_en,
  input  scan_cfg_t         sen_cfg,
  input  logic [ADC_W-1:0]  threshold,
  input  logic [ADC_W-1:0]  mask_threshold,
  // pixel array and ADC
  output logic [N_ROWS-1:0] row_sel,
  output logic [N_COLS-1:0] col_sel,
  output logic              clk_pix,
  input  logic [ADC_W-1:0]  adc_data,
  // record stream to the host
  output logic              out_valid,
  input  logic              out_ready,
  output rec_t              out_rec,
  // status
  output logic [31:0]       frame_cnt,
  output logic [31:0]       region_cnt,
  output logic [31:0]       run_cnt,
  output logic [31:0]       overflow_cnt,
  output logic [IW:0]       mask_cnt,
  output logic [SRW+SCW-1:0] trig_cnt,
  output logic [31:0]       word_cnt,
  output logic              in_region,
  output logic              cfg_busy
);

  // chip interface
  logic clk_shift, shift_en, load_data, pix_en;
  logic row_start_s, row_step_s, row_end_s, col_start_s, col_step_s, col_end_s;
  logic [AW-1:0] pix_row, pix_col;
  logic pix_vld;

  // co-processor internals
  logic      snap, pix_last, cfg_req, cfg_done, scan_stop;
  scan_cfg_t cfg;
  logic      ana_vld, compare_en, tmap_clr, any_trig, run_found;
  logic [IW-1:0]  ana_idx;
  logic [SRW-1:0] ana_si, q_row, trig_si;
  logic [SCW-1:0] ana_sj, q_pos, n_sc, run_start, run_end, trig_sj;
  logic           trig_vld;
  logic      rec_vld;
  rec_t      rec;

  scanning_module #(.N_ROWS(N_ROWS), .N_COLS(N_COLS)) u_chip (
    .clk_shift, .clk_pix, .rst_n, .shift_en, .load_data, .pix_en,
    .row_start_in(row_start_s), .row_step_in(row_step_s), .row_end_in(row_end_s),
    .col_start_in(col_start_s), .col_step_in(col_step_s), .col_end_in(col_end_s),
    .row_sel, .col_sel, .pix_row, .pix_col, .pix_vld
  );

  param_config #(.DIV(DIV)) u_pcfg (
    .clk, .rst_n, .snap, .cfg, .shift_en,
    .clk_shift, .clk_pix, .pix_last,
    .row_start_o(row_start_s), .row_step_o(row_step_s), .row_end_o(row_end_s),
    .col_start_o(col_start_s), .col_step_o(col_step_s), .col_end_o(col_end_s)
  );

  enable_control u_en (
    .clk, .rst_n, .cfg_req, .scan_stop, .pix_last,
    .snap, .shift_en, .load_data, .pix_en, .cfg_done, .busy(cfg_busy)
  );

  scan_logic_control #(.N_ROWS(N_ROWS), .N_COLS(N_COLS), .SR(SR), .SC(SC)) u_ctl (
    .clk, .rst_n, .enable, .cal_mode, .sen_cfg,
    .cfg, .cfg_req, .cfg_done, .scan_stop,
    .smp(pix_last && pix_vld), .pix_row, .pix_col, .adc_val(adc_data),
    .ana_vld, .ana_idx, .ana_si, .ana_sj, .compare_en, .tmap_clr, .n_sc,
    .q_row, .q_pos, .any_trig, .run_found, .run_start, .run_end,
    .rec_vld, .rec, .frame_cnt, .region_cnt, .run_cnt, .in_region
  );

  adc_data_analysis #(.NSEN(SR * SC), .TAGW(SRW + SCW)) u_ana (
    .clk, .rst_n, .smp_vld(ana_vld), .smp_idx(ana_idx), .smp_tag({ana_si, ana_sj}),
    .smp_val(adc_data), .compare_en, .cal_mode, .mask_clr,
    .thr(threshold), .mask_thr(mask_threshold),
    .trig_vld, .trig_tag({trig_si, trig_sj}), .mask_cnt
  );

  trigger_detection #(.SR(SR), .SC(SC)) u_trg (
    .clk, .rst_n, .clr(tmap_clr), .set_vld(trig_vld), .set_si(trig_si), .set_sj(trig_sj),
    .dilate_en, .n_sc, .q_row, .q_pos,
    .any_trig, .trig_cnt, .run_found, .run_start, .run_end
  );

  data_readout #(.DEPTH(FIFO_DEPTH)) u_out (
    .clk, .rst_n, .in_vld(rec_vld), .in_rec(rec),
    .out_valid, .out_ready, .out_rec, .overflow_cnt, .word_cnt
  );

endmodule
