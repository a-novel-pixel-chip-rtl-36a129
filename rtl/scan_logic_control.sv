// scan_logic_control: the co-processor's "Scanning Logic Control", the
// state machine that runs the region-of-interest readout.
//
// Sentinel monitoring: the controller configures the scanning module with
// the sentinel grid (SEN_CFG: start/step/end per axis, typically step 5 over
// the whole array) and lets it run one frame. Every sample is forwarded to
// the host, and, with its grid position (si, sj) and linear index
// si*SC+sj, to the ADC data analysis, which flags trigger sentinels into the
// trigger map. The frame ends with the sample whose row and column are both
// the last of the grid; PIX_EN is dropped in that cycle.
//
// Region scanning: if any sentinel triggered (and calibration mode is off),
// the controller walks the block map row by row of the sentinel grid. For
// each run of marked blocks it computes the pixel rectangle (the run's
// blocks, each one sentinel pitch wide and centred on its sentinel, clipped
// to the array), reconfigures the scanning module with step 1 over that
// rectangle, reads it, and moves on; then it returns to sentinel
// monitoring. Several distant events simply give several runs.
//
// Timing: a sentinel frame of N sentinels takes one configuration (11 to 15
// clk) plus N CLK_PIX periods; every run costs one configuration plus one
// CLK_PIX period per pixel.
//
// Following the paper: the three phases (sentinel scan, block region scan
// with inflation, return to sentinel scan), reconfiguration before every
// block scan, row-column order. Own choices: joining horizontally adjacent
// blocks into one rectangle, the record format and the state encoding.
module scan_logic_control
  import roirc_pkg::*;
#(
  parameter int unsigned N_ROWS = N_ROWS_DEF,
  parameter int unsigned N_COLS = N_COLS_DEF,
  parameter int unsigned SR     = 72,
  parameter int unsigned SC     = 103,
  localparam int unsigned SRW   = $clog2(SR + 1),
  localparam int unsigned SCW   = $clog2(SC + 1),
  localparam int unsigned IW    = $clog2(SR * SC)
) (
  input  logic             clk,
  input  logic             rst_n,
  // user controls
  input  logic             enable,
  input  logic             cal_mode,
  input  scan_cfg_t        sen_cfg,
  // scanning module side
  output scan_cfg_t        cfg,
  output logic             cfg_req,
  input  logic             cfg_done,
  output logic             scan_stop,
  input  logic             smp,          // a pixel sample is taken this cycle
  input  logic [AW-1:0]    pix_row,
  input  logic [AW-1:0]    pix_col,
  input  logic [ADC_W-1:0] adc_val,
  // analysis and trigger map
  output logic             ana_vld,
  output logic [IW-1:0]    ana_idx,
  output logic [SRW-1:0]   ana_si,
  output logic [SCW-1:0]   ana_sj,
  output logic             compare_en,
  output logic             tmap_clr,
  output logic [SCW-1:0]   n_sc,
  output logic [SRW-1:0]   q_row,
  output logic [SCW-1:0]   q_pos,
  input  logic             any_trig,
  input  logic             run_found,
  input  logic [SCW-1:0]   run_start,
  input  logic [SCW-1:0]   run_end,
  // records for the host
  output logic             rec_vld,
  output rec_t             rec,
  // status
  output logic [31:0]      frame_cnt,
  output logic [31:0]      region_cnt,   // sentinel frames followed by a region scan
  output logic [31:0]      run_cnt,      // block runs scanned
  output logic             in_region
);

  typedef enum logic [3:0] {
    S_IDLE, S_SEN_CFG, S_SEN_REQ, S_SEN_WAIT, S_SEN_SCAN, S_SEN_DRAIN,
    S_REG_FIND, S_REG_REQ, S_REG_WAIT, S_REG_SCAN
  } state_t;

  state_t    state;
  scan_cfg_t sen_q;          // sentinel grid of the current frame
  logic      prev_valid;
  logic [SRW-1:0] si, n_sr;
  logic [SCW-1:0] sj;
  logic [1:0]     drain;
  logic [SCW-1:0] cur_end;

  // --- sentinel grid bookkeeping -------------------------------------
  logic last_c, last_r, in_grid, frame_last, region_last;
  always_comb begin
    last_c = (sen_q.col.step == '0) ||
             ({1'b0, pix_col} + {1'b0, sen_q.col.step} > {1'b0, sen_q.col.stop});
    last_r = (sen_q.row.step == '0) ||
             ({1'b0, pix_row} + {1'b0, sen_q.row.step} > {1'b0, sen_q.row.stop});
    in_grid    = (si < SRW'(SR)) && (sj < SCW'(SC));
    frame_last = last_c && last_r;
    region_last = (pix_row == cfg.row.stop) && (pix_col == cfg.col.stop);
  end

  // --- pixel rectangle of a run of blocks -----------------------------
  // Block of a sentinel at s with pitch p: s - p/2 ... s - p/2 + p - 1.
  logic [AW-1:0]  r_step, c_step;
  logic [AW-1:0]  r_lo_off, r_hi_off, c_lo_off, c_hi_off;
  logic [AW+SRW:0] srow;
  logic [AW+SCW:0] scol_a, scol_b;
  axis_cfg_t      rg_row, rg_col;
  always_comb begin
    r_step   = (sen_q.row.step == '0) ? AW'(1) : sen_q.row.step;
    c_step   = (sen_q.col.step == '0) ? AW'(1) : sen_q.col.step;
    r_lo_off = r_step >> 1;
    r_hi_off = r_step - 1'b1 - r_lo_off;
    c_lo_off = c_step >> 1;
    c_hi_off = c_step - 1'b1 - c_lo_off;
    srow   = (AW+SRW+1)'(sen_q.row.start) + (AW+SRW+1)'(q_row) * (AW+SRW+1)'(r_step);
    scol_a = (AW+SCW+1)'(sen_q.col.start) + (AW+SCW+1)'(run_start) * (AW+SCW+1)'(c_step);
    scol_b = (AW+SCW+1)'(sen_q.col.start) + (AW+SCW+1)'(run_end)   * (AW+SCW+1)'(c_step);
    rg_row.step  = AW'(1);
    rg_col.step  = AW'(1);
    rg_row.start = (srow > (AW+SRW+1)'(r_lo_off)) ? AW'(srow - (AW+SRW+1)'(r_lo_off)) : '0;
    rg_row.stop  = (srow + (AW+SRW+1)'(r_hi_off) > (AW+SRW+1)'(N_ROWS - 1)) ?
                   AW'(N_ROWS - 1) : AW'(srow + (AW+SRW+1)'(r_hi_off));
    rg_col.start = (scol_a > (AW+SCW+1)'(c_lo_off)) ? AW'(scol_a - (AW+SCW+1)'(c_lo_off)) : '0;
    rg_col.stop  = (scol_b + (AW+SCW+1)'(c_hi_off) > (AW+SCW+1)'(N_COLS - 1)) ?
                   AW'(N_COLS - 1) : AW'(scol_b + (AW+SCW+1)'(c_hi_off));
  end

  // --- outputs that follow the state -----------------------------------
  assign cfg_req    = (state == S_SEN_REQ) || (state == S_REG_REQ);
  assign tmap_clr   = (state == S_SEN_CFG);
  assign compare_en = prev_valid;
  assign in_region  = (state inside {S_REG_FIND, S_REG_REQ, S_REG_WAIT, S_REG_SCAN});
  assign scan_stop  = smp && (((state == S_SEN_SCAN) && frame_last) ||
                              ((state == S_REG_SCAN) && region_last));
  assign ana_vld    = smp && (state == S_SEN_SCAN) && in_grid;
  assign ana_idx    = IW'(si * SC + sj);
  assign ana_si     = si;
  assign ana_sj     = sj;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      sen_q      <= '0;
      cfg        <= '0;
      prev_valid <= 1'b0;
      si         <= '0;
      sj         <= '0;
      n_sr       <= '0;
      n_sc       <= '0;
      drain      <= '0;
      q_row      <= '0;
      q_pos      <= '0;
      cur_end    <= '0;
      rec_vld    <= 1'b0;
      rec        <= '0;
      frame_cnt  <= '0;
      region_cnt <= '0;
      run_cnt    <= '0;
    end else begin
      rec_vld <= 1'b0;
      unique case (state)
        S_IDLE: if (enable) state <= S_SEN_CFG;

        S_SEN_CFG: begin
          // A changed grid makes the stored frame useless for comparison.
          if (sen_cfg != sen_q) prev_valid <= 1'b0;
          sen_q   <= sen_cfg;
          cfg     <= sen_cfg;
          si      <= '0;
          sj      <= '0;
          rec_vld <= 1'b1;
          rec     <= '{kind: REC_FRAME, row: '0, col: '0, data: (2*AW)'(frame_cnt)};
          state   <= S_SEN_REQ;
        end

        S_SEN_REQ:  state <= S_SEN_WAIT;
        S_SEN_WAIT: if (cfg_done) state <= S_SEN_SCAN;

        S_SEN_SCAN: if (smp) begin
          rec_vld <= 1'b1;
          rec     <= '{kind: REC_SENTINEL, row: pix_row, col: pix_col,
                       data: (2*AW)'(adc_val)};
          if (last_c) begin
            n_sc <= sj + 1'b1;
            sj   <= '0;
            si   <= si + 1'b1;
          end else begin
            sj   <= sj + 1'b1;
          end
          if (frame_last) begin
            n_sr  <= si + 1'b1;
            drain <= '1;
            state <= S_SEN_DRAIN;
          end
        end

        S_SEN_DRAIN: begin
          // Wait for the analysis pipeline to post its last triggers.
          drain <= drain - 1'b1;
          if (drain == '0) begin
            frame_cnt  <= frame_cnt + 1'b1;
            prev_valid <= 1'b1;
            if (any_trig && !cal_mode && prev_valid) begin
              region_cnt <= region_cnt + 1'b1;
              q_row      <= '0;
              q_pos      <= '0;
              state      <= S_REG_FIND;
            end else begin
              state <= enable ? S_SEN_CFG : S_IDLE;
            end
          end
        end

        S_REG_FIND: begin
          if (q_row >= n_sr) begin
            state <= enable ? S_SEN_CFG : S_IDLE;
          end else if (run_found) begin
            cfg.row <= rg_row;
            cfg.col <= rg_col;
            cur_end <= run_end;
            run_cnt <= run_cnt + 1'b1;
            rec_vld <= 1'b1;
            rec     <= '{kind: REC_BLOCK, row: rg_row.start, col: rg_col.start,
                         data: {rg_row.stop, rg_col.stop}};
            state   <= S_REG_REQ;
          end else begin
            q_row <= q_row + 1'b1;
            q_pos <= '0;
          end
        end

        S_REG_REQ:  state <= S_REG_WAIT;
        S_REG_WAIT: if (cfg_done) state <= S_REG_SCAN;

        S_REG_SCAN: if (smp) begin
          rec_vld <= 1'b1;
          rec     <= '{kind: REC_REGION, row: pix_row, col: pix_col,
                       data: (2*AW)'(adc_val)};
          if (region_last) begin
            q_pos <= cur_end + 1'b1;
            state <= S_REG_FIND;
          end
        end

        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
