// trigger_detection: the co-processor's "Trigger Pixel Detection" block. It
// records which sentinels triggered in the current sentinel frame, applies
// the inflation (dilation) step and finds the blocks the region scan must
// read.
//
// The trigger map has one bit per sentinel, SR rows of SC bits. CLR empties
// it at the start of a sentinel frame; SET marks sentinel (SET_SI, SET_SJ).
// Every sentinel owns the block of pixels centred on it, one sentinel pitch
// wide and high, so the blocks tile the scanned area. For block row Q_ROW the
// block map is computed combinationally: with DILATE_EN it is the trigger
// row ORed with its upper and lower neighbours and then with its own left
// and right shifts (the eight-neighbour inflation of the paper's Fig. 10);
// without it, it is the trigger row alone. Columns at or beyond N_SC (the
// number of sentinel columns in the frame) are cut off. The first block at
// or after column Q_POS starts a run (RUN_START) that extends over all
// directly following marked blocks (RUN_END); the controller scans each
// run as one rectangle and then asks again from RUN_END+1.
//
// Following the paper: trigger pixels on a sentinel grid, a block per
// trigger sentinel centred on it, inflation to the surrounding blocks,
// adjacent blocks joined into one continuous readout area. Own choices:
// joining only along a block row, and the bitmap form of the map.
module trigger_detection
  import roirc_pkg::*;
#(
  parameter int unsigned SR = 72,
  parameter int unsigned SC = 103,
  localparam int unsigned SRW = $clog2(SR + 1),
  localparam int unsigned SCW = $clog2(SC + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clr,
  input  logic           set_vld,
  input  logic [SRW-1:0] set_si,
  input  logic [SCW-1:0] set_sj,
  input  logic           dilate_en,
  input  logic [SCW-1:0] n_sc,
  input  logic [SRW-1:0] q_row,
  input  logic [SCW-1:0] q_pos,
  output logic           any_trig,
  output logic [SRW+SCW-1:0] trig_cnt,
  output logic           run_found,
  output logic [SCW-1:0] run_start,
  output logic [SCW-1:0] run_end
);

  logic [SC-1:0] tmap [SR];
  logic [SC-1:0] up, mid, dn, vert, blk;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < SR; i++) tmap[i] <= '0;
      trig_cnt <= '0;
    end else if (clr) begin
      for (int i = 0; i < SR; i++) tmap[i] <= '0;
      trig_cnt <= '0;
    end else if (set_vld && (set_si < SRW'(SR)) && (set_sj < SCW'(SC))) begin
      tmap[set_si][set_sj] <= 1'b1;
      if (!tmap[set_si][set_sj]) trig_cnt <= trig_cnt + 1'b1;
    end
  end

  assign any_trig = (trig_cnt != '0);

  always_comb begin
    mid = (q_row < SRW'(SR)) ? tmap[q_row] : '0;
    up  = (q_row != '0 && q_row <= SRW'(SR)) ? tmap[q_row - 1'b1] : '0;
    dn  = (q_row + 1'b1 < SRW'(SR)) ? tmap[q_row + 1'b1] : '0;
    vert = up | mid | dn;
    blk  = dilate_en ? (vert | (vert << 1) | (vert >> 1)) : mid;
    for (int j = 0; j < SC; j++) begin
      if (SCW'(j) >= n_sc) blk[j] = 1'b0;
    end
  end

  // First marked block at or after q_pos, and the end of its run.
  always_comb begin
    logic stop;
    run_found = 1'b0;
    run_start = '0;
    for (int j = SC - 1; j >= 0; j--) begin
      if (blk[j] && (SCW'(j) >= q_pos)) begin
        run_found = 1'b1;
        run_start = SCW'(j);
      end
    end
    run_end = run_start;
    stop    = 1'b0;
    for (int j = 0; j < SC; j++) begin
      if ((SCW'(j) > run_start) && !stop) begin
        if (blk[j]) run_end = SCW'(j);
        else        stop    = 1'b1;
      end
    end
  end

endmodule
