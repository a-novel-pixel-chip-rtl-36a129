// adc_data_analysis: the co-processor's "ADC Data Analysis" block. It holds
// the previous sentinel frame, forms the frame-to-frame difference of every
// sentinel pixel and decides whether that sentinel became a trigger pixel.
// It also owns the bad-pixel mask.
//
// Each sentinel sample arrives with its linear index into the sentinel grid
// (SMP_IDX) and an opaque tag (its grid row and column). Stage 1 reads the
// stored value of the previous frame and the mask bit; stage 2 writes the
// new value back and computes diff = current - previous. In normal mode the
// sentinel triggers when COMPARE_EN is set (a previous frame exists), it is
// not masked and diff > THR; TRIG_VLD then pulses two cycles after the
// sample, carrying the tag. In calibration mode nothing triggers; instead
// every sentinel with |diff| > MASK_THR is added to the mask, and MASK_CNT
// counts the masked sentinels. MASK_CLR empties the mask.
//
// Following the paper: per-sentinel storage of the previous frame, the
// difference against a threshold (200 ADC counts in the paper's runs), and
// masking of noisy pixels found by comparing frames with no signal present.
// Own choices: the sign convention (a signal raises the ADC code), the
// absolute difference for calibration and the two-stage pipeline.
module adc_data_analysis
  import roirc_pkg::*;
#(
  parameter int unsigned NSEN = 72 * 103,
  parameter int unsigned TAGW = 16,
  localparam int unsigned IW  = $clog2(NSEN)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             smp_vld,
  input  logic [IW-1:0]    smp_idx,
  input  logic [TAGW-1:0]  smp_tag,
  input  logic [ADC_W-1:0] smp_val,
  input  logic             compare_en,
  input  logic             cal_mode,
  input  logic             mask_clr,
  input  logic [ADC_W-1:0] thr,
  input  logic [ADC_W-1:0] mask_thr,
  output logic             trig_vld,
  output logic [TAGW-1:0]  trig_tag,
  output logic [IW:0]      mask_cnt
);

  logic [ADC_W-1:0] prev_mem [NSEN];
  logic [NSEN-1:0]  mask_bits;

  logic             v1, msk1;
  logic [IW-1:0]    idx1;
  logic [TAGW-1:0]  tag1;
  logic [ADC_W-1:0] val1, prev1;
  logic signed [ADC_W:0] diff;
  logic [ADC_W:0]        adiff;

  // Previous-frame store: one read per sample, written one cycle later.
  always_ff @(posedge clk) begin
    if (smp_vld) prev1 <= prev_mem[smp_idx];
    if (v1)      prev_mem[idx1] <= val1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1   <= 1'b0;
      msk1 <= 1'b0;
      idx1 <= '0;
      tag1 <= '0;
      val1 <= '0;
    end else begin
      v1 <= smp_vld;
      if (smp_vld) begin
        idx1 <= smp_idx;
        tag1 <= smp_tag;
        val1 <= smp_val;
        msk1 <= mask_bits[smp_idx];
      end
    end
  end

  always_comb begin
    diff  = $signed({1'b0, val1}) - $signed({1'b0, prev1});
    adiff = diff[ADC_W] ? (ADC_W+1)'(-diff) : diff[ADC_W:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trig_vld  <= 1'b0;
      trig_tag  <= '0;
      mask_bits <= '0;
      mask_cnt  <= '0;
    end else begin
      trig_vld <= v1 && compare_en && !cal_mode && !msk1 &&
                  (diff > $signed({1'b0, thr}));
      if (v1) trig_tag <= tag1;
      if (mask_clr) begin
        mask_bits <= '0;
        mask_cnt  <= '0;
      end else if (v1 && compare_en && cal_mode && !msk1 &&
                   (adiff > {1'b0, mask_thr})) begin
        mask_bits[idx1] <= 1'b1;
        mask_cnt        <= mask_cnt + 1'b1;
      end
    end
  end

endmodule
