// pixel_adc_model: behavioural model (not synthesizable) of the pixel array,
// the analog output buffer and the board ADC, used only by testbenches.
//
// The pixel selected by the one-hot ROW_SEL/COL_SEL vectors is put on ADC
// as a 12-bit code: a fixed baseline that varies from pixel to pixel, plus
// the amplitude of every active "event" whose disc (centre, radius) covers
// the pixel. Events are steps that stay until removed; the slow decay of
// the real charge amplifier is ignored. One pixel can be made noisy: each
// time it is read its value alternates between baseline and baseline plus
// NOISE_AMP, the behaviour that bad-pixel masking must suppress. When no
// or more than one row or column is selected, ADC reads 0 and SEL_ERRORS
// counts the reads with more than one switch closed.
//
// Interface: ROW_SEL/COL_SEL in, ADC out, combinational; the NOISE pixel
// flips its value at each new selection. From the paper: the array size,
// the 12-bit ADC and the step-like rise of a pixel hit; the values,
// event shapes and the noisy-pixel behaviour are this model's own choices.
module pixel_adc_model #(
  parameter int N_ROWS    = 356,
  parameter int N_COLS    = 512,
  parameter int NOISE_AMP = 500
) (
  input  logic              clk_pix,
  input  logic [N_ROWS-1:0] row_sel,
  input  logic [N_COLS-1:0] col_sel,
  output logic [11:0]       adc
);

  localparam int MAXEV = 8;
  int ev_on  [MAXEV];
  int ev_r   [MAXEV];
  int ev_c   [MAXEV];
  int ev_rad [MAXEV];
  int ev_amp [MAXEV];
  int noisy_r = -1;
  int noisy_c = -1;
  bit noisy_hi = 1'b0;
  int sel_errors = 0;

  initial for (int k = 0; k < MAXEV; k++) ev_on[k] = 0;

  function automatic void add_event(int k, int r, int c, int rad, int amp);
    ev_on[k] = 1; ev_r[k] = r; ev_c[k] = c; ev_rad[k] = rad; ev_amp[k] = amp;
  endfunction

  function automatic void clear_event(int k);
    ev_on[k] = 0;
  endfunction

  function automatic void set_noisy(int r, int c);
    noisy_r = r; noisy_c = c;
  endfunction

  function automatic int baseline(int r, int c);
    return 1000 + ((r * 7 + c * 13) % 31);
  endfunction

  // Event part of the signal at a pixel.
  function automatic int signal_at(int r, int c);
    int s = 0;
    for (int k = 0; k < MAXEV; k++) begin
      if (ev_on[k] != 0 && (r - ev_r[k]) * (r - ev_r[k]) + (c - ev_c[k]) * (c - ev_c[k])
                             <= ev_rad[k] * ev_rad[k])
        s += ev_amp[k];
    end
    return s;
  endfunction

  int sel_r, sel_c, nr, nc;
  always_comb begin
    sel_r = 0; sel_c = 0; nr = 0; nc = 0;
    for (int i = 0; i < N_ROWS; i++) if (row_sel[i]) begin sel_r = i; nr++; end
    for (int j = 0; j < N_COLS; j++) if (col_sel[j]) begin sel_c = j; nc++; end
  end

  always_comb begin
    int v;
    if (nr == 1 && nc == 1) begin
      v = baseline(sel_r, sel_c) + signal_at(sel_r, sel_c);
      if (sel_r == noisy_r && sel_c == noisy_c && noisy_hi) v += NOISE_AMP;
      adc = (v > 4095) ? 12'hFFF : 12'(v);
    end else begin
      adc = '0;
    end
  end

  // The noisy pixel flips level at the end of each read; count illegal selects.
  always @(negedge clk_pix) begin
    if (nr == 1 && nc == 1 && sel_r == noisy_r && sel_c == noisy_c) noisy_hi <= !noisy_hi;
    if (nr > 1 || nc > 1) sel_errors++;
  end

endmodule
