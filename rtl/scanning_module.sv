// scanning_module: the on-chip ROI scanning module that sits in the L-shaped
// periphery of the pixel chip and drives the row and column select switches.
//
// Six serial parameter lines (row start/step/end, column start/step/end)
// shift into two 30-bit registers on CLK_SHIFT while SHIFT_EN is high. A
// LOAD_DATA pulse, seen on a CLK_PIX edge, hands the parameters to the
// address counter, which then steps through the configured sub-grid of the
// array once per CLK_PIX cycle while PIX_EN is high. The decoders turn the
// address into one-hot ROW_SEL/COL_SEL vectors one CLK_PIX cycle later.
// The binary address of the pixel now selected, with a valid flag, leaves
// the module with the same timing, so the co-processor knows which pixel the
// analog output belongs to.
//
// Timing: configuration takes 10 CLK_SHIFT cycles of shifting plus the
// LOAD_DATA edge; afterwards one pixel per CLK_PIX cycle (100 ns at 10 MHz).
//
// Following the paper: block structure and signal names of its Fig. 6 and
// pin list of Fig. 1, two independent clocks. Own choices: the binary
// address outputs (the paper draws PIX_ROW/PIX_COL buses going to the FPGA
// without saying how they are carried) and the reset input.
module scanning_module
  import roirc_pkg::*;
#(
  parameter int unsigned N_ROWS = N_ROWS_DEF,
  parameter int unsigned N_COLS = N_COLS_DEF
) (
  input  logic              clk_shift,
  input  logic              clk_pix,
  input  logic              rst_n,
  input  logic              shift_en,
  input  logic              load_data,
  input  logic              pix_en,
  input  logic              row_start_in,
  input  logic              row_step_in,
  input  logic              row_end_in,
  input  logic              col_start_in,
  input  logic              col_step_in,
  input  logic              col_end_in,
  output logic [N_ROWS-1:0] row_sel,
  output logic [N_COLS-1:0] col_sel,
  output logic [AW-1:0]     pix_row,
  output logic [AW-1:0]     pix_col,
  output logic              pix_vld
);

  axis_cfg_t   row_cfg, col_cfg;
  logic [AW-1:0] row_addr, col_addr;
  logic        active;

  scan_param_reg u_row_reg (
    .clk_shift, .rst_n, .shift_en,
    .din_start(row_start_in), .din_step(row_step_in), .din_end(row_end_in),
    .q(row_cfg)
  );

  scan_param_reg u_col_reg (
    .clk_shift, .rst_n, .shift_en,
    .din_start(col_start_in), .din_step(col_step_in), .din_end(col_end_in),
    .q(col_cfg)
  );

  scan_addr_counter u_cnt (
    .clk_pix, .rst_n, .load_data, .pix_en,
    .row_cfg, .col_cfg,
    .row_addr, .col_addr, .active
  );

  addr_decoder #(.N(N_ROWS)) u_row_dec (
    .clk_pix, .rst_n, .en(active), .addr(row_addr), .sel(row_sel)
  );

  addr_decoder #(.N(N_COLS)) u_col_dec (
    .clk_pix, .rst_n, .en(active), .addr(col_addr), .sel(col_sel)
  );

  always_ff @(posedge clk_pix or negedge rst_n) begin
    if (!rst_n) begin
      pix_row <= '0;
      pix_col <= '0;
      pix_vld <= 1'b0;
    end else begin
      pix_row <= row_addr;
      pix_col <= col_addr;
      pix_vld <= active;
    end
  end

endmodule
