// scan_addr_counter: the "ROW and COL Scan Address Logic Count" block of the
// scanning module, clocked by CLK_PIX.
//
// On a CLK_PIX edge with LOAD_DATA high it copies the row and column
// parameter registers into working registers and sets the address to
// (row start, col start). On every later edge with PIX_EN high it moves to
// the next pixel: the column advances by its step; when the next column
// would pass the column end, the column returns to its start and the row
// advances by its step; after the last row the scan wraps to the first
// pixel, so a frame repeats for as long as PIX_EN stays high. A step of 0
// is treated as "one position only" on that axis.
//
// Following the paper: start/step/end addressing, CLK_PIX domain, LOAD_DATA
// and PIX_EN controls, repetition of the sentinel frame. Own choices: the
// column is the inner (fast) loop, the parameters are copied at load so
// that new ones can be shifted in while a scan runs, wrap-around at the end.
module scan_addr_counter
  import roirc_pkg::*;
(
  input  logic          clk_pix,
  input  logic          rst_n,
  input  logic          load_data,
  input  logic          pix_en,
  input  axis_cfg_t     row_cfg,
  input  axis_cfg_t     col_cfg,
  output logic [AW-1:0] row_addr,
  output logic [AW-1:0] col_addr,
  output logic          active      // the current address is being scanned
);

  axis_cfg_t rcfg, ccfg;
  logic      running;
  logic [AW:0] col_next, row_next;
  logic        col_wrap, row_wrap;

  always_comb begin
    col_next = {1'b0, col_addr} + {1'b0, ccfg.step};
    row_next = {1'b0, row_addr} + {1'b0, rcfg.step};
    col_wrap = (ccfg.step == '0) || (col_next > {1'b0, ccfg.stop});
    row_wrap = (rcfg.step == '0) || (row_next > {1'b0, rcfg.stop});
  end

  always_ff @(posedge clk_pix or negedge rst_n) begin
    if (!rst_n) begin
      rcfg     <= '0;
      ccfg     <= '0;
      row_addr <= '0;
      col_addr <= '0;
      running  <= 1'b0;
    end else if (load_data) begin
      rcfg     <= row_cfg;
      ccfg     <= col_cfg;
      row_addr <= row_cfg.start;
      col_addr <= col_cfg.start;
      running  <= 1'b1;
    end else if (pix_en && running) begin
      if (!col_wrap) begin
        col_addr <= col_next[AW-1:0];
      end else begin
        col_addr <= ccfg.start;
        row_addr <= row_wrap ? rcfg.start : row_next[AW-1:0];
      end
    end
  end

  assign active = pix_en && running && !load_data;

endmodule
