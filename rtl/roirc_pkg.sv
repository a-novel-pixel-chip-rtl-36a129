// roirc_pkg: constants and types shared by the region-of-interest readout
// (ROIRC) design: the on-chip scanning module and the FPGA co-processor.
//
// The array size (356 rows x 512 columns), the 10-bit width of every scan
// parameter and the 12-bit ADC follow the paper. The bit order of the
// 30-bit per-axis parameter word and the layout of the readout record are
// this design's own choices.
package roirc_pkg;

  // Width of one serially loaded scan parameter (start, step or end).
  localparam int unsigned AW = 10;
  // Pixel matrix of the sensor chip.
  localparam int unsigned N_ROWS_DEF = 356;
  localparam int unsigned N_COLS_DEF = 512;
  // ADC resolution of the readout electronics.
  localparam int unsigned ADC_W = 12;
  // Smallest sentinel spacing the co-processor memories are sized for.
  localparam int unsigned MIN_STEP_DEF = 5;
  // CLK_SHIFT cycles per CLK_PIX cycle (50 MHz / 10 MHz).
  localparam int unsigned DIV_DEF = 5;

  // One scan axis: {end, step, start} = bits <29:20>, <19:10>, <9:0> of the
  // 30-bit ROW/COL address register.
  typedef struct packed {
    logic [AW-1:0] stop;
    logic [AW-1:0] step;
    logic [AW-1:0] start;
  } axis_cfg_t;

  typedef struct packed {
    axis_cfg_t row;
    axis_cfg_t col;
  } scan_cfg_t;

  // Kinds of record sent to the host.
  typedef enum logic [1:0] {
    REC_FRAME    = 2'd0,  // start of a sentinel frame, data = frame number
    REC_SENTINEL = 2'd1,  // one sentinel pixel sample
    REC_BLOCK    = 2'd2,  // start of a block-run scan, row/col = first pixel, data = {last row, last col}
    REC_REGION   = 2'd3   // one pixel sample of a region scan
  } rec_kind_t;

  typedef struct packed {
    rec_kind_t       kind;
    logic [AW-1:0]   row;
    logic [AW-1:0]   col;
    logic [2*AW-1:0] data;
  } rec_t;


endpackage
