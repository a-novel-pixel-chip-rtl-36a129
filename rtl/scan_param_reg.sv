// scan_param_reg: the ROW (or COL) Address REG<29:0> of the on-chip scanning
// module. It holds the start, step and end address of one scan axis.
//
// Each of the three 10-bit fields has its own serial input, as the chip has
// separate ROW_START/ROW_STEP/ROW_END (COL_...) pins; all three shift in
// parallel, MSB first, on every rising CLK_SHIFT edge while SHIFT_EN is high.
// Ten CLK_SHIFT cycles therefore load a complete axis. The value is held
// until the next shift; the scan counter copies it on LOAD_DATA.
//
// Following the paper: 10-bit serial parameters, CLK_SHIFT domain, SHIFT_EN.
// Own choices: MSB-first order, field order {end, step, start} in <29:0>,
// and an asynchronous active-low reset (the paper shows no reset pin).
module scan_param_reg
  import roirc_pkg::*;
(
  input  logic      clk_shift,
  input  logic      rst_n,
  input  logic      shift_en,
  input  logic      din_start,
  input  logic      din_step,
  input  logic      din_end,
  output axis_cfg_t q
);

  always_ff @(posedge clk_shift or negedge rst_n) begin
    if (!rst_n) begin
      q <= '0;
    end else if (shift_en) begin
      q.start <= {q.start[AW-2:0], din_start};
      q.step  <= {q.step[AW-2:0],  din_step};
      q.stop  <= {q.stop[AW-2:0],  din_end};
    end
  end

endmodule
