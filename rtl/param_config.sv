// param_config: the co-processor's "Scanning Parameter Configuration" block.
// It makes the two clocks of the scanning module and serialises the six
// scan parameters onto the six parameter lines.
//
// CLK_SHIFT is the co-processor clock itself (50 MHz). CLK_PIX is CLK_SHIFT
// divided by DIV (5, giving 10 MHz). A phase counter runs on the rising edge
// of clk; CLK_PIX is registered on the falling edge so that its rising edge
// falls in the middle of the clk cycle with phase 0. Anything the
// co-processor launches on the rising clk edge that starts phase 0 is
// therefore captured cleanly by the scanning module, and what the scanning
// module launches on CLK_PIX is stable long before the co-processor samples
// it at the end of phase DIV-1 (PIX_LAST high).
//
// SNAP copies a complete scan_cfg_t into a 60-bit shift register; every clk
// cycle with SHIFT_EN high moves each 10-bit field one bit to the left. The
// MSB of each field is on its serial line, so the scanning module, which
// samples on the same edge, receives every field MSB first in 10 cycles.
//
// Following the paper: 50 MHz shift clock, 10 MHz pixel clock, six 10-bit
// serial parameters. Own choices: the phase relation between the clocks,
// MSB-first order.
module param_config
  import roirc_pkg::*;
#(
  parameter int unsigned DIV = DIV_DEF
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      snap,
  input  scan_cfg_t cfg,
  input  logic      shift_en,
  output logic      clk_shift,
  output logic      clk_pix,
  output logic      pix_last,    // last clk cycle of a CLK_PIX period
  output logic      row_start_o,
  output logic      row_step_o,
  output logic      row_end_o,
  output logic      col_start_o,
  output logic      col_step_o,
  output logic      col_end_o
);

  localparam int unsigned PW = (DIV > 1) ? $clog2(DIV) : 1;

  logic [PW-1:0] phase;
  scan_cfg_t     sreg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    phase <= '0;
    else if (phase == PW'(DIV-1))  phase <= '0;
    else                           phase <= phase + 1'b1;
  end

  always_ff @(negedge clk or negedge rst_n) begin
    if (!rst_n) clk_pix <= 1'b0;
    else        clk_pix <= (phase < PW'(DIV/2));
  end

  assign clk_shift = clk;
  assign pix_last  = (phase == PW'(DIV-1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sreg <= '0;
    end else if (snap) begin
      sreg <= cfg;
    end else if (shift_en) begin
      sreg.row.start <= sreg.row.start << 1;
      sreg.row.step  <= sreg.row.step  << 1;
      sreg.row.stop  <= sreg.row.stop  << 1;
      sreg.col.start <= sreg.col.start << 1;
      sreg.col.step  <= sreg.col.step  << 1;
      sreg.col.stop  <= sreg.col.stop  << 1;
    end
  end

  assign row_start_o = sreg.row.start[AW-1];
  assign row_step_o  = sreg.row.step[AW-1];
  assign row_end_o   = sreg.row.stop[AW-1];
  assign col_start_o = sreg.col.start[AW-1];
  assign col_step_o  = sreg.col.step[AW-1];
  assign col_end_o   = sreg.col.stop[AW-1];

  initial begin
    assert (DIV >= 2) else $error("param_config: DIV must be at least 2");
  end

endmodule
