// addr_decoder: ROW (or COL) Address Selector Decoder followed by the
// ROW_SEL_REG<355:0> (COL_SEL_REG<511:0>) register of the scanning module.
//
// On each CLK_PIX edge the register takes the one-hot decode of the binary
// address when EN is high, and all zeros otherwise, so that exactly one row
// switch and one column switch of the pixel array are closed while a pixel
// is being read, and none when the scan is idle. An address at or above N
// selects nothing. One CLK_PIX cycle of latency from address to switch.
//
// Following the paper: decoder plus select register per axis, widths 356
// and 512. Own choice: zeros while idle and the registered output.
module addr_decoder
  import roirc_pkg::*;
#(
  parameter int unsigned N = N_ROWS_DEF
) (
  input  logic          clk_pix,
  input  logic          rst_n,
  input  logic          en,
  input  logic [AW-1:0] addr,
  output logic [N-1:0]  sel
);

  logic [N-1:0] dec;

  always_comb begin
    dec = '0;
    for (int unsigned i = 0; i < N; i++) begin
      dec[i] = en && (addr == AW'(i));
    end
  end

  always_ff @(posedge clk_pix or negedge rst_n) begin
    if (!rst_n) sel <= '0;
    else        sel <= dec;
  end

endmodule
