// tb_addr_decoder: drives random addresses (some beyond the array) into the
// 356-wide row decoder and checks, one CLK_PIX cycle later, that exactly the
// addressed select bit is set, that nothing is selected for an address out
// of range, and that the register is all zeros while EN is low.
//
// No ports; a watchdog stops a hung run. From the paper: the 356-wide
// row select register; the registered one-hot coding is this design's.
`timescale 1ns/1ps
module tb_addr_decoder;
  import roirc_pkg::*;
  localparam int N = 356;
  logic clk = 0, rst_n = 1;
  always #50 clk = !clk;
  logic en = 0;
  logic [9:0] addr = 0;
  logic [N-1:0] sel;
  int checks = 0, failures = 0;

  addr_decoder #(.N(N)) u_dut (.clk_pix(clk), .rst_n, .en, .addr, .sel);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [9:0] a;
    logic e;
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    check(sel == '0, "reset");
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      a = (t % 7 == 0) ? 10'($urandom_range(356, 1023)) : 10'($urandom_range(0, N - 1));
      if (t < 4) a = (t == 0) ? 10'd0 : (t == 1) ? 10'(N - 1) : (t == 2) ? 10'd1 : 10'd255;
      e = (t % 5 != 4);
      addr = a; en = e;
      @(negedge clk);
      if (!e || a >= N) check(sel == '0, $sformatf("addr %0d en %0d: select not empty", a, e));
      else check(sel == (N'(1) << a), $sformatf("addr %0d: wrong select", a));
      en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
