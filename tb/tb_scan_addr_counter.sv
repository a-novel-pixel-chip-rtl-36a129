// tb_scan_addr_counter: loads random start/step/end parameters and follows
// the address counter for more than one frame, comparing every address with
// a reference walk computed here (column inner loop, row outer loop, wrap to
// the start after the last row). Also checks that PIX_EN low freezes the
// address and that ACTIVE is low in the load cycle.
//
// No ports; a watchdog stops a hung run. From the paper: start/step/end
// per axis and row-column order; wrap-around and the load behaviour are
// this design's own choices.
`timescale 1ns/1ps
module tb_scan_addr_counter;
  import roirc_pkg::*;
  logic clk = 0, rst_n = 1;
  always #50 clk = !clk;
  logic load_data = 0, pix_en = 0;
  axis_cfg_t row_cfg, col_cfg;
  logic [9:0] row_addr, col_addr;
  logic active;
  int checks = 0, failures = 0;

  scan_addr_counter u_dut (.clk_pix(clk), .rst_n, .load_data, .pix_en, .row_cfg, .col_cfg,
                           .row_addr, .col_addr, .active);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    int er, ec, n;
    axis_cfg_t rc, cc;
    logic [9:0] hr, hc;
    row_cfg = '0; col_cfg = '0;
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      row_cfg.start = 10'($urandom_range(0, 300));
      row_cfg.step  = 10'($urandom_range(1, 7));
      row_cfg.stop  = row_cfg.start + 10'($urandom_range(0, 30));
      col_cfg.start = 10'($urandom_range(0, 400));
      col_cfg.step  = 10'($urandom_range(1, 7));
      col_cfg.stop  = col_cfg.start + 10'($urandom_range(0, 40));
      @(negedge clk);
      load_data = 1; pix_en = 1;
      #1 check(!active, "active during load");
      @(negedge clk);
      load_data = 0;
      rc = row_cfg; cc = col_cfg;
      // scrambling the inputs after the load must not matter
      row_cfg = '1; col_cfg = '1;
      er = int'(rc.start); ec = int'(cc.start);
      n = 0;
      for (int k = 0; k < 300; k++) begin
        #1;
        check(int'(row_addr) == er && int'(col_addr) == ec && active,
              $sformatf("step %0d: addr %0d,%0d expected %0d,%0d", k, row_addr, col_addr, er, ec));
        if (ec + int'(cc.step) <= int'(cc.stop)) ec += int'(cc.step);
        else begin
          ec = int'(cc.start);
          if (er + int'(rc.step) <= int'(rc.stop)) er += int'(rc.step);
          else er = int'(rc.start);
        end
        if (k == 100) begin
          hr = row_addr; hc = col_addr;
          pix_en = 0;
          repeat (3) @(negedge clk);
          check(row_addr == hr && col_addr == hc && !active, "address moved with PIX_EN low");
          pix_en = 1;
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
