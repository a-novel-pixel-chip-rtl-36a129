// tb_scanning_module: drives the chip-side scanning module as the
// co-processor would: the six parameters are shifted in serially on a
// 50 MHz CLK_SHIFT, LOAD_DATA and PIX_EN are applied on the independent
// 10 MHz CLK_PIX, and the row/column select vectors are followed pixel by
// pixel against a reference walk of the configured grid. Covers a sentinel
// grid (step 5 over the whole 356 x 512 array), the example region of
// rows 123-136 and columns 51-71, small block regions with step 1, and a
// reconfiguration while the previous scan is still running.
// Also checks the pixel rate: one pixel per CLK_PIX cycle.
//
// No ports; a watchdog stops a hung run. From the paper: the two clocks,
// the serial parameters and the select registers; the reference walk
// follows this design's own scan order and wrap-around.
`timescale 1ns/1ps
module tb_scanning_module;
  import roirc_pkg::*;
  localparam int NR = 356, NC = 512;
  logic clk_shift = 0, clk_pix = 0, rst_n = 1;
  always #10 clk_shift = !clk_shift;
  initial begin #3; forever #50 clk_pix = !clk_pix; end

  logic shift_en = 0, load_data = 0, pix_en = 0;
  logic rs = 0, rp = 0, re = 0, cs = 0, cp = 0, ce = 0;
  logic [NR-1:0] row_sel;
  logic [NC-1:0] col_sel;
  logic [9:0] pix_row, pix_col;
  logic pix_vld;
  int checks = 0, failures = 0;

  scanning_module u_dut (
    .clk_shift, .clk_pix, .rst_n, .shift_en, .load_data, .pix_en,
    .row_start_in(rs), .row_step_in(rp), .row_end_in(re),
    .col_start_in(cs), .col_step_in(cp), .col_end_in(ce),
    .row_sel, .col_sel, .pix_row, .pix_col, .pix_vld
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  task automatic shift_cfg(scan_cfg_t c);
    for (int k = 9; k >= 0; k--) begin
      @(negedge clk_shift);
      shift_en = 1;
      rs = c.row.start[k]; rp = c.row.step[k]; re = c.row.stop[k];
      cs = c.col.start[k]; cp = c.col.step[k]; ce = c.col.stop[k];
    end
    @(negedge clk_shift);
    shift_en = 0;
  endtask

  // Configure, then check n pixels of the walk.
  task automatic run(scan_cfg_t c, int n);
    int er, ec;
    realtime t0;
    shift_cfg(c);
    @(negedge clk_pix);
    load_data = 1; pix_en = 1;
    @(negedge clk_pix);
    load_data = 0;
    er = c.row.start; ec = c.col.start;
    for (int k = 0; k < n; k++) begin
      @(negedge clk_pix);
      if (k == 0) t0 = $realtime;
      check(pix_vld && int'(pix_row) == er && int'(pix_col) == ec,
            $sformatf("pixel %0d: %0d,%0d (vld %0d) expected %0d,%0d", k, pix_row, pix_col, pix_vld, er, ec));
      check(row_sel == (NR'(1) << er) && col_sel == (NC'(1) << ec), $sformatf("pixel %0d: select vectors", k));
      if (ec + int'(c.col.step) <= int'(c.col.stop)) ec += int'(c.col.step);
      else begin
        ec = c.col.start;
        er = (er + int'(c.row.step) <= int'(c.row.stop)) ? er + int'(c.row.step) : int'(c.row.start);
      end
    end
    check($realtime - t0 == (n - 1) * 100.0, "not one pixel per CLK_PIX cycle");
  endtask

  initial begin
    scan_cfg_t c;
    #1 rst_n = 0;
    #200 rst_n = 1;
    @(negedge clk_pix);
    check(row_sel == '0 && col_sel == '0 && !pix_vld, "idle after reset");
    // sentinel grid: whole frame and the first pixels of the next
    c = '{row: '{start: 10'd0, step: 10'd5, stop: 10'd355}, col: '{start: 10'd0, step: 10'd5, stop: 10'd511}};
    run(c, 72 * 103 + 5);
    // the example region of rows 123..136, columns 51..71, one full pass
    c = '{row: '{start: 10'd123, step: 10'd1, stop: 10'd136}, col: '{start: 10'd51, step: 10'd1, stop: 10'd71}};
    run(c, 14 * 21);
    // block regions
    for (int t = 0; t < 20; t++) begin
      c.row.start = 10'($urandom_range(0, 340)); c.row.step = 10'd1; c.row.stop = c.row.start + 10'($urandom_range(0, 14));
      c.col.start = 10'($urandom_range(0, 490)); c.col.step = 10'd1; c.col.stop = c.col.start + 10'($urandom_range(0, 20));
      run(c, $urandom_range(1, 400));
    end
    pix_en = 0;
    repeat (2) @(negedge clk_pix);
    check(row_sel == '0 && col_sel == '0 && !pix_vld, "switches open after PIX_EN falls");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk_shift);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
