// tb_enable_control: requests configurations at random moments and checks the
// strobe sequence: SNAP in the request cycle, SHIFT_EN for exactly 10 clk
// cycles right after it, LOAD_DATA for exactly one cycle, in the cycle that
// follows a PIX_LAST cycle (phase 0, where CLK_PIX rises), PIX_EN rising
// with LOAD_DATA and staying high until SCAN_STOP, CFG_DONE one cycle after
// the load. The request-to-load time must be 11 to 15 clk cycles, i.e.
// T_data = 220 ns plus at most one CLK_PIX phase of alignment, and the
// 220 ns case must occur.
//
// No ports; a watchdog stops a hung run. From the paper: 20 ns per bit,
// 10 bits and T_data = 220 ns; the alignment of LOAD_DATA to CLK_PIX is
// this design's own choice.
`timescale 1ns/1ps
module tb_enable_control;
  logic clk = 0, rst_n = 1;
  always #10 clk = !clk;
  logic cfg_req = 0, scan_stop = 0, pix_last;
  logic snap, shift_en, load_data, pix_en, cfg_done, busy;
  int phase = 0;
  int checks = 0, failures = 0;
  int n_fast = 0;

  always @(posedge clk) phase <= (phase == 4) ? 0 : phase + 1;
  assign pix_last = (phase == 4);

  enable_control u_dut (.clk, .rst_n, .cfg_req, .scan_stop, .pix_last,
                        .snap, .shift_en, .load_data, .pix_en, .cfg_done, .busy);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    int nshift, t_load, nload;
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      repeat ($urandom_range(0, 7)) @(negedge clk);
      cfg_req = 1;
      #1 check(snap && !shift_en, "SNAP with the request");
      @(negedge clk);
      cfg_req = 0;
      nshift = 0; t_load = 0; nload = 0;
      while (shift_en) begin nshift++; t_load++; check(!load_data && !pix_en, "load during shift"); @(negedge clk); end
      check(nshift == 10, $sformatf("SHIFT_EN high for %0d cycles", nshift));
      while (!load_data && t_load < 40) begin t_load++; @(negedge clk); end
      check(load_data && phase == 0, "LOAD_DATA not in phase 0");
      check(pix_en, "PIX_EN did not rise with LOAD_DATA");
      t_load++;  // the load cycle itself
      check(t_load >= 11 && t_load <= 15, $sformatf("first shift to end of load %0d cycles", t_load));
      if (t_load == 11) n_fast++;
      @(negedge clk);
      check(!load_data, "LOAD_DATA longer than one cycle");
      check(cfg_done, "CFG_DONE missing");
      repeat ($urandom_range(1, 30)) begin
        @(negedge clk);
        check(pix_en && !cfg_done && !busy, "PIX_EN dropped before SCAN_STOP");
      end
      scan_stop = 1;
      @(negedge clk);
      scan_stop = 0;
      check(!pix_en, "PIX_EN still high after SCAN_STOP");
    end
    check(n_fast > 0, "never reached T_data = 11 cycles");
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
