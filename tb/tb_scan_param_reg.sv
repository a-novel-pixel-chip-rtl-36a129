// tb_scan_param_reg: shifts random start/step/end values into the 30-bit
// axis register over its three serial lines, MSB first, and checks that the
// register holds exactly those values, that it holds them while SHIFT_EN is
// low, and that partial shifts move every field by one bit per cycle.
//
// No ports; a watchdog stops a hung run. From the paper: three 10-bit
// parameters per axis in a 30-bit register; MSB first and the field order
// are this design's own choices.
`timescale 1ns/1ps
module tb_scan_param_reg;
  import roirc_pkg::*;
  logic clk = 0, rst_n = 1;
  always #10 clk = !clk;
  logic shift_en = 0, d0 = 0, d1 = 0, d2 = 0;
  axis_cfg_t q;
  int checks = 0, failures = 0;

  scan_param_reg u_dut (.clk_shift(clk), .rst_n, .shift_en, .din_start(d0), .din_step(d1), .din_end(d2), .q);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic load(logic [9:0] a, logic [9:0] b, logic [9:0] c);
    for (int k = 9; k >= 0; k--) begin
      @(negedge clk);
      shift_en = 1; d0 = a[k]; d1 = b[k]; d2 = c[k];
    end
    @(negedge clk);
    shift_en = 0; d0 = $urandom; d1 = $urandom; d2 = $urandom;
  endtask

  initial begin
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    check(q == '0, "reset value");
    for (int t = 0; t < 50; t++) begin
      logic [9:0] a, b, c;
      a = 10'($urandom); b = 10'($urandom); c = 10'($urandom);
      load(a, b, c);
      check(q.start == a && q.step == b && q.stop == c,
            $sformatf("loaded %h/%h/%h got %h/%h/%h", a, b, c, q.start, q.step, q.stop));
      repeat (3) @(negedge clk);
      check(q.start == a && q.step == b && q.stop == c, "value not held with SHIFT_EN low");
      // one extra bit moves every field left by one
      shift_en = 1; d0 = 1; d1 = 0; d2 = 1;
      @(negedge clk);
      shift_en = 0;
      check(q.start == {a[8:0], 1'b1} && q.step == {b[8:0], 1'b0} && q.stop == {c[8:0], 1'b1},
            "single shift");
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
