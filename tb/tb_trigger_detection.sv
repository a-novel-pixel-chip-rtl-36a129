// tb_trigger_detection: writes random sets of trigger sentinels into a small
// 8 x 10 map, then walks every block row with the run query exactly as the
// controller does, and compares the runs found with a reference block map
// computed here (eight-neighbour inflation when DILATE_EN, the trigger map
// alone otherwise, cut at N_SC columns). Also checks the trigger count and
// that CLR empties the map.
//
// No ports; a watchdog stops a hung run. From the paper: the inflation
// rule (its Fig. 10); the run search that joins adjacent blocks is this
// design's own choice.
`timescale 1ns/1ps
module tb_trigger_detection;
  localparam int SR = 8, SC = 10;
  localparam int SRW = $clog2(SR + 1), SCW = $clog2(SC + 1);
  logic clk = 0, rst_n = 1;
  always #10 clk = !clk;
  logic clr = 0, set_vld = 0, dilate_en = 1;
  logic [SRW-1:0] set_si = 0, q_row = 0;
  logic [SCW-1:0] set_sj = 0, q_pos = 0, n_sc = SCW'(SC);
  logic any_trig, run_found;
  logic [SRW+SCW-1:0] trig_cnt;
  logic [SCW-1:0] run_start, run_end;
  int checks = 0, failures = 0;

  trigger_detection #(.SR(SR), .SC(SC)) u_dut (
    .clk, .rst_n, .clr, .set_vld, .set_si, .set_sj, .dilate_en, .n_sc, .q_row, .q_pos,
    .any_trig, .trig_cnt, .run_found, .run_start, .run_end);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  bit t [SR][SC];
  bit b [SR][SC];
  int runs_seen = 0;

  initial begin
    int ntr, nsc;
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      check(!any_trig && trig_cnt == 0, "map not empty after CLR");
      for (int i = 0; i < SR; i++) for (int j = 0; j < SC; j++) t[i][j] = 0;
      ntr = 0;
      repeat ($urandom_range(1, 6)) begin
        int i, j;
        i = $urandom_range(0, SR - 1);
        j = $urandom_range(0, SC - 1);
        if (!t[i][j]) ntr++;
        t[i][j] = 1;
        @(negedge clk); set_vld = 1; set_si = SRW'(i); set_sj = SCW'(j);
        @(negedge clk); set_vld = 0;
      end
      check(any_trig && int'(trig_cnt) == ntr, $sformatf("trigger count %0d expected %0d", trig_cnt, ntr));
      dilate_en = (it % 3 != 2);
      nsc = (it % 5 == 4) ? $urandom_range(3, SC) : SC;
      n_sc = SCW'(nsc);
      for (int i = 0; i < SR; i++) for (int j = 0; j < SC; j++) begin
        b[i][j] = 0;
        for (int di = -1; di <= 1; di++) for (int dj = -1; dj <= 1; dj++) begin
          int a, c;
          a = i + di;
          c = j + dj;
          if ((dilate_en || (di == 0 && dj == 0)) && a >= 0 && a < SR && c >= 0 && c < SC && t[a][c]) b[i][j] = 1;
        end
        if (j >= nsc) b[i][j] = 0;
      end
      // walk the runs like the controller
      for (int i = 0; i < SR; i++) begin
        int pos, expect_s, expect_e;
        pos = 0;
        q_row = SRW'(i);
        forever begin
          q_pos = SCW'(pos);
          #1;
          expect_s = -1;
          for (int j = SC - 1; j >= pos; j--) if (b[i][j]) expect_s = j;
          if (expect_s < 0) begin
            check(!run_found, $sformatf("row %0d pos %0d: run found where none", i, pos));
            break;
          end
          expect_e = expect_s;
          while (expect_e + 1 < SC && b[i][expect_e + 1]) expect_e++;
          check(run_found && int'(run_start) == expect_s && int'(run_end) == expect_e,
                $sformatf("row %0d pos %0d: run %0d..%0d (found %0d) expected %0d..%0d",
                          i, pos, run_start, run_end, run_found, expect_s, expect_e));
          runs_seen++;
          pos = expect_e + 1;
        end
      end
    end
    check(runs_seen > 100, "too few runs exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
