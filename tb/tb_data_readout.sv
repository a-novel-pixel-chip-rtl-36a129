// tb_data_readout: pushes a numbered sequence of records into the readout
// buffer while the host side accepts them with a random READY, and checks
// that every record comes out once and in order; then stalls the host so the
// buffer fills, and checks that exactly the records offered while full are
// dropped and counted in OVERFLOW_CNT, and that WORD_CNT counts deliveries.
//
// No ports; a watchdog stops a hung run. The paper only names the readout
// block: the buffer, the valid/ready handshake and the loss counter checked
// here are this design's own choices.
`timescale 1ns/1ps
module tb_data_readout;
  import roirc_pkg::*;
  localparam int DEPTH = 16;
  logic clk = 0, rst_n = 1;
  always #10 clk = !clk;
  logic in_vld = 0, out_ready = 0, out_valid;
  rec_t in_rec, out_rec;
  logic [31:0] overflow_cnt, word_cnt;
  int checks = 0, failures = 0;

  data_readout #(.DEPTH(DEPTH)) u_dut (.clk, .rst_n, .in_vld, .in_rec, .out_valid, .out_ready,
                                      .out_rec, .overflow_cnt, .word_cnt);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  int sent = 0, got = 0, expect_next = 0;
  bit ready_rand = 1;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    check(int'(out_rec.data) == expect_next && out_rec.kind == rec_kind_t'(expect_next % 4),
          $sformatf("record %0d out of order (got %0d)", expect_next, out_rec.data));
    expect_next++;
    got++;
  end

  initial begin
    in_rec = '0;
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    check(!out_valid, "empty after reset");
    // random traffic with back-pressure, but never faster than the buffer can absorb
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      out_ready = ($urandom_range(0, 3) != 0);
      in_vld = ($urandom_range(0, 2) == 0) && (sent - got < DEPTH - 2);
      if (in_vld) begin
        in_rec = '{kind: rec_kind_t'(sent % 4), row: 10'(sent), col: 10'(sent >> 3), data: 20'(sent)};
        sent++;
      end
    end
    @(negedge clk); in_vld = 0; out_ready = 1;
    repeat (DEPTH + 4) @(negedge clk);
    check(got == sent, $sformatf("delivered %0d of %0d", got, sent));
    check(overflow_cnt == 0, "overflow without reason");
    check(int'(word_cnt) == got, "word count");
    // overflow: host stalls, 20 more records than fit
    out_ready = 0;
    for (int k = 0; k < DEPTH + 20; k++) begin
      @(negedge clk);
      in_vld = 1;
      in_rec = '{kind: rec_kind_t'(sent % 4), row: '0, col: '0, data: 20'(sent)};
      sent++;
    end
    @(negedge clk); in_vld = 0;
    check(overflow_cnt == 20, $sformatf("overflow count %0d expected 20", overflow_cnt));
    out_ready = 1;
    repeat (DEPTH + 4) @(negedge clk);
    check(got == sent - 20, $sformatf("after overflow delivered %0d expected %0d", got, sent - 20));
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
