// data_readout: the co-processor's "Data Readout" block, the hand-over of
// readout records to the host link.
//
// Records (frame headers, sentinel samples, block headers, region samples;
// see rec_t) enter one per cycle at most and are written into a first-in
// first-out buffer of DEPTH entries. The host side takes them with a
// valid/ready handshake. If a record arrives while the buffer is full it is
// dropped and OVERFLOW_CNT counts it, so the host can tell that data were
// lost. WORD_CNT counts records delivered. Zero-latency through-path is not
// provided: a record is visible one cycle after it was written.
//
// Following the paper: a data readout block that passes pixel data and
// addresses to the PC. Own choices: the record format, the buffer, the
// handshake and the loss counter (the paper does not describe this block).
module data_readout
  import roirc_pkg::*;
#(
  parameter int unsigned DEPTH = 16,
  localparam int unsigned PW   = $clog2(DEPTH)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_vld,
  input  rec_t        in_rec,
  output logic        out_valid,
  input  logic        out_ready,
  output rec_t        out_rec,
  output logic [31:0] overflow_cnt,
  output logic [31:0] word_cnt
);

  rec_t          mem [DEPTH];
  logic [PW:0]   wp, rp;
  logic          full, empty, push, pop;

  assign empty     = (wp == rp);
  assign full      = (wp[PW-1:0] == rp[PW-1:0]) && (wp[PW] != rp[PW]);
  assign out_valid = !empty;
  assign out_rec   = mem[rp[PW-1:0]];
  assign pop       = out_valid && out_ready;
  assign push      = in_vld && !full;

  always_ff @(posedge clk) begin
    if (push) mem[wp[PW-1:0]] <= in_rec;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp           <= '0;
      rp           <= '0;
      overflow_cnt <= '0;
      word_cnt     <= '0;
    end else begin
      if (push) wp <= wp + 1'b1;
      if (pop) begin
        rp       <= rp + 1'b1;
        word_cnt <= word_cnt + 1'b1;
      end
      if (in_vld && full) overflow_cnt <= overflow_cnt + 1'b1;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) out_valid && !out_ready |=> out_valid && $stable(out_rec))
    else $error("data_readout: record changed while waiting for ready");

  initial begin
    assert (DEPTH >= 2 && (DEPTH & (DEPTH - 1)) == 0) else $error("data_readout: DEPTH must be a power of two");
  end

endmodule
