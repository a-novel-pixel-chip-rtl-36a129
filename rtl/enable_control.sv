// enable_control: the co-processor's "Enable Control" block. It produces the
// SHIFT_EN, LOAD_DATA and PIX_EN strobes of the scanning module for one
// parameter configuration followed by one scan.
//
// A CFG_REQ pulse (with the new parameters valid on the same cycle) makes
// SNAP copy them into the serialiser, then SHIFT_EN is held for AW = 10 clk
// cycles. LOAD_DATA is then driven high for exactly one cycle, the next clk
// cycle in which CLK_PIX rises (phase 0), immediately after the last shift
// cycle if the phase allows, together
// with raising PIX_EN, so the address counter loads on that CLK_PIX edge and
// starts scanning on the next one. CFG_DONE pulses after LOAD_DATA. PIX_EN
// stays high until SCAN_STOP, which the scan controller raises in the cycle
// in which it sees the last wanted pixel; PIX_EN then falls before the next
// CLK_PIX edge.
//
// Timing: 10 shift cycles + 1 load cycle = 220 ns at 50 MHz when the load
// phase lines up, up to DIV-1 cycles more otherwise (plus the request cycle). Following the paper:
// T_data = 220 ns for 10 serial bits and the load. Own choices: the FSM and
// the alignment of LOAD_DATA to CLK_PIX.
module enable_control
  import roirc_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic cfg_req,
  input  logic scan_stop,
  input  logic pix_last,
  output logic snap,
  output logic shift_en,
  output logic load_data,
  output logic pix_en,
  output logic cfg_done,
  output logic busy
);

  typedef enum logic [1:0] {E_IDLE, E_SHIFT, E_WAITL, E_LOAD} estate_t;

  estate_t       state;
  logic [$clog2(AW+1)-1:0] bitcnt;

  assign snap     = (state == E_IDLE) && cfg_req;
  assign shift_en = (state == E_SHIFT);
  assign busy     = (state != E_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= E_IDLE;
      bitcnt    <= '0;
      load_data <= 1'b0;
      pix_en    <= 1'b0;
      cfg_done  <= 1'b0;
    end else begin
      cfg_done  <= 1'b0;
      load_data <= 1'b0;
      if (scan_stop) pix_en <= 1'b0;
      unique case (state)
        E_IDLE: if (cfg_req) begin
          state  <= E_SHIFT;
          bitcnt <= '0;
          pix_en <= 1'b0;
        end
        E_SHIFT: begin
          bitcnt <= bitcnt + 1'b1;
          if (bitcnt == ($clog2(AW+1))'(AW-1)) begin
            if (pix_last) begin
              load_data <= 1'b1;
              pix_en    <= 1'b1;
              state     <= E_LOAD;
            end else begin
              state <= E_WAITL;
            end
          end
        end
        E_WAITL: if (pix_last) begin
          load_data <= 1'b1;
          pix_en    <= 1'b1;
          state     <= E_LOAD;
        end
        E_LOAD: begin
          cfg_done <= 1'b1;
          state    <= E_IDLE;
        end
        default: state <= E_IDLE;
      endcase
    end
  end

  // A new configuration must not be requested while a scan is running.
  assert property (@(posedge clk) disable iff (!rst_n) cfg_req |-> !pix_en || scan_stop)
    else $error("enable_control: configuration requested during a scan");

endmodule
