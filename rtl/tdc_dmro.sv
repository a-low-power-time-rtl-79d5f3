// tdc_dmro: Diagnostic-Mode Read-Out, the TDC's serial data link.
//
// Once per 40 MHz cycle the DMRO takes the 30-bit TDC word
//   data = {TOA_Code[9:0], TOT_Code[8:0], CAL_Code[9:0], hitFlag},
// scrambles it, puts the frame header 2'b10 in front and shifts the 32 bits
// out at 1.28 Gb/s, header first and MSB first, so one frame fills exactly one
// 25 ns period.  The header is not scrambled, which lets a receiver find the
// frame boundary by looking for a position where every frame starts with
// "10".
//
// Scrambler: self-synchronizing, polynomial x^58 + x^39 + 1 (as used by
// 64b/66b Ethernet).  Each data bit, in transmission order, is XORed with the
// scrambled bits sent 39 and 58 bits earlier; the 58 most recent scrambled
// bits are kept in scr_state (bit 0 the most recent).  A receiver undoes it
// with the same taps on the received bits and needs no synchronization.
//
// Timing: frame_load (from the clock divider, once every 32 clk1g28 periods)
// loads the shift register with the new frame; its MSB is on sout during the
// next period.  Scrambling of the 30 bits happens in parallel at the load.
//
// Following the design description: the 30-bit content, the 2'b10 header,
// 32 bits at 1.28 Gb/s per 40 MHz cycle.  This design's own choices: the
// scrambler polynomial, the bit order and the load timing.
module tdc_dmro
  import tdc_pkg::*;
(
  input  logic                   clk1g28,
  input  logic                   rst_n,
  input  logic                   frame_load,
  input  logic [DMRO_DATA_W-1:0] data,
  output logic                   sout
);
  timeunit 1ps; timeprecision 1fs;

  localparam int unsigned FRAME_W = DMRO_DATA_W + 2;

  logic [57:0]            scr_state, scr_next;
  logic [DMRO_DATA_W-1:0] scrambled;
  logic [FRAME_W-1:0]     shreg;

  always_comb begin
    scr_next = scr_state;
    for (int i = DMRO_DATA_W - 1; i >= 0; i--) begin
      scrambled[i] = data[i] ^ scr_next[38] ^ scr_next[57];
      scr_next     = {scr_next[56:0], scrambled[i]};
    end
  end

  always_ff @(posedge clk1g28 or negedge rst_n) begin
    if (!rst_n) begin
      scr_state <= '0;
      shreg     <= '0;
    end else if (frame_load) begin
      scr_state <= scr_next;
      shreg     <= {DMRO_HEADER, scrambled};
    end else begin
      shreg     <= {shreg[FRAME_W-2:0], 1'b0};
    end
  end

  assign sout = shreg[FRAME_W-1];
endmodule
