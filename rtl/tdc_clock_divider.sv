// tdc_clock_divider: derives the TDC clocks from the 1.28 GHz input clock.
//
// A 5-bit counter runs on the 1.28 GHz clock and wraps every 32 periods
// (25 ns).  From it three registered outputs are decoded:
//   clk40m     - high for counts 0..15, low for 16..31 (40 MHz, 50 % duty).
//   clk320m    - the calibration double pulse: a pulse of two fast periods
//                (1.5625 ns) starting at count 0, i.e. with the CLK40M rising
//                edge, and a second one starting at count cal_dly.  The
//                default cal_dly = 4 gives the 3.125 ns spacing.
//   frame_load - a one-period strobe at count 16, the middle of the 40 MHz
//                period, at which the DMRO takes the encoder's word.
// All outputs come straight from flip-flops, so the edges of clk40m and
// clk320m are aligned to within clock-to-Q skew.
//
// Following the design description: 1.28 GHz in, 40 MHz and the 320 MHz
// double pulse out, first pulse aligned with CLK40M, programmable spacing
// defaulting to 3.125 ns.  This design's own choices: the spacing is set in
// 1.28 GHz periods (valid values 3..29, so the pulses neither touch nor
// cross the 25 ns frame), the pulse width, and frame_load.
module tdc_clock_divider #(
  parameter int unsigned DIV             = 32,  // 1.28 GHz / 40 MHz
  parameter int unsigned CAL_DLY_DEFAULT = 4    // 3.125 ns / 781.25 ps
) (
  input  logic       clk1g28,
  input  logic       rst_n,
  input  logic [4:0] cal_dly,
  output logic       clk40m,
  output logic       clk320m,
  output logic       frame_load
);
  timeunit 1ps; timeprecision 1fs;

  localparam int unsigned CW = $clog2(DIV);

  logic [CW-1:0] cnt, cnt_nxt;

  // CAL_DLY_DEFAULT documents the reset value expected on cal_dly.
  initial assert (CAL_DLY_DEFAULT >= 3 && CAL_DLY_DEFAULT <= DIV - 3);

  assign cnt_nxt = (cnt == CW'(DIV - 1)) ? '0 : cnt + 1'b1;

  always_ff @(posedge clk1g28 or negedge rst_n) begin
    if (!rst_n) begin
      cnt        <= CW'(DIV - 1);
      clk40m     <= 1'b0;
      clk320m    <= 1'b0;
      frame_load <= 1'b0;
    end else begin
      cnt        <= cnt_nxt;
      clk40m     <= (cnt_nxt < CW'(DIV / 2));
      clk320m    <= (cnt_nxt < CW'(2)) ||
                    ((cnt_nxt >= CW'(cal_dly)) && (cnt_nxt < CW'(cal_dly) + CW'(2)));
      frame_load <= (cnt_nxt == CW'(DIV / 2));
    end
  end
endmodule
