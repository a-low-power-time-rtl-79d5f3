// tdc_controller: behavioural model of the TDC strobe controller.
//
// This is a behavioural model, not synthesizable logic: in silicon the
// controller is a handful of asynchronous gates and one-shots whose outputs
// are sub-nanosecond pulses, so it is written here with delays.
//
// Per hit it produces, from CLK40M, CLK320M and PULSE:
//   START     - rises T_GATE_PS after the PULSE leading edge and starts the
//               ring oscillator; falls T_GATE_PS after both the calibration
//               strobe and the TOT strobe are done, which stops the ring.
//   TOACLK    - two active-low strobes of T_STROBE_PS (about 400 ps): the
//               first T_GATE_PS after the next CLK40M rising edge (the TOA
//               strobe), the second T_GATE_PS after the leading edge of the
//               second CLK320M pulse (the calibration strobe).  The recorders
//               capture on the rising (trailing) edge of each strobe.
//   TOALATCH  - a copy of the first TOACLK strobe, T_LATCH_PS after the CLK40M
//               edge, so the TOA recorder copies the first timestamp after the
//               TOA/CAL recorder has taken it.
//   TOTCLK    - one active-low strobe starting T_GATE_PS after the PULSE
//               trailing edge.
// Strobes are only issued while START is high, so no DFF is clocked in a
// 40 MHz cycle without a hit, which is where the low power comes from.
// A new hit is accepted once START has fallen; pulses that arrive while a
// measurement is running are ignored except that the first trailing edge
// after the leading edge gives the TOT.
//
// Following the design description: the four signals, their order, the
// active-low ~400 ps strobes, TOTCLK on the PULSE trailing edge and TOALATCH
// duplicating the first TOACLK strobe.  This design's own choices: the gate
// delays, and that START waits for the TOT strobe as well as the calibration
// strobe (so that a pulse longer than TOA + 3.125 ns still gets its TOT).
module tdc_controller #(
  parameter real T_STROBE_PS = 400.0,
  parameter real T_GATE_PS   = 30.0,
  parameter real T_LATCH_PS  = 60.0
) (
  input  logic clk40m,
  input  logic clk320m,
  input  logic pulse,
  output logic start,
  output logic toaclk,
  output logic toalatch,
  output logic totclk
);
  timeunit 1ps; timeprecision 1fs;

  initial begin
    start    = 1'b0;
    toaclk   = 1'b1;
    toalatch = 1'b1;
    totclk   = 1'b1;
    forever begin
      @(posedge pulse);
      #(T_GATE_PS) start = 1'b1;
      fork
        begin : toa_cal_strobes
          @(posedge clk40m);
          fork
            begin
              #(T_LATCH_PS)  toalatch = 1'b0;
              #(T_STROBE_PS) toalatch = 1'b1;
            end
          join_none
          #(T_GATE_PS)   toaclk = 1'b0;
          #(T_STROBE_PS) toaclk = 1'b1;
          // The first CLK320M pulse coincides with the CLK40M edge; the
          // calibration strobe follows the leading edge of the second one.
          @(negedge clk320m);
          @(posedge clk320m);
          #(T_GATE_PS)   toaclk = 1'b0;
          #(T_STROBE_PS) toaclk = 1'b1;
        end
        begin : tot_strobe
          if (pulse) @(negedge pulse);
          #(T_GATE_PS)   totclk = 1'b0;
          #(T_STROBE_PS) totclk = 1'b1;
        end
      join
      #(T_GATE_PS) start = 1'b0;
    end
  end
endmodule
