// tdc_toacal_recorder: snapshot of the ring oscillator and turn counters at
// each TOACLK strobe (TOA and calibration).
//
// TOACLK carries two active-low strobes per hit, 3.125 ns apart by default.
// On each rising edge this DFF chain stores all 63 taps (C0..C62) and both
// turn counters (CAC0..2, CBC0..2).  After the first strobe it holds the TOA
// timestamp, which the TOA recorder copies right away; the second strobe
// overwrites it with the calibration timestamp, which stays here for the
// encoder.  The difference of the two timestamps measures the known strobe
// spacing in gate delays, i.e. calibrates the bin size in situ.
//
// Interface: toaclk, taps, ca, cb in; c[62:0], cac, cbc out.  No reset.
// Follows the original design throughout, including the signal names.
module tdc_toacal_recorder
  import tdc_pkg::*;
(
  input  logic              toaclk,
  input  logic [N_TAPS-1:0] taps,
  input  logic [CNT_W-1:0]  ca,
  input  logic [CNT_W-1:0]  cb,
  output logic [N_TAPS-1:0] c,
  output logic [CNT_W-1:0]  cac,
  output logic [CNT_W-1:0]  cbc
);
  timeunit 1ps; timeprecision 1fs;

  always_ff @(posedge toaclk) begin
    c   <= taps;
    cac <= ca;
    cbc <= cb;
  end
endmodule
