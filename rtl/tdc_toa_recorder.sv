// tdc_toa_recorder: keeps the first (TOA) timestamp of a hit.
//
// TOALATCH repeats the first TOACLK strobe slightly later.  On its rising
// edge this DFF chain copies the TOA/CAL recorder outputs C0..C62, CAC0..2
// and CBC0..2 into A0..A62, CAA0..2 and CBA0..2, before the second TOACLK
// strobe overwrites the TOA/CAL recorder with the calibration timestamp.
//
// It also flips hit_tgl on every TOALATCH.  The encoder, in the 40 MHz
// domain, compares hit_tgl with its previous sample to raise hitFlag for the
// cycle that follows a hit.  The copy itself and the names follow the
// original design; hit_tgl is this design's own addition; rst_n
// clears only this bit (the data DFFs have no reset, as in silicon).
//
// Interface: toalatch, rst_n, c, cac, cbc in; a, caa, cba, hit_tgl out.
module tdc_toa_recorder
  import tdc_pkg::*;
(
  input  logic              toalatch,
  input  logic              rst_n,
  input  logic [N_TAPS-1:0] c,
  input  logic [CNT_W-1:0]  cac,
  input  logic [CNT_W-1:0]  cbc,
  output logic [N_TAPS-1:0] a,
  output logic [CNT_W-1:0]  caa,
  output logic [CNT_W-1:0]  cba,
  output logic              hit_tgl
);
  timeunit 1ps; timeprecision 1fs;

  always_ff @(posedge toalatch) begin
    a   <= c;
    caa <= cac;
    cba <= cbc;
  end

  always_ff @(posedge toalatch or negedge rst_n)
    if (!rst_n) hit_tgl <= 1'b0;
    else        hit_tgl <= ~hit_tgl;
endmodule
