// tdc_tot_recorder: snapshot of the ring oscillator and turn counters at the
// end of the hit (time over threshold).
//
// On the rising edge of TOTCLK, which comes about 400 ps after the trailing
// edge of the hit, this DFF chain stores the even taps D0, D2, ..., D62 as
// T0..T31 and both turn counters as CAT0..2 (counter A) and CBT0..2
// (counter B).  The TOT only needs half the TOA resolution, so taking every
// other tap halves the number of DFFs: one TOT bin is two gate delays.
//
// Interface: totclk, taps[62:0], ca, cb in; t[31:0], cat, cbt out.  No reset,
// like the silicon DFF chains; the encoder only reads it after a hit.
//
// Following the design description: which taps are used and the names.  In
// silicon the odd taps also drive dummy DFFs whose clock is tied high, to give
// every tap the same load; they hold no data and are left out here.
module tdc_tot_recorder
  import tdc_pkg::*;
(
  input  logic                  totclk,
  input  logic [N_TAPS-1:0]     taps,
  input  logic [CNT_W-1:0]      ca,
  input  logic [CNT_W-1:0]      cb,
  output logic [N_TOT_TAPS-1:0] t,
  output logic [CNT_W-1:0]      cat,
  output logic [CNT_W-1:0]      cbt
);
  timeunit 1ps; timeprecision 1fs;

  logic [N_TOT_TAPS-1:0] even_taps;

  always_comb
    for (int k = 0; k < N_TOT_TAPS; k++) even_taps[k] = taps[2*k];

  always_ff @(posedge totclk) begin
    t   <= even_taps;
    cat <= ca;
    cbt <= cb;
  end
endmodule
