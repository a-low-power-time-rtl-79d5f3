// tdc_pkg: constants and helper functions shared by the delay-line TDC.
//
// The TDC measures time with a 63-stage NAND ring oscillator (one turn of
// the ring is 126 gate delays, because the transition has to travel round
// twice before a tap returns to its idle level) and two 3-bit turn counters.
// A full timestamp is therefore  turns * 126 + phase  for the TOA/CAL side
// (10 bits, 0..1007) and  turns * 64 + phase  for the TOT side, which only
// looks at the 32 even taps (9 bits, 0..511).
//
// Numbers from the design description: 63 stages, 3-bit counters, 10-bit
// TOA/CAL codes, 9-bit TOT code, the 30-bit DMRO word and its 2'b10 header.
// The encoding functions below (ones-count phase decoding and coarse
// counter selection) are this implementation's own choice.
package tdc_pkg;
  timeunit 1ps; timeprecision 1fs;

  localparam int unsigned N_TAPS     = 63;            // delay-line stages D0..D62
  localparam int unsigned N_TOT_TAPS = 32;            // TOT taps D0, D2, ..., D62
  localparam int unsigned CNT_W      = 3;             // ripple counter width
  localparam int unsigned TOA_W      = 10;            // TOA_Code / CAL_Code width
  localparam int unsigned TOT_W      = 9;             // TOT_Code width
  localparam int unsigned TURN_TOA   = 2 * N_TAPS;    // 126 TOA bins per ring turn
  localparam int unsigned TURN_TOT   = 2 * N_TOT_TAPS; // 64 TOT bins per ring turn
  localparam int unsigned TOA_MOD    = TURN_TOA * (1 << CNT_W); // 1008
  localparam int unsigned DMRO_DATA_W = 30;
  localparam logic [1:0]  DMRO_HEADER = 2'b10;

  // Idle (START low) level of each tap: D0 = 1, D1 = 0, D2 = 1, ...
  function automatic logic [N_TAPS-1:0] idle_pattern();
    logic [N_TAPS-1:0] p;
    for (int i = 0; i < N_TAPS; i++) p[i] = (i % 2 == 0);
    return p;
  endfunction

  function automatic int unsigned ones_count(input logic [N_TAPS-1:0] v);
    int unsigned n = 0;
    for (int i = 0; i < N_TAPS; i++) n += int'(v[i]);
    return n;
  endfunction

  // Phase (0..125) of the ring from a 63-tap snapshot.  Taps that differ from
  // idle form a run of ones that starts at D0 in the first half-turn, and a
  // run that ends at D62 in the second half-turn.  Counting ones instead of
  // searching for the edge keeps a single metastable DFF to an LSB error.
  function automatic logic [6:0] toa_phase(input logic [N_TAPS-1:0] snap);
    logic [N_TAPS-1:0] n;
    int unsigned k;
    n = snap ^ idle_pattern();
    k = ones_count(n);
    if (n[0])       return 7'(k);
    else if (k == 0) return 7'd0;
    else            return 7'(TURN_TOA - k);
  endfunction

  // Same for the 32 even taps (all idle high): phase 0..63.
  function automatic logic [5:0] tot_phase(input logic [N_TOT_TAPS-1:0] snap);
    logic [N_TOT_TAPS-1:0] n;
    int unsigned k = 0;
    n = ~snap;
    for (int i = 0; i < N_TOT_TAPS; i++) k += int'(n[i]);
    if (n[0])       return 6'(k);
    else if (k == 0) return 6'd0;
    else            return 6'(TURN_TOT - k);
  endfunction

  // Number of completed turns.  Counter A steps at phase 32 and counter B at
  // phase 95 of each turn, so in the first half-turn B is far from its edge
  // and holds the turn count, while in the second half A is stable and is one
  // ahead.
  function automatic logic [CNT_W-1:0] turns(input logic first_half,
                                              input logic [CNT_W-1:0] ca,
                                              input logic [CNT_W-1:0] cb);
    return first_half ? cb : CNT_W'(ca - 1'b1);
  endfunction
endpackage
