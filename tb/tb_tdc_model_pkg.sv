// tb_tdc_model_pkg: reference model of the ideal ring oscillator for the TDC
// testbenches, written from the physics of the ring and not from the RTL.
//
// Time is counted in gate delays since START rose.  Tap Di first flips away
// from its idle level at time i+1, flips back 63 delays later and repeats
// every 126 delays.  Counter A counts the D31 rising edges (times 32 + 126j),
// counter B the falling edges (times 95 + 126j).  An ideal TDC reading taken
// at time t is therefore t mod 1008 for the TOA (63 taps, 3-bit counters)
// and, for the TOT (even taps only), 64*turns plus the number of even taps
// that have flipped, as worked out in tot_expect().
package tb_tdc_model_pkg;
  timeunit 1ps; timeprecision 1fs;

  // Level of tap i at time t (gate delays after START).
  function automatic logic tap_at(input int i, input int t);
    logic idle = (i % 2 == 0);
    if (t < i + 1) return idle;
    return (((t - (i + 1)) % 126) < 63) ? ~idle : idle;
  endfunction

  function automatic logic [62:0] taps_at(input int t);
    logic [62:0] v;
    for (int i = 0; i < 63; i++) v[i] = tap_at(i, t);
    return v;
  endfunction

  function automatic logic [31:0] even_taps_at(input int t);
    logic [31:0] v;
    for (int k = 0; k < 32; k++) v[k] = tap_at(2 * k, t);
    return v;
  endfunction

  function automatic logic [2:0] cnt_a_at(input int t);
    return (t < 32) ? 3'd0 : 3'((t - 32) / 126 + 1);
  endfunction

  function automatic logic [2:0] cnt_b_at(input int t);
    return (t < 95) ? 3'd0 : 3'((t - 95) / 126 + 1);
  endfunction

  function automatic int toa_expect(input int t);
    return t % 1008;
  endfunction

  // TOT code: 64 per turn; within a turn, ceil(p/2) in the first half
  // (p = 0..63) and 33 + floor((p-64)/2) in the second (p = 64..125).
  function automatic int tot_expect(input int t);
    int p = t % 126;
    int turns = t / 126;
    int ph = (p <= 63) ? (p + 1) / 2 : 33 + (p - 64) / 2;
    return (64 * turns + ph) % 512;
  endfunction
endpackage
