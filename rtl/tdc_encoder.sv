// tdc_encoder: turns the three raw snapshots into TOA, TOT and CAL codes.
//
// Each snapshot is a picture of the ring oscillator (fine time) plus the two
// turn counters (coarse time).  The encoder works it out in three steps:
//  1. Fine phase.  The taps are compared with their idle levels; the taps
//     that differ form one run of ones, starting at D0 during the first half
//     of a turn and ending at D62 during the second.  The phase is the number
//     of ones (first half) or 126 minus it (second half).  A count rather than
//     an edge search means a single metastable DFF moves the result by at
//     most one LSB.  The TOT snapshot has only the 32 even taps, so its phase
//     runs 0..63 per turn and two of its bins (phases 0 and 32) are one gate
//     delay wide, all others two.
//  2. Turns.  Counter A steps at phase 32, counter B at phase 95.  In the
//     first half-turn the encoder takes B; in the second it takes A - 1.  The
//     counter it uses is never near its own step, so a counter caught while
//     rippling is never read.
//  3. Code.  TOA = 126*turns + phase (0..1007), TOT = 64*turns + phase
//     (0..511), both measured from START.  CAL = (calibration timestamp -
//     TOA timestamp) mod 1008: the known strobe spacing (3.125 ns by default)
//     in bins, about 175 for 17.8 ps gates.
//
// Timing: combinational decode into output registers clocked by the CLK40M
// rising edge.  A hit measured at CLK40M edge k (strobes at k, k + 3.125 ns)
// appears with hit_flag = 1 after edge k+1; hit_tgl from the TOA recorder
// tells the encoder whether a hit happened in the cycle just ended.  In a
// cycle without a hit all codes are 0.
//
// Following the design description: the outputs and widths (TOA_Code[9:0],
// TOT_Code[8:0], CAL_Code[9:0], hitFlag), the use of the fine time to pick
// the stable counter and the metastability goal.  The decoding arithmetic,
// the CAL definition as a difference, the register timing and zeroing the
// codes without a hit are this design's own choices.
module tdc_encoder
  import tdc_pkg::*;
(
  input  logic                  clk40m,
  input  logic                  rst_n,
  // TOA snapshot (TOA recorder)
  input  logic [N_TAPS-1:0]     a,
  input  logic [CNT_W-1:0]      caa,
  input  logic [CNT_W-1:0]      cba,
  // calibration snapshot (TOA/CAL recorder)
  input  logic [N_TAPS-1:0]     c,
  input  logic [CNT_W-1:0]      cac,
  input  logic [CNT_W-1:0]      cbc,
  // TOT snapshot (TOT recorder)
  input  logic [N_TOT_TAPS-1:0] t,
  input  logic [CNT_W-1:0]      cat,
  input  logic [CNT_W-1:0]      cbt,
  input  logic                  hit_tgl,
  output logic [TOA_W-1:0]      toa_code,
  output logic [TOT_W-1:0]      tot_code,
  output logic [TOA_W-1:0]      cal_code,
  output logic                  hit_flag
);
  timeunit 1ps; timeprecision 1fs;

  logic [6:0]       toa_ph, cal_ph;
  logic [5:0]       tot_ph;
  logic [CNT_W-1:0] toa_turns, cal_turns, tot_turns;
  logic [TOA_W-1:0] toa_time, cal_time, cal_diff;
  logic [TOT_W-1:0] tot_time;
  logic             hit_tgl_q, hit;

  always_comb begin
    toa_ph    = toa_phase(a);
    cal_ph    = toa_phase(c);
    tot_ph    = tot_phase(t);
    toa_turns = turns(toa_ph < 7'(N_TAPS + 1), caa, cba);
    cal_turns = turns(cal_ph < 7'(N_TAPS + 1), cac, cbc);
    tot_turns = turns(tot_ph <= 6'(N_TOT_TAPS), cat, cbt);
    toa_time  = TOA_W'(toa_turns) * TOA_W'(TURN_TOA) + TOA_W'(toa_ph);
    cal_time  = TOA_W'(cal_turns) * TOA_W'(TURN_TOA) + TOA_W'(cal_ph);
    tot_time  = {tot_turns, tot_ph};               // 64*turns + phase
    cal_diff  = (cal_time >= toa_time) ? cal_time - toa_time
                                       : cal_time + TOA_W'(TOA_MOD) - toa_time;
    hit       = hit_tgl ^ hit_tgl_q;
  end

  always_ff @(posedge clk40m or negedge rst_n) begin
    if (!rst_n) begin
      hit_tgl_q <= 1'b0;
      hit_flag  <= 1'b0;
      toa_code  <= '0;
      tot_code  <= '0;
      cal_code  <= '0;
    end else begin
      hit_tgl_q <= hit_tgl;
      hit_flag  <= hit;
      toa_code  <= hit ? toa_time : '0;
      tot_code  <= hit ? tot_time : '0;
      cal_code  <= hit ? cal_diff : '0;
    end
  end
endmodule
