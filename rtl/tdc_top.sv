// tdc_top: standalone low-power delay-line TDC with its test-chip periphery.
//
// The TDC timestamps a discriminator pulse against the 40 MHz clock using a
// single untuned 63-stage NAND ring oscillator for both the time of arrival
// (TOA) and the time over threshold (TOT):
//   - the controller starts the ring at the PULSE leading edge (START);
//   - tap D31 clocks two 3-bit turn counters (coarse time);
//   - the TOT recorder snapshots the even taps and counters at the PULSE
//     trailing edge (TOTCLK);
//   - the TOA/CAL recorder snapshots all taps and counters twice, at the
//     next CLK40M edge and 3.125 ns later (TOACLK); the TOA recorder keeps a
//     copy of the first (TOALATCH), the TOA/CAL recorder ends up with the
//     second, which calibrates the bin size;
//   - the encoder turns the snapshots into TOA_Code[9:0], TOT_Code[8:0],
//     CAL_Code[9:0] and hitFlag once per 40 MHz cycle;
//   - the DMRO scrambles that 30-bit word, adds the 2'b10 header and sends it
//     at 1.28 Gb/s.
// The clock divider makes CLK40M, the CLK320M double pulse and the DMRO frame
// strobe from the 1.28 GHz input; the GRO is a separately gated copy of the
// ring for frequency calibration.
//
// Ports: clk1g28 (1.28 GHz), rst_n, pulse (hit), cal_dly (strobe spacing in
// 781.25 ps steps, 4 = 3.125 ns) and gro_en stand for the slow-control
// registers; the codes, hit_flag, the serial stream dmro_sout and gro_out go
// out as plain signals, as the differential I/O cells are not part of this
// RTL.  Latency: a hit whose TOA strobe is at CLK40M edge k shows on the
// parallel outputs after edge k+1 and leaves the DMRO in the frame loaded half
// a 40 MHz period later.
//
// The controller, delay line and GRO are behavioural models (they are timed
// by gate delays); the rest is synthesizable.  TD_RISE_PS and TD_FALL_PS set
// the gate delays of the two ring models, e.g. to mimic another supply
// voltage or temperature.  The block structure and the signal names follow
// the original design; clearing the turn counters at reset as well as while
// START is low is this design's own choice.
module tdc_top
  import tdc_pkg::*;
#(
  // Gate delays of the behavioural ring models (delay line and GRO); the
  // default is the measured average bin of the fabricated TDC.
  parameter real TD_RISE_PS = 17.8,
  parameter real TD_FALL_PS = 17.8
) (
  input  logic             clk1g28,
  input  logic             rst_n,
  input  logic             pulse,
  input  logic [4:0]       cal_dly,
  input  logic             gro_en,
  output logic [TOA_W-1:0] toa_code,
  output logic [TOT_W-1:0] tot_code,
  output logic [TOA_W-1:0] cal_code,
  output logic             hit_flag,
  output logic             dmro_sout,
  output logic             gro_out
);
  timeunit 1ps; timeprecision 1fs;

  logic                  clk40m, clk320m, frame_load;
  logic                  start, toaclk, toalatch, totclk;
  logic [N_TAPS-1:0]     taps;
  logic [CNT_W-1:0]      ca, cb;
  logic [N_TOT_TAPS-1:0] t;
  logic [CNT_W-1:0]      cat, cbt;
  logic [N_TAPS-1:0]     c, a;
  logic [CNT_W-1:0]      cac, cbc, caa, cba;
  logic                  hit_tgl;

  tdc_clock_divider u_clkdiv (
    .clk1g28, .rst_n, .cal_dly, .clk40m, .clk320m, .frame_load
  );

  tdc_controller u_ctrl (
    .clk40m, .clk320m, .pulse, .start, .toaclk, .toalatch, .totclk
  );

  tdc_delay_line #(.TD_RISE_PS(TD_RISE_PS), .TD_FALL_PS(TD_FALL_PS)) u_dl (.start, .taps);

  // Counters restart from zero for every hit, and at reset.
  tdc_ripple_counter u_cnt (.d31(taps[31]), .clr(~start || !rst_n), .ca, .cb);

  tdc_tot_recorder u_tot_rec (.totclk, .taps, .ca, .cb, .t, .cat, .cbt);

  tdc_toacal_recorder u_toacal_rec (.toaclk, .taps, .ca, .cb, .c, .cac, .cbc);

  tdc_toa_recorder u_toa_rec (
    .toalatch, .rst_n, .c, .cac, .cbc, .a, .caa, .cba, .hit_tgl
  );

  tdc_encoder u_enc (
    .clk40m, .rst_n, .a, .caa, .cba, .c, .cac, .cbc, .t, .cat, .cbt, .hit_tgl,
    .toa_code, .tot_code, .cal_code, .hit_flag
  );

  tdc_dmro u_dmro (
    .clk1g28, .rst_n, .frame_load,
    .data({toa_code, tot_code, cal_code, hit_flag}),
    .sout(dmro_sout)
  );

  tdc_gro #(.TD_PS((TD_RISE_PS + TD_FALL_PS) / 2.0)) u_gro (.en(gro_en), .osc(gro_out));
endmodule
