// tdc_gro: behavioural model of the Gated Ring Oscillator (GRO).
//
// This is a behavioural model, not synthesizable logic.  The GRO is a copy
// of the TDC's 63-stage NAND delay line, closed into a ring and gated by en:
// stage 0 is NAND(en, last stage), the other stages are NANDs used as
// inverters.  While en is high it oscillates with a period of 126 gate
// delays (2.24 ns, about 446 MHz, for 17.8 ps gates); counting its output
// edges against a known clock measures the gate delay, i.e. the TDC bin size,
// independently of the hit path.  With en low it stops with osc low.
//
// Interface: en in, osc out (last stage).  Timing: TD_PS per stage.
// Following the design description: a gated copy of the delay line used to
// calibrate its oscillation frequency.  Which stage is brought out is this
// design's own choice.  The ring is a combinational loop on purpose.
module tdc_gro #(
  parameter int unsigned N_STAGES = 63,
  parameter real         TD_PS    = 17.8
) (
  input  logic en,
  output logic osc
);
  timeunit 1ps; timeprecision 1fs;

  logic d [N_STAGES];

  for (genvar i = 0; i < N_STAGES; i++) begin : g_tap
    initial d[i] = (i % 2 == 0);   // idle pattern: D0 = 1, D1 = 0, ...
  end

  always @(en or d[N_STAGES-1]) d[0] <= #(TD_PS) ~(en & d[N_STAGES-1]);

  for (genvar i = 1; i < N_STAGES; i++) begin : g_stage
    always @(d[i-1]) d[i] <= #(TD_PS) ~d[i-1];
  end

  // The last stage (even index 62) idles high; bring out its inverse so the
  // output rests low when the GRO is off.
  assign osc = ~d[N_STAGES-1];
endmodule
