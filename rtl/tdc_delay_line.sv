// tdc_delay_line: behavioural model of the TDC's 63-stage NAND ring oscillator.
//
// This is a behavioural model, not synthesizable logic: in silicon each stage
// is a plain, untuned CMOS NAND gate and the timing is set by its propagation
// delay.  Stage 0 computes NAND(START, D62); stages 1..62 are NAND gates with
// one input tied high, i.e. inverters.  With START low the taps rest at
// D0 = 1, D1 = 0, D2 = 1, ... .  When START rises a transition runs down the
// line and, being an odd number of inversions, comes back from D62 to D0 and
// keeps circulating: one full oscillation period is 126 gate delays.  START
// low stops the ring and it settles back to the idle pattern.
//
// Interface: start in, taps[62:0] = D0..D62 out.  Timing: each stage adds
// TD_RISE_PS when its output rises and TD_FALL_PS when it falls; unequal
// values reproduce the even/odd bin-width pattern seen in the measured DNL.
// The default 17.8 ps is the measured average bin of the fabricated line.
//
// Following the design description: 63 NAND stages, START on the first gate,
// feedback from D62, and the 126-delay period.  This model's own choices:
// transport delays (every transition propagates) and the separate rise/fall
// parameters.  The ring is a combinational loop on purpose; lint tools report
// it as one.
module tdc_delay_line #(
  parameter int unsigned N_STAGES   = 63,
  parameter real         TD_RISE_PS = 17.8,
  parameter real         TD_FALL_PS = 17.8
) (
  input  logic                start,
  output logic [N_STAGES-1:0] taps
);
  timeunit 1ps; timeprecision 1fs;

  logic d [N_STAGES];   // d[i] is tap Di

  for (genvar i = 0; i < N_STAGES; i++) begin : g_tap
    initial d[i] = (i % 2 == 0);   // idle pattern
    assign taps[i] = d[i];
  end

  // Output rises after TD_RISE_PS, falls after TD_FALL_PS.
  function automatic real stage_delay(input logic out_next);
    return out_next ? TD_RISE_PS : TD_FALL_PS;
  endfunction

  always @(start or d[N_STAGES-1]) begin : stage0
    logic v;
    v = ~(start & d[N_STAGES-1]);
    d[0] <= #(stage_delay(v)) v;
  end

  for (genvar i = 1; i < N_STAGES; i++) begin : g_stage
    always @(d[i-1]) begin
      logic v;
      v = ~d[i-1];
      d[i] <= #(stage_delay(v)) v;
    end
  end
endmodule
