// tdc_ripple_counter: coarse time of the TDC, two 3-bit ripple counters.
//
// The coarse time is the number of turns the hit has made round the ring
// oscillator.  Tap D31 is buffered by a latch whose enable is tied high (in
// silicon it only gives D31 the same load as a recorder DFF) and clocks
// counter A; the same signal, inverted, clocks counter B.  Each counter is a
// ripple chain: bit 0 toggles on its clock edge and every further bit toggles
// when the bit below it falls, so the outputs count up.
//
// Because A steps on the rising and B on the falling edge of D31, the two
// counters change half a ring period apart.  Whenever a recorder strobe hits
// one counter while it is rippling (and possibly metastable), the other is
// stable; the encoder picks the stable one from the fine phase.
//
// Interface: d31 in, clr in (asynchronous, active high; the top drives it with
// ~START so every measurement counts from zero), ca/cb out (CA0..2, CB0..2).
//
// Following the design description: 3-bit ripple counter clocked from D31
// through an always-open latch, duplicated with an inverted clock.  This
// design's own choices: the clear, the count direction and which D31 edge
// each counter uses.  The ripple chain clocks flops from other flops on
// purpose; lint tools report the derived clocks.
module tdc_ripple_counter #(
  parameter int unsigned CNT_W = 3
) (
  input  logic             d31,
  input  logic             clr,
  output logic [CNT_W-1:0] ca,
  output logic [CNT_W-1:0] cb
);
  timeunit 1ps; timeprecision 1fs;

  logic d31_buf;
  logic ck_a [CNT_W];   // clock of each stage of counter A
  logic ck_b [CNT_W];

  // The latch has its enable tied high, so it is always transparent.
  assign d31_buf = d31;
  assign ck_a[0] = d31_buf;
  assign ck_b[0] = ~d31_buf;

  for (genvar i = 0; i < CNT_W; i++) begin : g_stage
    logic qa, qb;
    // Each stage toggles on the rising edge of its clock.
    always_ff @(posedge ck_a[i] or posedge clr)
      if (clr) qa <= 1'b0; else qa <= ~qa;
    always_ff @(posedge ck_b[i] or posedge clr)
      if (clr) qb <= 1'b0; else qb <= ~qb;
    // The next stage is clocked by the inverted output, i.e. it toggles when
    // this bit falls (carry).
    if (i + 1 < CNT_W) begin : g_carry
      assign ck_a[i+1] = ~qa;
      assign ck_b[i+1] = ~qb;
    end
    assign ca[i] = qa;
    assign cb[i] = qb;
  end
endmodule
