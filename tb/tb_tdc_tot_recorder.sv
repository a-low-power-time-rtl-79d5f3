// tb_tdc_tot_recorder: self-checking testbench of the TOT recorder.
//
// Drives random tap and counter values, strobes TOTCLK (active low, capture
// on the rising edge) and checks that T0..T31 hold the even taps D0..D62 and
// CAT/CBT the counters, and that nothing changes without a strobe.
module tb_tdc_tot_recorder;
  timeunit 1ps; timeprecision 1fs;

  logic totclk = 1'b1;
  logic [62:0] taps;
  logic [2:0] ca, cb, cat, cbt;
  logic [31:0] t;
  int checks = 0, failures = 0;

  tdc_tot_recorder dut (.*);

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  initial begin
    logic [31:0] exp_t;
    logic [2:0]  exp_a, exp_b;
    for (int n = 0; n < 500; n++) begin
      taps = {$urandom, $urandom};
      ca = 3'($urandom); cb = 3'($urandom);
      for (int k = 0; k < 32; k++) exp_t[k] = taps[2 * k];
      exp_a = ca; exp_b = cb;
      #100 totclk = 1'b0;
      #400 totclk = 1'b1;
      #10;
      check("T", longint'(t), longint'(exp_t));
      check("CAT", longint'(cat), longint'(exp_a));
      check("CBT", longint'(cbt), longint'(exp_b));
      taps = ~taps; ca = ~ca; cb = ~cb;
      #100;
      check("T held", longint'(t), longint'(exp_t));
      check("CAT held", longint'(cat), longint'(exp_a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
