// tb_tdc_toacal_recorder: self-checking testbench of the TOA/CAL recorder.
//
// Strobes TOACLK twice per round, as the controller does, with different tap
// and counter values before each strobe, and checks that the recorder holds
// the value present at the second rising edge (the calibration timestamp)
// and that nothing changes without a strobe.
module tb_tdc_toacal_recorder;
  timeunit 1ps; timeprecision 1fs;

  logic toaclk = 1'b1;
  logic [62:0] taps, c;
  logic [2:0] ca, cb, cac, cbc;
  int checks = 0, failures = 0;

  tdc_toacal_recorder dut (.*);

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
    logic [62:0] first, second;
    logic [2:0] a2, b2;
    for (int n = 0; n < 500; n++) begin
      first = {$urandom, $urandom};
      taps = first; ca = 3'($urandom); cb = 3'($urandom);
      #100 toaclk = 1'b0;
      #400 toaclk = 1'b1;
      #10;
      check("C after first strobe", longint'(c), longint'(first));
      second = {$urandom, $urandom};
      taps = second; ca = 3'($urandom); cb = 3'($urandom);
      a2 = ca; b2 = cb;
      #2700 toaclk = 1'b0;
      #400 toaclk = 1'b1;
      #10;
      check("C after second strobe", longint'(c), longint'(second));
      check("CAC", longint'(cac), longint'(a2));
      check("CBC", longint'(cbc), longint'(b2));
      taps = ~taps; ca = ~ca;
      #100;
      check("C held", longint'(c), longint'(second));
      check("CAC held", longint'(cac), longint'(a2));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
