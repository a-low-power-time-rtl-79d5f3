// tb_tdc_delay_line: self-checking testbench of the delay-line model.
//
// With START low, checks the idle pattern.  Then raises START at a random
// time, samples all 63 taps at random instants in the middle of a gate delay
// and compares them with the ideal ring (taps_at() of the model package),
// checks that D31 has a period of 126 gate delays, and that the line returns
// to the idle pattern after START falls.
module tb_tdc_delay_line;
  timeunit 1ps; timeprecision 1fs;
  import tb_tdc_model_pkg::*;

  localparam real TD = 17.8;

  logic start = 1'b0;
  logic [62:0] taps;
  int checks = 0, failures = 0;
  realtime d31_rise [$];

  tdc_delay_line dut (.*);

  always @(posedge taps[31]) d31_rise.push_back($realtime);

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic [62:0] got, input logic [62:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    realtime t0;
    int k;
    #3000;
    check("idle pattern", taps, taps_at(0));
    for (int r = 0; r < 40; r++) begin
      #($urandom_range(100, 900));
      d31_rise.delete();
      start = 1'b1;
      t0 = $realtime;
      k = 0;
      for (int s = 0; s < 20; s++) begin
        k += $urandom_range(1, 50);
        #((t0 + (k + 0.5) * TD) - $realtime);
        check($sformatf("taps at %0d delays", k), taps, taps_at(k));
      end
      #((t0 + 1100 * TD) - $realtime);
      start = 1'b0;
      checks++;
      if (d31_rise.size() < 3) begin
        failures++;
      end else if ((d31_rise[1] - d31_rise[0]) < 126 * TD - 0.1 ||
                   (d31_rise[1] - d31_rise[0]) > 126 * TD + 0.1) begin
        failures++;
        $display("FAIL D31 period %0.2f", d31_rise[1] - d31_rise[0]);
      end
      #3000;
      check("idle after stop", taps, taps_at(0));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
