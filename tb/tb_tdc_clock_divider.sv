// tb_tdc_clock_divider: self-checking testbench of the clock divider.
//
// Runs the 1.28 GHz clock (781.25 ps) and measures, in time, the CLK40M
// period (25 ns) and high time (12.5 ns), the spacing of the two CLK320M
// pulses after each CLK40M rising edge (3.125 ns at the default setting,
// 6.25 ns with cal_dly = 8), their width (1.5625 ns), that the first one
// starts with CLK40M, and that frame_load comes once per period at count 16.
module tb_tdc_clock_divider;
  timeunit 1ps; timeprecision 1fs;

  localparam realtime TCK = 781.25;

  logic clk1g28 = 1'b0, rst_n = 1'b0;
  logic [4:0] cal_dly = 5'd4;
  logic clk40m, clk320m, frame_load;
  int checks = 0, failures = 0;
  realtime t40 = 0, t40_prev = 0, t40_fall = 0, t320_rise[$], t320_fall[$];
  int n_load = 0;

  tdc_clock_divider dut (.*);

  always #(TCK / 2) clk1g28 = ~clk1g28;

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_time(input string what, input realtime got, input realtime exp);
    checks++;
    if (got < exp - 1.0 || got > exp + 1.0) begin
      failures++;
      $display("FAIL %s: got %0.3f ps expected %0.3f ps", what, got, exp);
    end
  endtask

  always @(posedge clk320m) t320_rise.push_back($realtime);
  always @(negedge clk320m) t320_fall.push_back($realtime);
  always @(negedge clk40m) t40_fall = $realtime;
  always @(posedge clk1g28) if (frame_load) n_load++;

  task automatic one_period(input int dly);
    realtime t0;
    @(posedge clk40m);
    t0 = $realtime;
    t320_rise.delete(); t320_fall.delete(); n_load = 0;
    @(posedge clk40m);
    check_time("CLK40M period", $realtime - t0, 25000.0);
    check_time("CLK40M high time", t40_fall - t0, 12500.0);
    checks++;
    if (t320_rise.size() != 2 || t320_fall.size() != 2) begin
      failures++;
      $display("FAIL: %0d CLK320M pulses in a period", t320_rise.size());
    end else begin
      check_time("first CLK320M pulse aligned", t320_rise[0] - t0, 0.0);
      check_time("CLK320M pulse spacing", t320_rise[1] - t320_rise[0], dly * TCK);
      check_time("CLK320M pulse width", t320_fall[0] - t320_rise[0], 2 * TCK);
    end
    checks++;
    if (n_load != 1) begin
      failures++;
      $display("FAIL: %0d frame_load strobes in a period", n_load);
    end
  endtask

  initial begin
    #(5 * TCK) rst_n = 1'b1;
    @(posedge clk40m);
    repeat (4) one_period(4);
    @(negedge clk40m) cal_dly = 5'd8;
    @(posedge clk40m);
    repeat (4) one_period(8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
