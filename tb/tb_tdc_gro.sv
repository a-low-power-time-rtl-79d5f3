// tb_tdc_gro: self-checking testbench of the gated ring oscillator.
//
// Checks that the GRO is quiet while disabled, that once enabled its period
// is 126 gate delays (2242.8 ps for 17.8 ps gates) and it has a 50 % duty
// cycle, and that it stops when disabled again.
module tb_tdc_gro;
  timeunit 1ps; timeprecision 1fs;

  logic en = 1'b0;
  logic osc;
  int checks = 0, failures = 0;
  int n_edges = 0;
  realtime t_rise [$];
  realtime t_fall [$];

  tdc_gro dut (.*);

  always @(posedge osc) begin n_edges++; t_rise.push_back($realtime); end
  always @(negedge osc) t_fall.push_back($realtime);

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_time(input string what, input realtime got, input realtime exp);
    checks++;
    if (got < exp - 0.5 || got > exp + 0.5) begin
      failures++;
      $display("FAIL %s: got %0.3f expected %0.3f", what, got, exp);
    end
  endtask

  initial begin
    #10_000;
    checks++;
    if (n_edges != 0 || osc != 1'b0) begin failures++; $display("FAIL: GRO runs while disabled"); end
    for (int r = 0; r < 3; r++) begin
      t_rise.delete(); t_fall.delete();
      en = 1'b1;
      #100_000;
      en = 1'b0;
      #5_000;
      checks++;
      if (t_rise.size() < 40) begin
        failures++;
        $display("FAIL: only %0d periods", t_rise.size());
      end else begin
        for (int k = 1; k < 40; k++)
          check_time("GRO period", t_rise[k] - t_rise[k-1], 126 * 17.8);
        check_time("GRO high time", t_fall[1] - t_rise[1], 63 * 17.8);
      end
      n_edges = 0;
      #20_000;
      checks++;
      if (n_edges != 0) begin failures++; $display("FAIL: GRO did not stop"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
