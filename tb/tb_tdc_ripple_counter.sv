// tb_tdc_ripple_counter: self-checking testbench of the turn counters.
//
// Toggles D31 a random number of times, then checks counter A against the
// number of rising edges and counter B against the number of falling edges,
// both modulo 8, and that the asynchronous clear returns both to zero.
module tb_tdc_ripple_counter;
  timeunit 1ps; timeprecision 1fs;

  logic d31 = 1'b0, clr = 1'b0;
  logic [2:0] ca, cb;
  int checks = 0, failures = 0;

  tdc_ripple_counter dut (.*);

  initial begin
    #100_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    int n_rise, n_fall, n;
    for (int trial = 0; trial < 200; trial++) begin
      d31 = 1'b0;
      clr = 1'b1;
      #100;
      check("A after clear", int'(ca), 0);
      check("B after clear", int'(cb), 0);
      clr = 1'b0;
      n_rise = 0; n_fall = 0;
      n = $urandom_range(0, 40);
      for (int k = 0; k < n; k++) begin
        #(1122) d31 = ~d31;     // half a ring period at 17.8 ps per gate
        if (d31) n_rise++; else n_fall++;
        #10;
        check($sformatf("counter A k=%0d n=%0d", k, n), int'(ca), n_rise % 8);
        check("counter B", int'(cb), n_fall % 8);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
