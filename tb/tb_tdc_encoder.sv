// tb_tdc_encoder: self-checking testbench of the TDC encoder.
//
// Builds TOA, calibration and TOT snapshots from the ideal ring model for
// random times, optionally with one metastable fine DFF (at the edge of the
// run) or with the counter that is rippling at that moment given a random
// value, and checks the registered codes: TOA exact, CAL = difference mod
// 1008, TOT exact; with a bubble the error may be at most one LSB.  Also
// checks hitFlag and zeroed codes in cycles without a hit, and the one-cycle
// latency.
module tb_tdc_encoder;
  timeunit 1ps; timeprecision 1fs;
  import tb_tdc_model_pkg::*;

  logic clk40m = 1'b0, rst_n = 1'b0;
  logic [62:0] a, c;
  logic [2:0]  caa, cba, cac, cbc, cat, cbt;
  logic [31:0] t;
  logic        hit_tgl = 1'b0;
  logic [9:0]  toa_code, cal_code;
  logic [8:0]  tot_code;
  logic        hit_flag;
  int checks = 0, failures = 0;

  tdc_encoder dut (.*);

  always #12500 clk40m = ~clk40m;

  initial begin
    #200_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input int got, input int exp, input int tol = 0);
    int d = got - exp;
    checks++;
    if (d < 0) d = -d;
    if (d > tol) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic int circ_dist(input int x, input int y, input int m);
    int d = (x - y) % m;
    if (d < 0) d += m;
    return (d > m / 2) ? m - d : d;
  endfunction

  initial begin : stim
    int t_toa, t_cal, t_tot, mode;
    a = '0; c = '0; t = '0; caa = '0; cba = '0; cac = '0; cbc = '0; cat = '0; cbt = '0;
    repeat (2) @(negedge clk40m);
    rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk40m);
      mode  = n % 4;
      t_toa = $urandom_range(0, 820);
      t_cal = t_toa + $urandom_range(150, 186);
      t_tot = $urandom_range(0, 1007);
      a = taps_at(t_toa); caa = cnt_a_at(t_toa); cba = cnt_b_at(t_toa);
      c = taps_at(t_cal); cac = cnt_a_at(t_cal); cbc = cnt_b_at(t_cal);
      t = even_taps_at(t_tot); cat = cnt_a_at(t_tot); cbt = cnt_b_at(t_tot);
      if (mode == 1) begin
        // one metastable DFF: the tap that changed last reads either value
        if (t_toa % 126 != 0) a[(t_toa - 1) % 63] = 1'($urandom_range(0, 1));
        if (t_cal % 126 != 0) c[(t_cal - 1) % 63] = 1'($urandom_range(0, 1));
      end
      if (mode == 2) begin
        // the counter that is rippling near its own step is unreliable
        if (t_toa % 126 >= 28 && t_toa % 126 <= 45) caa = 3'($urandom);
        if (t_toa % 126 >= 91 && t_toa % 126 <= 108) cba = 3'($urandom);
        if (t_cal % 126 >= 28 && t_cal % 126 <= 45) cac = 3'($urandom);
        if (t_cal % 126 >= 91 && t_cal % 126 <= 108) cbc = 3'($urandom);
        if (t_tot % 126 >= 28 && t_tot % 126 <= 45) cat = 3'($urandom);
        if (t_tot % 126 >= 91 && t_tot % 126 <= 108) cbt = 3'($urandom);
      end
      if (mode != 3) hit_tgl = ~hit_tgl;
      @(posedge clk40m); #1;
      if (mode == 3) begin
        check("hitFlag (no hit)", int'(hit_flag), 0);
        check("TOA zero", int'(toa_code), 0);
      end else begin
        check("hitFlag", int'(hit_flag), 1);
        if (mode == 1) begin
          checks++;
          if (circ_dist(int'(toa_code), toa_expect(t_toa), 1008) > 1) begin
            failures++;
            $display("FAIL TOA with bubble: got %0d exp %0d", toa_code, toa_expect(t_toa));
          end
          checks++;
          if (circ_dist(int'(cal_code), t_cal - t_toa, 1008) > 2) begin
            failures++;
            $display("FAIL CAL with bubble: got %0d exp %0d", cal_code, t_cal - t_toa);
          end
        end else begin
          check("TOA", int'(toa_code), toa_expect(t_toa));
          check("CAL", int'(cal_code), t_cal - t_toa);
          check("TOT", int'(tot_code), tot_expect(t_tot));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
