// tb_tdc_controller: self-checking testbench of the strobe controller model.
//
// Generates CLK40M and the CLK320M double pulse (3.125 ns spacing) directly
// and sends one hit every second 40 MHz cycle, with a random arrival time
// before the CLK40M edge and a random width (some longer than TOA + 3.125 ns,
// so START must wait for the TOT strobe).  For every hit it checks the times
// of: START rising and falling, the two TOACLK capture edges (CLK40M edge and
// second CLK320M pulse, +gate delay +400 ps), the single TOALATCH capture
// edge, the TOTCLK capture edge (PULSE trailing edge +gate +400 ps), the
// 400 ps strobe widths, and that no strobe appears in a cycle without a hit.
module tb_tdc_controller;
  timeunit 1ps; timeprecision 1fs;

  localparam real TG = 30.0, TL = 60.0, TS = 400.0;

  logic clk40m = 1'b0, clk320m = 1'b0, pulse = 1'b0;
  logic start, toaclk, toalatch, totclk;
  int checks = 0, failures = 0;
  int n_long = 0;
  realtime start_r [$], start_f [$], toa_r [$], toa_f [$], lat_r [$], tot_r [$], tot_f [$];

  tdc_controller dut (.*);

  always @(posedge start)    start_r.push_back($realtime);
  always @(negedge start)    start_f.push_back($realtime);
  always @(posedge toaclk)   toa_r.push_back($realtime);
  always @(negedge toaclk)   toa_f.push_back($realtime);
  always @(posedge toalatch) lat_r.push_back($realtime);
  always @(posedge totclk)   tot_r.push_back($realtime);
  always @(negedge totclk)   tot_f.push_back($realtime);

  // CLK40M and the CLK320M double pulse, first pulse aligned with CLK40M.
  initial begin
    #10_000;
    forever begin
      clk40m = 1'b1; clk320m = 1'b1;
      #1562.5 clk320m = 1'b0;
      #1562.5 clk320m = 1'b1;
      #1562.5 clk320m = 1'b0;
      #(12500 - 4687.5) clk40m = 1'b0;
      #12500;
    end
  end

  initial begin
    #100_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_time(input string what, input realtime got, input realtime exp);
    checks++;
    if (got < exp - 0.01 || got > exp + 0.01) begin
      failures++;
      $display("FAIL %s: got %0.3f expected %0.3f", what, got, exp);
    end
  endtask

  task automatic check_count(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: %0d events, expected %0d", what, got, exp);
    end
  endtask

  initial begin : stim
    realtime edge_t, t_rise, t_fall, t_cal, t_tot;
    int arrive, width;
    #1 pulse = 1'b0;
    @(posedge clk40m);
    edge_t = $realtime - 25000;
    for (int n = 0; n < 400; n++) begin
      // hit in this cycle, measured at the next CLK40M edge
      edge_t += 50000;
      arrive = $urandom_range(500, 12000);
      width  = (n % 3 == 0) ? $urandom_range(arrive + 3600, arrive + 9000)
                            : $urandom_range(300, arrive);
      if (width > 10200) width = 10200;
      start_r.delete(); start_f.delete(); toa_r.delete(); toa_f.delete();
      lat_r.delete(); tot_r.delete(); tot_f.delete();
      #(edge_t - arrive - $realtime);
      t_rise = $realtime;
      pulse = 1'b1;
      #(width) pulse = 1'b0;
      t_fall = $realtime;
      // wait for the next two cycles: measurement, then a cycle without hit
      #(edge_t + 25000 + 500 - $realtime);
      t_cal = edge_t + 3125.0 + TG + TS;
      t_tot = t_fall + TG + TS;
      if (t_tot > t_cal) n_long++;
      check_count("START rise", start_r.size(), 1);
      check_count("START fall", start_f.size(), 1);
      check_count("TOACLK", toa_r.size(), 2);
      check_count("TOALATCH", lat_r.size(), 1);
      check_count("TOTCLK", tot_r.size(), 1);
      if (start_r.size() == 1 && start_f.size() == 1 && toa_r.size() == 2 &&
          lat_r.size() == 1 && tot_r.size() == 1) begin
        check_time("START rise", start_r[0], t_rise + TG);
        check_time("TOA strobe", toa_r[0], edge_t + TG + TS);
        check_time("TOA strobe width", toa_r[0] - toa_f[0], TS);
        check_time("CAL strobe", toa_r[1], t_cal);
        check_time("TOALATCH", lat_r[0], edge_t + TL + TS);
        check_time("TOT strobe", tot_r[0], t_tot);
        check_time("TOT strobe width", tot_r[0] - tot_f[0], TS);
        check_time("START fall", start_f[0], ((t_tot > t_cal) ? t_tot : t_cal) + TG);
      end
    end
    checks++;
    if (n_long == 0) begin failures++; $display("FAIL: no pulse outlasted the CAL strobe"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
