// tb_tdc_top: end-to-end testbench of the standalone TDC at its default size.
//
// Drives the 1.28 GHz clock and sends hits with random arrival times before
// a CLK40M edge and random widths (one hit every third 40 MHz cycle, so
// the cycles between carry no hit).  For each hit the expected codes are
// worked out from the pulse timing and the 17.8 ps gate delay:
//   TOA  = floor(tau_toa / 17.8 ps),   tau_toa = TOA strobe - START
//   CAL  = floor((tau_toa + spacing) / 17.8 ps) - TOA
//   TOT  = even-tap code of floor((width + 400 ps) / 17.8 ps)
// (strobe and START times follow the controller's gate delays) and compared
// with the parallel outputs one cycle after the measurement, allowing one
// LSB for edge coincidences.  The serial DMRO stream is received frame by
// frame, its header checked, descrambled and compared with the parallel
// outputs.  The calibration spacing is switched from 3.125 ns to 6.25 ns
// half way.  Counted mechanisms (each must occur): hit and no-hit cycles,
// readings beyond one ring turn, both coarse-counter choices of the encoder,
// pulses that outlast the calibration strobe, both calibration spacings, and
// the GRO oscillating.
module tb_tdc_top;
  timeunit 1ps; timeprecision 1fs;
  import tb_tdc_model_pkg::*;

  localparam real TCK = 781.25, TD = 17.8, TG = 30.0, TS = 400.0;

  logic       clk1g28 = 1'b0, rst_n = 1'b1, pulse = 1'b0, gro_en = 1'b0;
  logic [4:0] cal_dly = 5'd4;
  logic [9:0] toa_code, cal_code;
  logic [8:0] tot_code;
  logic       hit_flag, dmro_sout, gro_out;
  int checks = 0, failures = 0;

  // mechanism counters
  int n_hit = 0, n_empty = 0, n_multi_turn = 0, n_sel_a = 0, n_sel_b = 0;
  int n_long_tot = 0, n_cal4 = 0, n_cal8 = 0, n_gro_edges = 0, n_frames = 0;

  tdc_top dut (.*);

  always #(TCK / 2) clk1g28 = ~clk1g28;
  always @(posedge gro_out) n_gro_edges++;

  initial begin
    #200_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int circ_dist(input int x, input int y, input int m);
    int d = (x - y) % m;
    if (d < 0) d += m;
    return (d > m / 2) ? m - d : d;
  endfunction

  task automatic check_code(input string what, input int got, input int exp, input int m);
    checks++;
    if (circ_dist(got, exp, m) > 1) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d at %0t", what, got, exp, $realtime);
    end
  endtask

  task automatic check_req(input string what, input int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end else $display("mechanism %s: %0d", what, n);
  endtask

  // DMRO receiver, aligned to the frame strobe inside the design.
  initial begin : rx
    logic [57:0] s = '0;
    logic [31:0] frame;
    logic [29:0] plain, exp;
    forever begin
      @(posedge clk1g28);
      if (rst_n && dut.frame_load) begin
        exp = {toa_code, tot_code, cal_code, hit_flag};
        for (int b = 31; b >= 0; b--) begin
          @(negedge clk1g28);
          frame[b] = dmro_sout;
        end
        for (int b = 29; b >= 0; b--) begin
          plain[b] = frame[b] ^ s[38] ^ s[57];
          s = {s[56:0], frame[b]};
        end
        n_frames++;
        checks += 2;
        if (frame[31:30] != 2'b10) begin
          failures++;
          $display("FAIL DMRO header %b", frame[31:30]);
        end
        if (plain != exp) begin
          failures++;
          $display("FAIL DMRO payload %h expected %h", plain, exp);
        end
      end
    end
  end

  initial begin : stim
    realtime edge_t, t_start, tau_toa, tau_cal, tau_tot, spacing;
    int arrive, width, e_toa, e_cal, e_tot, n_hits;
    n_hits = 300;
    #1 rst_n = 1'b0;
    #(10 * TCK) rst_n = 1'b1;
    @(posedge dut.clk40m);
    edge_t = $realtime + 25000;
    for (int n = 0; n < n_hits; n++) begin
      if (n == n_hits / 2) cal_dly = 5'd8;
      spacing = cal_dly * TCK;
      arrive = $urandom_range(300, 12500);
      width  = (n % 4 == 0) ? $urandom_range(4000, 10000) : $urandom_range(400, 3000);
      #(edge_t - arrive - $realtime);
      pulse = 1'b1;
      t_start = $realtime + TG;
      #(width) pulse = 1'b0;
      tau_toa = edge_t + TG + TS - t_start;
      tau_cal = tau_toa + spacing;
      tau_tot = width + TS;
      e_toa = int'($floor(tau_toa / TD));
      e_cal = int'($floor(tau_cal / TD)) - e_toa;
      e_tot = tot_expect(int'($floor(tau_tot / TD)));
      if (tau_tot > tau_cal) n_long_tot++;
      // results appear after the following CLK40M edge
      #(edge_t + 25000 + 200 - $realtime);
      checks++;
      if (!hit_flag) begin
        failures++;
        $display("FAIL hitFlag missing at %0t", $realtime);
      end else begin
        n_hit++;
        check_code("TOA", int'(toa_code), e_toa % 1008, 1008);
        check_code("CAL", int'(cal_code), e_cal, 1008);
        check_code("TOT", int'(tot_code), e_tot, 512);
        if (e_toa >= 126) n_multi_turn++;
        if (e_toa % 126 < 64) n_sel_b++; else n_sel_a++;
        if (cal_dly == 5'd4) n_cal4++; else n_cal8++;
      end
      // the next cycle carries no hit
      #(25000);
      checks++;
      if (hit_flag || toa_code != 0) begin
        failures++;
        $display("FAIL hitFlag without hit at %0t", $realtime);
      end else n_empty++;
      edge_t += 75000;
    end
    gro_en = 1'b1;
    #50_000 gro_en = 1'b0;
    #10_000;
    check_req("hit cycles", n_hit);
    check_req("empty cycles", n_empty);
    check_req("readings beyond one ring turn", n_multi_turn);
    check_req("coarse counter A chosen", n_sel_a);
    check_req("coarse counter B chosen", n_sel_b);
    check_req("TOT strobe after CAL strobe", n_long_tot);
    check_req("calibration spacing 3.125 ns", n_cal4);
    check_req("calibration spacing 6.25 ns", n_cal8);
    check_req("GRO oscillation", n_gro_edges);
    check_req("DMRO frames", n_frames);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
