// tb_tdc_toa_sweep: dedicated TOA measurement and self-calibration.
//
// Reproduces the TOA test of the chip on three copies of the TDC whose ring
// has different gate delays: nominal (17.8 ps), slow (21.0 ps, as at a low
// supply voltage or high temperature) and uneven (16.8 ps for a rising and
// 18.8 ps for a falling output, the even/odd effect).  A 6.25 ns pulse is
// sent every second 40 MHz cycle and its arrival before the CLK40M edge is
// swept in 5 ps steps over 0.3..11.9 ns, so the whole TOA range is covered
// evenly.  The testbench checks:
//   - every hit's TOA code against the pulse timing (nominal copy),
//   - the transfer function: a least-squares fit of code against time gives
//     the average gate delay of each copy within 0.5 %,
//   - the CAL code: (3.125 ns / gate delay) within one bin, every hit,
//   - self-calibration: bin = 3.125 ns / mean(CAL) matches each copy's gate
//     delay within 1 %, and TOA * bin recovers the true interval within two
//     bins for the slow copy, where the nominal bin would be 15 % off,
//   - the DNL: flat (|DNL| < 0.35, the quantization of a 5 ps sweep) for the nominal copy; in the uneven copy
//     the mean width of even and odd codes differs by the rise/fall ratio.
module tb_tdc_toa_sweep;
  timeunit 1ps; timeprecision 1fs;

  localparam real TCK = 781.25, TG = 30.0, TS = 400.0, SPACING = 3125.0;
  localparam int  NDUT = 3;
  localparam real TD_R [NDUT] = '{17.8, 21.0, 16.8};
  localparam real TD_F [NDUT] = '{17.8, 21.0, 18.8};

  logic       clk1g28 = 1'b0, rst_n = 1'b1, pulse = 1'b0;
  logic [9:0] toa_code [NDUT], cal_code [NDUT];
  logic [8:0] tot_code [NDUT];
  logic       hit_flag [NDUT];
  logic       dmro_sout [NDUT], gro_out [NDUT];
  int checks = 0, failures = 0;

  tdc_top #(.TD_RISE_PS(17.8), .TD_FALL_PS(17.8)) dut_nom (
    .clk1g28, .rst_n, .pulse, .cal_dly(5'd4), .gro_en(1'b0),
    .toa_code(toa_code[0]), .tot_code(tot_code[0]), .cal_code(cal_code[0]),
    .hit_flag(hit_flag[0]), .dmro_sout(dmro_sout[0]), .gro_out(gro_out[0])
  );
  tdc_top #(.TD_RISE_PS(21.0), .TD_FALL_PS(21.0)) dut_slow (
    .clk1g28, .rst_n, .pulse, .cal_dly(5'd4), .gro_en(1'b0),
    .toa_code(toa_code[1]), .tot_code(tot_code[1]), .cal_code(cal_code[1]),
    .hit_flag(hit_flag[1]), .dmro_sout(dmro_sout[1]), .gro_out(gro_out[1])
  );
  tdc_top #(.TD_RISE_PS(16.8), .TD_FALL_PS(18.8)) dut_uneven (
    .clk1g28, .rst_n, .pulse, .cal_dly(5'd4), .gro_en(1'b0),
    .toa_code(toa_code[2]), .tot_code(tot_code[2]), .cal_code(cal_code[2]),
    .hit_flag(hit_flag[2]), .dmro_sout(dmro_sout[2]), .gro_out(gro_out[2])
  );

  always #(TCK / 2) clk1g28 = ~clk1g28;

  initial begin
    #1_000_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // statistics per copy
  real sx [NDUT], sy [NDUT], sxx [NDUT], sxy [NDUT], scal [NDUT];
  int  nfit [NDUT];
  int  hist [NDUT][1024];
  real tau_list [$];
  int  code_slow [$];

  initial begin : stim
    realtime edge_t, t_start, tau;
    real td, bin_cal, slope, mean_even, mean_odd, avg;
    int e_toa, n_even, n_odd, lo, hi, max_err, code;
    for (int d = 0; d < NDUT; d++) begin
      sx[d] = 0; sy[d] = 0; sxx[d] = 0; sxy[d] = 0; scal[d] = 0; nfit[d] = 0;
      for (int c = 0; c < 1024; c++) hist[d][c] = 0;
    end
    #1 rst_n = 1'b0;
    #(10 * TCK) rst_n = 1'b1;
    @(posedge dut_nom.clk40m);
    edge_t = $realtime + 25000;
    for (int arrive = 300; arrive <= 11900; arrive += 5) begin
      #(edge_t - arrive - $realtime);
      pulse = 1'b1;
      t_start = $realtime + TG;
      #(6250) pulse = 1'b0;
      tau = edge_t + TG + TS - t_start;
      #(edge_t + 25000 + 200 - $realtime);
      for (int d = 0; d < NDUT; d++) begin
        td = (TD_R[d] + TD_F[d]) / 2.0;
        if (!hit_flag[d]) begin
          check("hitFlag", 1'b0);
          continue;
        end
        code = int'(toa_code[d]);
        sx[d] += tau; sy[d] += code; sxx[d] += tau * tau; sxy[d] += tau * code;
        scal[d] += cal_code[d];
        nfit[d]++;
        hist[d][code]++;
        if (d == 0) begin
          e_toa = int'($floor(tau / td));
          check($sformatf("TOA %0d expected %0d", code, e_toa),
                code >= e_toa - 1 && code <= e_toa + 1);
        end
        check($sformatf("CAL %0d of copy %0d", cal_code[d], d),
              real'(cal_code[d]) >= SPACING / td - 1.5 && real'(cal_code[d]) <= SPACING / td + 1.5);
        if (d == 1) begin
          tau_list.push_back(tau);
          code_slow.push_back(code);
        end
      end
      edge_t += 50000;
    end
    for (int d = 0; d < NDUT; d++) begin
      td = (TD_R[d] + TD_F[d]) / 2.0;
      slope = (nfit[d] * sxy[d] - sx[d] * sy[d]) / (nfit[d] * sxx[d] - sx[d] * sx[d]);
      bin_cal = SPACING / (scal[d] / nfit[d]);
      $display("copy %0d: gate %0.2f ps, fitted bin %0.3f ps, mean CAL %0.2f, self-calibrated bin %0.3f ps",
               d, td, 1.0 / slope, scal[d] / nfit[d], bin_cal);
      check("fitted bin size", (1.0 / slope) > td * 0.995 && (1.0 / slope) < td * 1.005);
      check("self-calibrated bin size", bin_cal > td * 0.99 && bin_cal < td * 1.01);
      // DNL over the codes fully inside the sweep
      lo = int'($ceil(sx[d] / nfit[d] / td)) - 200;
      hi = lo + 400;
      avg = 0; mean_even = 0; mean_odd = 0; n_even = 0; n_odd = 0;
      for (int c = lo; c < hi; c++) avg += hist[d][c];
      avg /= (hi - lo);
      for (int c = lo; c < hi; c++) begin
        if (c % 2 == 0) begin mean_even += hist[d][c]; n_even++; end
        else            begin mean_odd  += hist[d][c]; n_odd++;  end
        if (d == 0)
          check($sformatf("DNL of code %0d = %0.2f", c, hist[d][c] / avg - 1.0),
                hist[d][c] / avg - 1.0 < 0.35 && hist[d][c] / avg - 1.0 > -0.35);
      end
      mean_even /= n_even; mean_odd /= n_odd;
      $display("copy %0d: mean count of even codes %0.2f, odd codes %0.2f", d, mean_even, mean_odd);
      if (d == 2) begin
        // widths alternate between the rise and the fall delay
        check("even/odd effect visible",
              (mean_even > mean_odd ? mean_even / mean_odd : mean_odd / mean_even) > 1.07);
      end
    end
    // self-calibrated times of the slow copy
    bin_cal = SPACING / (scal[1] / nfit[1]);
    max_err = 0;
    foreach (tau_list[i]) begin
      int err;
      err = int'((code_slow[i] * bin_cal - tau_list[i]) / bin_cal);
      if (err < 0) err = -err;
      if (err > max_err) max_err = err;
    end
    $display("slow copy: largest error of self-calibrated time %0d bins", max_err);
    check("self-calibrated time error", max_err <= 2);
    check("nominal bin would be wrong", (bin_cal - 17.8) / 17.8 > 0.1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
