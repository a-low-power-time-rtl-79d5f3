// tb_tdc_tot_sweep: dedicated TOT measurement at 100 % occupancy.
//
// Reproduces the TOT test of the chip with the TDC at its default size: one
// pulse in every 40 MHz cycle, always arriving 5 ns before the CLK40M edge,
// with a width that grows by 5 ps per pulse from 0.4 ns to 10.2 ns.  Checks:
//   - a hit (hitFlag) in every cycle and each TOT code against the pulse
//     width (allowing one LSB),
//   - the TOA code stays the same for every pulse (the arrival is fixed),
//   - the transfer function: a least-squares fit of TOT code against width
//     gives the average TOT bin, 126 gate delays per 64 codes (35.04 ps),
//     within 0.5 %,
//   - the narrow bins: codes 32, 64, 96, ... are one gate delay wide, so they
//     collect about half as many pulses as the others.
module tb_tdc_tot_sweep;
  timeunit 1ps; timeprecision 1fs;
  import tb_tdc_model_pkg::*;

  localparam real TCK = 781.25, TD = 17.8, TG = 30.0, TS = 400.0;
  localparam int  ARRIVE = 5000;

  logic       clk1g28 = 1'b0, rst_n = 1'b1, pulse = 1'b0;
  logic [9:0] toa_code, cal_code;
  logic [8:0] tot_code;
  logic       hit_flag, dmro_sout, gro_out;
  int checks = 0, failures = 0;

  tdc_top dut (
    .clk1g28, .rst_n, .pulse, .cal_dly(5'd4), .gro_en(1'b0),
    .toa_code, .tot_code, .cal_code, .hit_flag, .dmro_sout, .gro_out
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
      $display("FAIL %s at %0t", what, $realtime);
    end
  endtask

  int  exp_q [$];
  real w_q [$];
  realtime edge_q [$];
  int  hist [512];
  real sx = 0, sy = 0, sxx = 0, sxy = 0;
  int  nfit = 0, first_toa = -1;
  bit  done = 0;

  // Checker: results of the hit measured at CLK40M edge k appear after k+1.
  initial begin : mon
    int e, code;
    real w;
    @(posedge rst_n);
    forever begin
      @(posedge dut.clk40m);
      #200;
      if (exp_q.size() == 0 || edge_q[0] > $realtime - 25000) begin
        if (done && exp_q.size() == 0) break;
        continue;
      end
      void'(edge_q.pop_front());
      e = exp_q.pop_front();
      w = w_q.pop_front();
      check("hitFlag every cycle", hit_flag);
      code = int'(tot_code);
      check($sformatf("TOT %0d expected %0d", code, e), code >= e - 1 && code <= e + 1);
      if (first_toa < 0) first_toa = int'(toa_code);
      else check("TOA constant", int'(toa_code) >= first_toa - 1 && int'(toa_code) <= first_toa + 1);
      hist[code]++;
      sx += w; sy += code; sxx += w * w; sxy += w * code; nfit++;
    end
  end

  initial begin : stim
    realtime edge_t;
    real slope, narrow, wide;
    int n_narrow, n_wide;
    for (int c = 0; c < 512; c++) hist[c] = 0;
    #1 rst_n = 1'b0;
    #(10 * TCK) rst_n = 1'b1;
    @(posedge dut.clk40m);
    edge_t = $realtime + 25000;
    for (int width = 400; width <= 10200; width += 5) begin
      #(edge_t - ARRIVE - $realtime);
      pulse = 1'b1;
      // results of this hit are read one cycle after edge_t
      exp_q.push_back(tot_expect(int'($floor((width + TS) / TD))));
      w_q.push_back(width);
      edge_q.push_back(edge_t);
      #(width) pulse = 1'b0;
      edge_t += 25000;
    end
    done = 1;
    #(75000);
    check("all hits read", exp_q.size() == 0 && nfit == (10200 - 400) / 5 + 1);
    slope = (nfit * sxy - sx * sy) / (nfit * sxx - sx * sx);
    $display("fitted TOT bin %0.3f ps (126 gate delays / 64 codes: %0.3f ps)", 1.0 / slope, 126 * TD / 64);
    check("TOT bin size", 1.0 / slope > 126 * TD / 64 * 0.995 && 1.0 / slope < 126 * TD / 64 * 1.005);
    narrow = 0; wide = 0; n_narrow = 0; n_wide = 0;
    for (int c = 40; c < 280; c++) begin
      if (c % 32 == 0) begin narrow += hist[c]; n_narrow++; end
      else             begin wide   += hist[c]; n_wide++;   end
    end
    narrow /= n_narrow; wide /= n_wide;
    $display("mean count of codes 64, 96, ...: %0.2f, of the others: %0.2f", narrow, wide);
    check("narrow TOT bins at multiples of 32", narrow / wide > 0.35 && narrow / wide < 0.65);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
