// tb_tdc_toa_recorder: self-checking testbench of the TOA recorder.
//
// Checks that a TOALATCH strobe copies C/CAC/CBC into A/CAA/CBA, that later
// changes of the inputs (the calibration strobe overwriting the TOA/CAL
// recorder) do not reach the outputs, and that hit_tgl flips once per strobe
// and is cleared by reset.
module tb_tdc_toa_recorder;
  timeunit 1ps; timeprecision 1fs;

  logic toalatch = 1'b1, rst_n = 1'b1;
  logic [62:0] c, a;
  logic [2:0] cac, cbc, caa, cba;
  logic hit_tgl;
  int checks = 0, failures = 0;

  tdc_toa_recorder dut (.*);

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
    logic [62:0] v;
    logic [2:0] va, vb;
    logic tgl = 1'b0;
    #1 rst_n = 1'b0;
    #50;
    check("hit_tgl after reset", longint'(hit_tgl), 0);
    rst_n = 1'b1;
    for (int n = 0; n < 500; n++) begin
      v = {$urandom, $urandom}; va = 3'($urandom); vb = 3'($urandom);
      c = v; cac = va; cbc = vb;
      #100 toalatch = 1'b0;
      #400 toalatch = 1'b1;
      tgl = ~tgl;
      #10;
      check("A", longint'(a), longint'(v));
      check("CAA", longint'(caa), longint'(va));
      check("CBA", longint'(cba), longint'(vb));
      check("hit_tgl", longint'(hit_tgl), longint'(tgl));
      c = ~v; cac = ~va; cbc = ~vb;
      #3000;
      check("A held", longint'(a), longint'(v));
      check("CBA held", longint'(cba), longint'(vb));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
