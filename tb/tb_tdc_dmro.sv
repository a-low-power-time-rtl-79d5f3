// tb_tdc_dmro: self-checking testbench of the Diagnostic-Mode Read-Out.
//
// Loads a random 30-bit word every 32 serial clocks, receives the serial
// stream bit by bit, checks the 2'b10 header at the start of every frame and
// descrambles the 30 payload bits with a bit-serial x^58 + x^39 + 1
// descrambler (the receiver's view), comparing them with the word sent.
// Also checks that a frame takes exactly 32 bit periods (1.28 Gb/s at
// 40 MHz) and that the scrambled payload differs from the plain one.
module tb_tdc_dmro;
  timeunit 1ps; timeprecision 1fs;

  localparam realtime TCK = 781.25;

  logic clk1g28 = 1'b0, rst_n = 1'b1, frame_load = 1'b0;
  logic [29:0] data = '0;
  logic sout;
  int checks = 0, failures = 0;

  tdc_dmro dut (.*);

  always #(TCK / 2) clk1g28 = ~clk1g28;

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [29:0] sent [$];
  int n_scrambled_differs = 0;

  initial begin : stim
    #1 rst_n = 1'b0;
    #(3 * TCK) rst_n = 1'b1;
    for (int f = 0; f < 300; f++) begin
      @(negedge clk1g28);
      data = (f % 10 == 0) ? 30'h0 : 30'($urandom);
      sent.push_back(data);
      frame_load = 1'b1;
      @(negedge clk1g28);
      frame_load = 1'b0;
      repeat (30) @(negedge clk1g28);
    end
    repeat (40) @(negedge clk1g28);
    checks++;
    if (n_scrambled_differs < 200) begin
      failures++;
      $display("FAIL: payload looks unscrambled (%0d)", n_scrambled_differs);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Receiver: frames start on the clock edge that loads the word.
  initial begin : rx
    logic [57:0] s = '0;
    logic [31:0] frame;
    logic [29:0] plain, exp;
    forever begin
      @(posedge clk1g28);
      if (frame_load) begin
        for (int b = 31; b >= 0; b--) begin
          @(negedge clk1g28);
          frame[b] = sout;
        end
        exp = sent.pop_front();
        for (int b = 29; b >= 0; b--) begin
          plain[b] = frame[b] ^ s[38] ^ s[57];
          s = {s[56:0], frame[b]};
        end
        checks++;
        if (frame[31:30] != 2'b10) begin
          failures++;
          $display("FAIL header %b", frame[31:30]);
        end
        checks++;
        if (plain != exp) begin
          failures++;
          $display("FAIL payload %h expected %h", plain, exp);
        end
        if (frame[29:0] != exp) n_scrambled_differs++;
      end
    end
  end
endmodule
