// tilt_detect_tb: self-checking test of the upright detector.
//
// Drives the tilt input with long constant runs and random stretches, pulses
// the sample strobe every 4 clocks and compares upright after every strobe
// with a reference built from a software copy of the 10-sample history. It
// also checks the latencies: from reset with the switch closed upright must
// rise on the 8th strobe, and from a full history it must fall on the 5th
// strobe after the switch opens.
module tilt_detect_tb;
  logic clk = 1'b0, rst_n = 1'b0, sample = 1'b0, tilt = 1'b0, upright;
  int checks = 0, failures = 0;
  logic [9:0] hist;
  logic       exp_up;

  tilt_detect dut (.clk, .rst_n, .sample, .tilt, .upright);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic strobe(input logic t);
    tilt = t;
    @(negedge clk) sample = 1'b1;
    @(negedge clk) sample = 1'b0;
    exp_up = ($countones(hist) >= 7);
    hist   = {hist[8:0], t};
    repeat (2) @(negedge clk);
    checks++;
    if (upright !== exp_up) begin
      failures++;
      $display("mismatch: hist=%b upright=%b expected=%b", hist, upright, exp_up);
    end
  endtask

  initial begin
    int n;
    hist = '0; exp_up = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // Latency from reset with the switch closed.
    n = 0;
    for (int i = 1; i <= 12; i++) begin
      strobe(1'b1);
      if (upright && n == 0) n = i;
    end
    checks++;
    if (n != 8) begin failures++; $display("rise latency %0d, expected 8", n); end
    // Latency of the fall from a full history.
    n = 0;
    for (int i = 1; i <= 10; i++) begin
      strobe(1'b0);
      if (!upright && n == 0) n = i;
    end
    checks++;
    if (n != 5) begin failures++; $display("fall latency %0d, expected 5", n); end
    // Random stretches, biased so the count crosses the threshold often.
    for (int i = 0; i < 400; i++) strobe(($urandom % 100) < 70);
    // Reset in the middle clears the flag.
    rst_n = 1'b0; @(negedge clk); rst_n = 1'b1; hist = '0;
    checks++;
    if (upright !== 1'b0) begin failures++; $display("upright not cleared by reset"); end
    for (int i = 0; i < 20; i++) strobe(1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
