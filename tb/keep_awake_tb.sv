// keep_awake_tb: self-checking test of the battery keep-awake pulse.
//
// With keepon set, onpin and clk5 must toggle on every 5 s strobe (onpin
// starting high after reset, clk5 low) and hold between strobes. After keepon
// is cleared both must go low on the next strobe and stay low.
module keep_awake_tb;
  logic clk = 1'b0, rst_n = 1'b0, tick = 1'b0, keepon = 1'b1;
  logic onpin, clk5, e_on, e_c5;
  int checks = 0, failures = 0;

  keep_awake dut (.clk, .rst_n, .tick, .keepon, .onpin, .clk5);

  always #5 clk = ~clk;

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cycle(input logic t);
    tick = t;
    @(negedge clk);
    tick = 1'b0;
    if (t) begin
      if (keepon) begin e_on = ~e_on; e_c5 = ~e_c5; end
      else begin e_on = 1'b0; e_c5 = 1'b0; end
    end
    checks++;
    if (onpin !== e_on || clk5 !== e_c5) begin
      failures++; $display("onpin %b/%b clk5 %b/%b", onpin, e_on, clk5, e_c5);
    end
  endtask

  initial begin
    e_on = 1'b1; e_c5 = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    cycle(1'b0);
    for (int i = 0; i < 200; i++) cycle(($urandom % 4) == 0);
    keepon = 1'b0;
    for (int i = 0; i < 100; i++) cycle(($urandom % 4) == 0);
    checks++;
    if (onpin !== 1'b0 || clk5 !== 1'b0) begin failures++; $display("not off after keepon cleared"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
