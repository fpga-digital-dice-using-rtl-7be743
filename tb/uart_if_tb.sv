// uart_if_tb: self-checking test of the UART logging path.
//
// Bit strobes come every 4 clocks; the roll digits change at random moments.
// A receiver in the testbench samples the line once per strobe, decodes
// frames (start, 8 data bits LSB first, no parity, stop) and checks each byte
// against {tens digit, units digit} as they were when the frame started, and
// checks the pacing: one message every 12 bit times.
module uart_if_tb;
  import dice_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, tick = 1'b0;
  digits4_t rand_digits;
  logic uart_txd, uart_valid;
  int checks = 0, failures = 0, frames = 0, valids = 0;

  uart_if dut (.clk, .rst_n, .tick, .rand_digits, .uart_txd, .uart_valid);

  always #5 clk = ~clk;

  initial begin
    #10ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n, last_start, phase;
    logic [7:0] exp_b, got;
    rand_digits = 16'h012F;
    n = 0; last_start = -1; phase = -1;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    while (frames < 60) begin
      logic [7:0] cur;
      cur = {rand_digits.huns, rand_digits.tens};
      @(negedge clk) tick = 1'b1;
      @(negedge clk) tick = 1'b0;
      repeat (2) @(negedge clk);
      n++;
      if (uart_valid) valids++;
      if (phase < 0) begin
        if (uart_txd === 1'b0) begin
          if (last_start >= 0) begin
            checks++;
            if (n - last_start != 12) begin failures++; $display("message spacing %0d bit times", n - last_start); end
          end
          last_start = n; exp_b = cur; phase = 0;
        end
      end else if (phase < 8) begin
        got[phase] = uart_txd;
        phase++;
      end else begin
        checks++;
        if (uart_txd !== 1'b1) begin failures++; $display("missing stop bit"); end
        checks++;
        if (got !== exp_b) begin failures++; $display("byte %h expected %h", got, exp_b); end
        frames++;
        phase = -1;
      end
      if (($urandom % 7) == 0) begin
        rand_digits.thou = 4'($urandom % 2);
        rand_digits.huns = 4'($urandom % 10);
        rand_digits.tens = 4'($urandom % 10);
      end
    end
    checks++;
    if (valids != frames) begin failures++; $display("uart_valid pulses %0d for %0d frames", valids, frames); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
