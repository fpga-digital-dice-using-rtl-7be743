// segment_tb: self-checking test of the display multiplexer.
//
// After reset all digits must be off and the segments must show "d". Then,
// with random BCD words changing between strobes, every scan strobe must
// light exactly the next digit (ones, tens, hundreds, thousands, ones ...)
// and drive the active-low pattern of that digit's code from an independent
// glyph table. The enables must not move between strobes.
module segment_tb;
  import dice_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, tick = 1'b0;
  digits4_t bcd = '0;
  logic [3:0] an;
  logic [6:0] seg;
  int checks = 0, failures = 0;

  // gfedcba, 1 = lit
  logic [6:0] glyph_tab [16] = '{7'b0111111, 7'b0000110, 7'b1011011, 7'b1001111,
                                 7'b1100110, 7'b1101101, 7'b1111101, 7'b0000111,
                                 7'b1111111, 7'b1101111, 7'b1110111, 7'b1111100,
                                 7'b0111001, 7'b1011110, 7'b1111001, 7'b0000000};

  segment dut (.clk, .rst_n, .tick, .bcd, .an, .seg);

  always #5 clk = ~clk;

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int k;
    logic [3:0] code;
    repeat (2) @(negedge clk);
    checks++;
    if (an !== 4'b0000 || seg !== ~7'b1011110) begin
      failures++; $display("reset: an %b seg %b", an, seg);
    end
    rst_n = 1'b1;
    repeat (3) @(negedge clk);
    checks++;
    if (an !== 4'b0000) begin failures++; $display("digits lit before first strobe"); end
    for (int n = 0; n < 400; n++) begin
      bcd = 16'($urandom);
      k = n % 4;
      code = bcd[4*k +: 4];
      @(negedge clk) tick = 1'b1;
      @(negedge clk) tick = 1'b0;
      checks++;
      if (an !== (4'b0001 << k) || seg !== ~glyph_tab[code]) begin
        failures++; $display("strobe %0d: an %b seg %b, expected digit %0d code %h", n, an, seg, k, code);
      end
      bcd = 16'($urandom);
      repeat (3) @(negedge clk);
      checks++;
      if (an !== (4'b0001 << k)) begin failures++; $display("enable moved between strobes"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
