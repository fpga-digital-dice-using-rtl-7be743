// roll_proc_tb: self-checking test of the roll-to-digits stage.
//
// For every dice type and random 32-bit words, strobes the stage while not
// upright and checks the held digits against a reference (word mod sides,
// plus 1, hundreds/tens/units placed in thou/huns/tens, ones blank). While
// upright the digits must hold. Also checks the reset pattern "dddd", that
// every face of a d6 and of a d100 (including 100) is produced, and that no
// result leaves 1..sides.
module roll_proc_tb;
  import dice_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, tick = 1'b0, upright = 1'b0;
  logic [31:0] rand_i = '0;
  sides_t diceval = 7'd2;
  digits4_t rand_digits;
  logic [15:0] exp_d;
  int checks = 0, failures = 0;
  int unsigned sides_tab [8] = '{2, 4, 6, 8, 10, 12, 20, 100};
  bit seen6 [1:6];
  bit seen100 [1:100];

  roll_proc dut (.clk, .rst_n, .tick, .upright, .rand_i, .diceval, .rand_digits);

  always #5 clk = ~clk;

  initial begin
    #10ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic roll(input logic [31:0] r, input int unsigned sides, input logic up);
    int unsigned face;
    rand_i = r; diceval = 7'(sides); upright = up;
    @(negedge clk) tick = 1'b1;
    @(negedge clk) tick = 1'b0;
    if (!up) begin
      face = (r % sides) + 1;
      if (sides == 6) seen6[face] = 1'b1;
      if (sides == 100) seen100[face] = 1'b1;
      exp_d = {4'(face / 100), 4'((face / 10) % 10), 4'(face % 10), 4'hF};
    end
    checks++;
    if (rand_digits !== exp_d) begin
      failures++; $display("rand %h sides %0d up %b: digits %h expected %h", r, sides, up, rand_digits, exp_d);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    checks++;
    if (rand_digits !== 16'hDDDD) begin failures++; $display("reset pattern %h", rand_digits); end
    rst_n = 1'b1;
    exp_d = 16'hDDDD;
    // Held while upright, even across strobes.
    roll(32'h12345678, 6, 1'b1);
    roll(32'd99, 100, 1'b0);                      // 100
    roll(32'hFFFFFFFF, 100, 1'b1);                // held at 100
    for (int i = 0; i < 3000; i++)
      roll($urandom, sides_tab[$urandom % 8], ($urandom % 5) == 0);
    for (int i = 0; i < 2000; i++) roll($urandom, 100, 1'b0);
    for (int f = 1; f <= 6; f++) begin
      checks++;
      if (!seen6[f]) begin failures++; $display("d6 face %0d never seen", f); end
    end
    for (int f = 1; f <= 100; f++) begin
      checks++;
      if (!seen100[f]) begin failures++; $display("d100 face %0d never seen", f); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
