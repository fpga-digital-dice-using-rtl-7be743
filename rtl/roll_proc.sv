// roll_proc: turns the raw random word into a dice result.
//
// On every 10 Hz strobe while the dice is not upright, the 32-bit random word
// is reduced to the range 1..diceval (rand mod diceval, plus 1) and split into
// decimal digits. The digits are placed one position to the left of where
// they would normally sit, so that the result is centred on the display:
// hundreds in thou, tens in huns, units in tens, and ones is blank. Updating
// at 10 Hz while the dice tumbles gives the scrambling effect; once the dice
// is upright the last digits are held, which is the rolled value.
// All of this follows the published design. Reset (asynchronous, active low)
// loads "d" into every digit, so the display reads "dddd" until the first
// roll. The modulo and divisions are combinational.
module roll_proc
  import dice_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        tick,      // 10 Hz strobe
  input  logic        upright,
  input  logic [31:0] rand_i,
  input  sides_t      diceval,
  output digits4_t    rand_digits
);
  logic [6:0] face;     // 1..100
  digits4_t   next;

  always_comb begin
    face      = (diceval == '0) ? 7'd1 : 7'(rand_i % 32'(diceval)) + 7'd1;
    next.ones = DIGIT_BLANK;
    next.tens = digit_t'(face % 7'd10);
    next.huns = digit_t'((face / 7'd10) % 7'd10);
    next.thou = digit_t'(face / 7'd100);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                rand_digits <= '{default: DIGIT_D};
    else if (tick && !upright) rand_digits <= next;
  end
endmodule
