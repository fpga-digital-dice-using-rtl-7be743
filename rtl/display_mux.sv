// display_mux: chooses what the four display digits show.
//
// In set mode the dice-type pattern from the button logic is shown as it is.
// Otherwise the roll digits are shown with leading zeros blanked: thousands
// is blank when zero, hundreds when it and thousands are zero, tens when all
// three upper digits are zero, and ones whenever it is zero. This follows the
// published design, whose process is sensitive to every sysclk change and so
// acts as plain combinational logic; here it is written as such.
module display_mux
  import dice_pkg::*;
(
  input  logic     setmode,
  input  digits4_t set_digits,
  input  digits4_t rand_digits,
  output digits4_t bcd
);
  always_comb begin
    if (setmode) begin
      bcd = set_digits;
    end else begin
      bcd.thou = (rand_digits.thou == 4'd0) ? DIGIT_BLANK : rand_digits.thou;
      bcd.huns = (rand_digits.huns == 4'd0 && rand_digits.thou == 4'd0)
                 ? DIGIT_BLANK : rand_digits.huns;
      bcd.tens = (rand_digits.tens == 4'd0 && rand_digits.huns == 4'd0 &&
                  rand_digits.thou == 4'd0) ? DIGIT_BLANK : rand_digits.tens;
      bcd.ones = (rand_digits.ones == 4'd0) ? DIGIT_BLANK : rand_digits.ones;
    end
  end
endmodule
