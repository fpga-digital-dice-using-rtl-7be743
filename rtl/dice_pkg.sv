// dice_pkg: types and constants shared by the digital-dice modules.
//
// The display path carries one 4-bit code per digit. Codes 0-9 are decimal
// digits; two further codes are used as glyphs: 4'hD draws a lower-case "d"
// (dice-type prefix and the reset pattern "dddd") and 4'hF blanks the digit.
// Codes A, B, C and E never occur in normal operation; the decoder shows them
// as hexadecimal letters.
//
// The dice table (2, 4, 6, 8, 10, 12, 20 and 100 sides, selected by a 3-bit
// index that wraps in both directions) and the set-mode display patterns
// "d2", "d4" ... "d100" follow the published design. The glyph encoding of the
// seven-segment decoder is this implementation's own choice.
package dice_pkg;

  typedef logic [3:0] digit_t;

  localparam digit_t DIGIT_D     = 4'hD;   // "d" glyph
  localparam digit_t DIGIT_BLANK = 4'hF;   // digit switched off

  // Four display digits, thousands position first (leftmost on the display).
  typedef struct packed {
    digit_t thou;
    digit_t huns;
    digit_t tens;
    digit_t ones;
  } digits4_t;

  typedef logic [2:0] dice_idx_t;
  typedef logic [6:0] sides_t;

  // Number of sides of dice type idx.
  function automatic sides_t dice_sides(dice_idx_t idx);
    case (idx)
      3'd0:    return 7'd2;
      3'd1:    return 7'd4;
      3'd2:    return 7'd6;
      3'd3:    return 7'd8;
      3'd4:    return 7'd10;
      3'd5:    return 7'd12;
      3'd6:    return 7'd20;
      default: return 7'd100;
    endcase
  endfunction

  // Set-mode display pattern of dice type idx: "d" then the side count,
  // left aligned, unused positions blank.
  function automatic digits4_t dice_label(dice_idx_t idx);
    digits4_t l;
    l.thou = DIGIT_D;
    case (idx)
      3'd0:    begin l.huns = 4'd2; l.tens = DIGIT_BLANK; l.ones = DIGIT_BLANK; end
      3'd1:    begin l.huns = 4'd4; l.tens = DIGIT_BLANK; l.ones = DIGIT_BLANK; end
      3'd2:    begin l.huns = 4'd6; l.tens = DIGIT_BLANK; l.ones = DIGIT_BLANK; end
      3'd3:    begin l.huns = 4'd8; l.tens = DIGIT_BLANK; l.ones = DIGIT_BLANK; end
      3'd4:    begin l.huns = 4'd1; l.tens = 4'd0;        l.ones = DIGIT_BLANK; end
      3'd5:    begin l.huns = 4'd1; l.tens = 4'd2;        l.ones = DIGIT_BLANK; end
      3'd6:    begin l.huns = 4'd2; l.tens = 4'd0;        l.ones = DIGIT_BLANK; end
      default: begin l.huns = 4'd1; l.tens = 4'd0;        l.ones = 4'd0;        end
    endcase
    return l;
  endfunction

  // XORshift step of the published design: shifts 7 right, 9 left, 13 right.
  function automatic logic [31:0] xorshift32(logic [31:0] x);
    logic [31:0] t1, t2;
    t1 = x  ^ (x  >> 7);
    t2 = t1 ^ (t1 << 9);
    return t2 ^ (t2 >> 13);
  endfunction

endpackage
