// segment: drives a 4-digit multiplexed seven-segment display.
//
// One digit is lit at a time. On every scan strobe (500 Hz in the dice, so each
// digit is lit for 2 ms and the display refreshes at 125 Hz) the digit index
// advances, the one-hot digit enable an_r moves with it, and the BCD code of
// the newly selected digit is decoded into segment_r. bcd[4*k+3:4*k] is shown
// on digit k, and an[k] enables digit k, so bcd[15:12] appears on an[3].
// Codes 0-9 give digits, 4'hD a lower-case "d", 4'hF a blank digit and
// A, B, C, E the hexadecimal letters.
//
// The published design gives this block's behaviour (scan through the digits
// with an internal an_r, decode into segment_r, on reset switch all digits off
// and load "dddd") but not its code. Polarities are this implementation's
// choice, made for a common-anode display wired straight to the FPGA: an is
// active high (a digit's common anode is driven high to light it) and seg is
// active low, seg[0] = segment a ... seg[6] = segment g. The colon/decimal
// point of the dice, driven directly with the upright flag and lit while the
// dice tumbles, is consistent with active-low segments.
// Reset (asynchronous, active low): all digits off, segments set to "d".
module segment
  import dice_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        tick,     // scan strobe
  input  digits4_t    bcd,
  output logic [3:0]  an,       // digit enables, active high
  output logic [6:0]  seg       // segments g..a, active low
);
  // Active-high segment pattern, bit 6 = g ... bit 0 = a.
  function automatic logic [6:0] glyph(digit_t d);
    case (d)
      4'h0: return 7'h3F;
      4'h1: return 7'h06;
      4'h2: return 7'h5B;
      4'h3: return 7'h4F;
      4'h4: return 7'h66;
      4'h5: return 7'h6D;
      4'h6: return 7'h7D;
      4'h7: return 7'h07;
      4'h8: return 7'h7F;
      4'h9: return 7'h6F;
      4'hA: return 7'h77;
      4'hB: return 7'h7C;
      4'hC: return 7'h39;
      4'hD: return 7'h5E;
      4'hE: return 7'h79;
      default: return 7'h00;   // 4'hF: blank
    endcase
  endfunction

  logic [1:0] sel, sel_n;
  logic [3:0] an_r;
  logic [6:0] segment_r;
  digit_t     cur;

  assign sel_n = sel + 1'b1;
  always_comb begin
    case (sel_n)
      2'd0:    cur = bcd.ones;
      2'd1:    cur = bcd.tens;
      2'd2:    cur = bcd.huns;
      default: cur = bcd.thou;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel       <= 2'd3;
      an_r      <= 4'b0000;
      segment_r <= ~glyph(DIGIT_D);
    end else if (tick) begin
      sel       <= sel_n;
      an_r      <= 4'b0001 << sel_n;
      segment_r <= ~glyph(cur);
    end
  end

  // At most one digit is ever lit.
  a_one_digit: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(an_r));

  assign an  = an_r;
  assign seg = segment_r;
endmodule
