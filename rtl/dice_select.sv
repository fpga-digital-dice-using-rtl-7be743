// dice_select: button handling of the dice.
//
// Everything here advances on the 10 Hz strobe. The up and down buttons are
// first registered (btn_u_r, btn_d_r). While the dice is upright:
//   * up and down together clear keepon, which lets the battery module shut
//     the dice down; keepon stays cleared until reset;
//   * up alone enters set mode and steps the dice type forward
//     (2, 4, 6, 8, 10, 12, 20, 100, wrapping to 2);
//   * down alone enters set mode and steps it backward, wrapping to 100;
//   * the set-mode display pattern (set_digits, "d" followed by the side
//     count) and the side count used for rolling (diceval) are reloaded from
//     the dice type index as it was before this strobe's step.
// When the dice is not upright, set mode is left and nothing else changes.
// A held button keeps stepping once per strobe. Because the pattern and
// diceval are loaded from the old index, they show a new selection one strobe
// after the index changes, exactly as in the published design.
//
// Reset (asynchronous, active low): index 0, diceval 2, set mode off,
// keepon on, pattern all zero.
module dice_select
  import dice_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     tick,        // 10 Hz strobe
  input  logic     btn_u,
  input  logic     btn_d,
  input  logic     upright,
  output logic     setmode,
  output logic     keepon,
  output sides_t   diceval,
  output digits4_t set_digits,
  output dice_idx_t dselect
);
  logic btn_u_r, btn_d_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      btn_u_r    <= 1'b0;
      btn_d_r    <= 1'b0;
      dselect    <= '0;
      setmode    <= 1'b0;
      diceval    <= 7'd2;
      keepon     <= 1'b1;
      set_digits <= '0;
    end else if (tick) begin
      btn_u_r <= btn_u;
      btn_d_r <= btn_d;
      if (upright) begin
        if (btn_u_r && btn_d_r) begin
          keepon <= 1'b0;
        end else if (btn_u_r) begin
          setmode <= 1'b1;
          dselect <= dselect + 1'b1;      // 7 wraps to 0
        end else if (btn_d_r) begin
          setmode <= 1'b1;
          dselect <= dselect - 1'b1;      // 0 wraps to 7
        end
        set_digits <= dice_label(dselect);
        diceval    <= dice_sides(dselect);
      end else begin
        setmode <= 1'b0;
      end
    end
  end
endmodule
