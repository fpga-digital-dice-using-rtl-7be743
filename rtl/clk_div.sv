// clk_div: square-wave divider with a rising-edge strobe.
//
// A counter runs from 0 to HALF-1 on every sysclk edge; when it wraps, the
// square-wave output clk_o toggles. clk_o therefore has a period of 2*HALF
// sysclk cycles, as in the counters of the published design.
//
// rise_o is high, combinationally, during the one sysclk cycle whose closing
// edge makes clk_o go from 0 to 1. Logic clocked by sysclk and enabled by
// rise_o updates at exactly the edge where the published design's logic,
// clocked by the divided clock itself, would update. Using a strobe instead of
// a derived clock keeps the whole design in one clock domain; that is this
// implementation's choice.
//
// Reset (rst_n, asynchronous, active low) clears the counter and clk_o.
module clk_div #(
  parameter int unsigned HALF = 6000   // sysclk cycles per half period
) (
  input  logic clk,
  input  logic rst_n,
  output logic clk_o,
  output logic rise_o
);
  localparam int unsigned W = (HALF > 1) ? $clog2(HALF) : 1;

  logic [W-1:0] cnt;
  logic         wrap;

  assign wrap   = (cnt == W'(HALF - 1));
  assign rise_o = wrap && !clk_o;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt   <= '0;
      clk_o <= 1'b0;
    end else if (wrap) begin
      cnt   <= '0;
      clk_o <= ~clk_o;
    end else begin
      cnt   <= cnt + 1'b1;
    end
  end
endmodule
