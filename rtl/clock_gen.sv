// clock_gen: the timing base of the dice.
//
// Five dividers count the 12 MHz board clock down to the rates the dice uses:
// 1000 Hz (UART bit rate and message pacing), 1500 Hz (generated but not used
// by any other block, as in the published design), 500 Hz (display scan),
// about 10 Hz (tilt sampling, buttons, seed and roll updates) and a 5 s
// period (keep-awake). The half-period counts are the published ones:
// 6000, 4000, 12000, 600024 and 30001200 sysclk cycles. With a 12 MHz clock
// the 10 Hz clock is 9.9996 Hz and the slow clock has a period of 5.0002 s.
//
// Each rate is delivered both as a square wave (*_clk) and as a one-cycle
// strobe (*_tick) marking the sysclk edge on which the square wave rises.
// Downstream blocks are clocked by sysclk and enabled by the strobes; the
// published design clocked them by the divided signals directly.
// Reset is asynchronous and active low.
module clock_gen #(
  parameter int unsigned HALF_1000HZ = 6000,
  parameter int unsigned HALF_1500HZ = 4000,
  parameter int unsigned HALF_500HZ  = 12000,
  parameter int unsigned HALF_10HZ   = 600024,
  parameter int unsigned HALF_5S     = 30001200
) (
  input  logic clk,
  input  logic rst_n,
  output logic clk1000_clk,
  output logic clk1000_tick,
  output logic clk1500_clk,
  output logic clk1500_tick,
  output logic clk500_clk,
  output logic clk500_tick,
  output logic clk10_clk,
  output logic clk10_tick,
  output logic clk5s_clk,
  output logic clk5s_tick
);
  clk_div #(.HALF(HALF_1000HZ)) u_1000hz (.clk, .rst_n, .clk_o(clk1000_clk), .rise_o(clk1000_tick));
  clk_div #(.HALF(HALF_1500HZ)) u_1500hz (.clk, .rst_n, .clk_o(clk1500_clk), .rise_o(clk1500_tick));
  clk_div #(.HALF(HALF_500HZ))  u_500hz  (.clk, .rst_n, .clk_o(clk500_clk),  .rise_o(clk500_tick));
  clk_div #(.HALF(HALF_10HZ))   u_10hz   (.clk, .rst_n, .clk_o(clk10_clk),   .rise_o(clk10_tick));
  clk_div #(.HALF(HALF_5S))     u_5s     (.clk, .rst_n, .clk_o(clk5s_clk),   .rise_o(clk5s_tick));
endmodule
