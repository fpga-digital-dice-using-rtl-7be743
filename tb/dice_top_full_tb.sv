// dice_top_full_tb: the dice at its real clock rates, driven from a 12 MHz
// (simulated 10-unit period) clock: one power-up, six rolls of various dice
// types and the keep-awake shutdown, about 32 s of dice time. dice_env plays
// the user and checks the pins.
module dice_top_full_tb;
  logic        sysclk, tilt, btnU, btnD, onpin, dp, uart_rxd_out, xadc_den, xadc_eoc;
  logic [1:0]  btn, led;
  logic [6:0]  seg, xadc_daddr;
  logic [3:0]  an;
  logic [15:0] xadc_do;

  dice_top dut (
    .sysclk, .tilt, .btnU, .btnD, .btn, .onpin, .seg, .dp, .an, .led, .uart_rxd_out,
    .xadc_daddr, .xadc_den, .xadc_eoc, .xadc_do);

  dice_env env (
    .sysclk, .tilt, .btnU, .btnD, .btn, .onpin, .seg, .dp, .an, .led, .uart_rxd_out,
    .xadc_daddr, .xadc_den, .xadc_eoc, .xadc_do);
endmodule
