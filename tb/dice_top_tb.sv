// dice_top_tb: end-to-end test of the dice with shortened clock dividers.
//
// The dividers are shortened so that a 10 Hz strobe comes every 400 clocks,
// a UART bit every 4, a scan step every 8 and a keep-awake strobe every
// 20000 (50 strobes of 10 Hz, as at full size). dice_env plays the user and
// checks the pins.
module dice_top_tb;
  logic        sysclk, tilt, btnU, btnD, onpin, dp, uart_rxd_out, xadc_den, xadc_eoc;
  logic [1:0]  btn, led;
  logic [6:0]  seg, xadc_daddr;
  logic [3:0]  an;
  logic [15:0] xadc_do;

  dice_top #(.HALF_1000HZ(2), .HALF_1500HZ(3), .HALF_500HZ(4), .HALF_10HZ(200), .HALF_5S(10000)) dut (
    .sysclk, .tilt, .btnU, .btnD, .btn, .onpin, .seg, .dp, .an, .led, .uart_rxd_out,
    .xadc_daddr, .xadc_den, .xadc_eoc, .xadc_do);

  dice_env #(.T10(400), .T5S(20000), .T500(8), .T1000(4), .ROLLS(6)) env (
    .sysclk, .tilt, .btnU, .btnD, .btn, .onpin, .seg, .dp, .an, .led, .uart_rxd_out,
    .xadc_daddr, .xadc_den, .xadc_eoc, .xadc_do);
endmodule
