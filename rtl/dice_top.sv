// dice_top: the digital dice.
//
// The dice shows a random number of 1..N for an N-sided die (N = 2, 4, 6, 8,
// 10, 12, 20 or 100) on a 4-digit seven-segment display. Shaking or turning
// the dice over opens its tilt switch; while the switch reads "not upright"
// the display scrambles through random results at 10 Hz, and when the dice has
// been upright for about 0.7 s the last result is frozen: that is the roll.
// While upright, the up and down buttons select the dice type (the display then
// shows "d6", "d20" ...), and both together disable the keep-awake pulse so the
// battery module powers the dice off.
//
// Randomness comes from an analog input: an XADC channel reading the
// accelerometer is sampled at 10 Hz into a 32-bit seed and scrambled with an
// XORshift. Every result is also sent as two BCD digits over a 1000-baud UART.
//
// Blocks: clock_gen (rate strobes from the 12 MHz sysclk), tilt_detect,
// dice_select, seed_gen, prng, roll_proc, display_mux, segment, keep_awake and
// uart_if. The XADC is a vendor macro and stays outside: its DRP read address
// (xadc_daddr, constant 7'h14), enable (xadc_den, tied to its end-of-conversion
// output as in the published design) and read data are ports here.
//
// Ports follow the published top level: btn[0] is the reset button (active
// high, pressed = reset), btn[1] is present on the board but unused; led[1]
// mirrors the tilt switch and led[0] the keep-awake toggle; dp is the colon,
// driven with upright so it lights (active low) while the dice tumbles. The
// digit enables are reversed relative to the display driver, as in the
// published wiring: an[0] is the leftmost digit. The clock parameters are the
// half-period counts of the dividers; everything else has fixed sizes.
// Left unused on purpose, as in the published design: btn[1], the 1500 Hz
// output, the transmitter's ap_valid. The square-wave divider outputs and the
// dice type index are not needed outside their blocks.
module dice_top
  import dice_pkg::*;
#(
  parameter int unsigned HALF_1000HZ = 6000,
  parameter int unsigned HALF_1500HZ = 4000,
  parameter int unsigned HALF_500HZ  = 12000,
  parameter int unsigned HALF_10HZ   = 600024,
  parameter int unsigned HALF_5S     = 30001200
) (
  input  logic        sysclk,
  input  logic        tilt,
  input  logic        btnU,
  input  logic        btnD,
  input  logic [1:0]  btn,
  output logic        onpin,
  output logic [6:0]  seg,
  output logic        dp,
  output logic [3:0]  an,
  output logic [1:0]  led,
  output logic        uart_rxd_out,
  // XADC dynamic reconfiguration port
  output logic [6:0]  xadc_daddr,
  output logic        xadc_den,
  input  logic        xadc_eoc,
  input  logic [15:0] xadc_do
);
  logic rst_n;
  logic tick1000, tick500, tick10, tick5s;
  logic clk1000_sq, clk1500_sq, clk1500_tick, clk500_sq, clk10_sq, clk5s_sq;

  logic        upright, setmode, keepon, clk5, uart_valid;
  sides_t      diceval;
  dice_idx_t   dselect;
  digits4_t    set_digits, rand_digits, bcd;
  logic [31:0] seed, rand_w;
  logic [3:0]  an_drv;

  assign rst_n      = ~btn[0];
  assign xadc_daddr = 7'h14;
  assign xadc_den   = xadc_eoc;

  clock_gen #(
    .HALF_1000HZ(HALF_1000HZ), .HALF_1500HZ(HALF_1500HZ), .HALF_500HZ(HALF_500HZ),
    .HALF_10HZ(HALF_10HZ), .HALF_5S(HALF_5S)
  ) u_clk (
    .clk(sysclk), .rst_n,
    .clk1000_clk(clk1000_sq), .clk1000_tick(tick1000),
    .clk1500_clk(clk1500_sq), .clk1500_tick(clk1500_tick),
    .clk500_clk(clk500_sq),   .clk500_tick(tick500),
    .clk10_clk(clk10_sq),     .clk10_tick(tick10),
    .clk5s_clk(clk5s_sq),     .clk5s_tick(tick5s)
  );

  tilt_detect u_tilt (
    .clk(sysclk), .rst_n, .sample(tick10), .tilt, .upright
  );

  dice_select u_sel (
    .clk(sysclk), .rst_n, .tick(tick10), .btn_u(btnU), .btn_d(btnD), .upright,
    .setmode, .keepon, .diceval, .set_digits, .dselect
  );

  seed_gen u_seed (
    .clk(sysclk), .rst_n, .tick(tick10), .adc_data(xadc_do), .seed
  );

  prng u_prng (
    .clk(sysclk), .rst_n, .seed, .rand_o(rand_w)
  );

  roll_proc u_roll (
    .clk(sysclk), .rst_n, .tick(tick10), .upright, .rand_i(rand_w), .diceval,
    .rand_digits
  );

  display_mux u_mux (
    .setmode, .set_digits, .rand_digits, .bcd
  );

  segment u_seg (
    .clk(sysclk), .rst_n, .tick(tick500), .bcd, .an(an_drv), .seg
  );

  keep_awake u_keep (
    .clk(sysclk), .rst_n, .tick(tick5s), .keepon, .onpin, .clk5
  );

  uart_if u_uart (
    .clk(sysclk), .rst_n, .tick(tick1000), .rand_digits,
    .uart_txd(uart_rxd_out), .uart_valid
  );

  assign an  = {an_drv[0], an_drv[1], an_drv[2], an_drv[3]};
  assign dp  = upright;
  assign led = {tilt, clk5};
endmodule
