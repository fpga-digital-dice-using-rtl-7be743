// uart_if: logs every dice result over the USB-UART bridge.
//
// uart_ready toggles on every 1000 Hz strobe, so a new message is offered every
// other bit time; the transmitter, running at 1000 baud on the same strobe,
// takes one when it is idle. A message is one byte: the tens digit of the roll
// in the upper nibble and the units digit in the lower one, both as BCD,
// without parity. A frame takes 10 bit times and the transmitter then waits
// in IDLE until uart_ready is next seen high, so one message leaves every
// 12 ms (about 83 messages a second). This follows the published design. Reset is
// asynchronous, active low, for the pacing flip-flop (the transmitter's own
// reset is synchronous).
module uart_if
  import dice_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     tick,          // 1000 Hz strobe
  input  digits4_t rand_digits,   // roll digits; huns = tens, tens = units
  output logic     uart_txd,
  output logic     uart_valid
);
  logic uart_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    uart_ready <= 1'b0;
    else if (tick) uart_ready <= ~uart_ready;
  end

  uart_tx u_tx (
    .clk,
    .rst_n,
    .tick,
    .ap_ready (uart_ready),
    .ap_valid (uart_valid),
    .tx       (uart_txd),
    .parity   (1'b0),
    .data     ({rand_digits.huns, rand_digits.tens})
  );
endmodule
