// seed_gen: builds the 32-bit PRNG seed from analog samples.
//
// On every 10 Hz strobe the seed is shifted left by 16 bits and the current
// 16-bit XADC conversion result enters the low half, so the seed always holds
// the two most recent samples (older one in the upper half). The noise on the
// accelerometer input, which moves as the dice is shaken, makes the seed vary.
// This follows the published design; reset (asynchronous, active low) clears
// the seed to zero.
module seed_gen (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        tick,       // 10 Hz strobe
  input  logic [15:0] adc_data,   // XADC DRP read data
  output logic [31:0] seed
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    seed <= '0;
    else if (tick) seed <= {seed[15:0], adc_data};
  end
endmodule
