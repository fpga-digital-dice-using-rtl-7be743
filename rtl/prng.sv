// prng: XORshift scrambler of the seed.
//
// rand = x ^ (x>>7), then ^ (<<9), then ^ (>>13), applied to the current seed.
// The published listing computes this from the seed itself (not from the
// previous output), so a new random value appears whenever the seed changes;
// the result is registered on every sysclk edge, as the published text asks,
// one cycle after the seed. Reset (asynchronous, active low) clears rand.
module prng
  import dice_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] seed,
  output logic [31:0] rand_o
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rand_o <= '0;
    else        rand_o <= xorshift32(seed);
  end
endmodule
