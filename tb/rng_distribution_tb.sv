// rng_distribution_tb: the two randomness measurements of the dice.
//
// Reproduces in simulation the two histograms the dice was evaluated with:
// results of a 20-sided dice (about 8,900 rolls, 20 bins of roughly 400-515)
// and raw random values binned by their low byte (256 bins of roughly 5-37,
// about 5,100 values). The seed register, XORshift and roll stage of the dice
// are chained as in the top level and fed with uniformly random 16-bit analog
// samples, one per 10 Hz strobe, while the dice is tumbling. Each histogram is
// checked with a chi-square test against a uniform distribution at about the
// 0.1 % level (bounds 43.8 for 19 and 330 for 255 degrees of freedom), and
// every bin must be hit. The analog samples of the real dice are not uniform;
// this checks the arithmetic of the chain, not the physical entropy.
module rng_distribution_tb;
  import dice_pkg::*;
  localparam int N20  = 8900;
  localparam int NRAW = 5120;

  logic clk = 1'b0, rst_n = 1'b0, tick = 1'b0;
  logic [15:0] adc = '0;
  logic [31:0] seed, rand_w;
  digits4_t digits;
  int checks = 0, failures = 0;
  int h20 [20];
  int hraw [256];

  seed_gen  u_seed (.clk, .rst_n, .tick, .adc_data(adc), .seed);
  prng      u_prng (.clk, .rst_n, .seed, .rand_o(rand_w));
  roll_proc u_roll (.clk, .rst_n, .tick, .upright(1'b0), .rand_i(rand_w), .diceval(7'd20),
                    .rand_digits(digits));

  always #5 clk = ~clk;

  initial begin
    #10ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic strobe();
    adc = 16'($urandom);
    @(negedge clk) tick = 1'b1;
    @(negedge clk) tick = 1'b0;
    @(negedge clk);
  endtask

  initial begin
    real chi, e;
    int face;
    foreach (h20[i]) h20[i] = 0;
    foreach (hraw[i]) hraw[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    repeat (3) strobe();
    for (int i = 0; i < N20; i++) begin
      strobe();
      face = 10 * int'(digits.huns) + int'(digits.tens);
      checks++;
      if (face < 1 || face > 20 || digits.thou != 4'd0 || digits.ones != 4'hF) begin
        failures++; $display("bad d20 result %h", digits);
      end else h20[face - 1]++;
    end
    for (int i = 0; i < NRAW; i++) begin
      strobe();
      hraw[rand_w[7:0]]++;
    end
    e = real'(N20) / 20.0; chi = 0.0;
    foreach (h20[i]) chi += (real'(h20[i]) - e) ** 2 / e;
    $display("d20: %0d rolls, chi-square %f (19 dof)", N20, chi);
    for (int i = 0; i < 20; i++) $display("  face %2d: %0d", i + 1, h20[i]);
    checks++;
    if (chi > 43.8) begin failures++; $display("d20 histogram not uniform"); end
    foreach (h20[i]) begin
      checks++;
      if (h20[i] == 0) begin failures++; $display("face %0d never rolled", i + 1); end
    end
    e = real'(NRAW) / 256.0; chi = 0.0;
    foreach (hraw[i]) chi += (real'(hraw[i]) - e) ** 2 / e;
    $display("raw low byte: %0d values, chi-square %f (255 dof)", NRAW, chi);
    checks++;
    if (chi > 330.0) begin failures++; $display("raw histogram not uniform"); end
    foreach (hraw[i]) begin
      checks++;
      if (hraw[i] == 0) begin failures++; $display("byte %h never seen", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
