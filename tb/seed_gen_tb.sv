// seed_gen_tb: self-checking test of the seed shift register.
//
// Feeds random 16-bit samples, pulsing the 10 Hz strobe on a random subset of
// clocks, and checks after every clock that the seed holds the last two
// sampled values (older one in the upper half) and that it does not move
// without a strobe. Reset must clear the seed.
module seed_gen_tb;
  logic clk = 1'b0, rst_n = 1'b0, tick = 1'b0;
  logic [15:0] adc_data = '0;
  logic [31:0] seed, exp_seed;
  int checks = 0, failures = 0;

  seed_gen dut (.clk, .rst_n, .tick, .adc_data, .seed);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    exp_seed = '0;
    repeat (2) @(negedge clk);
    checks++;
    if (seed !== 32'h0) begin failures++; $display("seed not cleared in reset"); end
    rst_n = 1'b1;
    for (int i = 0; i < 500; i++) begin
      tick     = ($urandom % 3) == 0;
      adc_data = 16'($urandom);
      @(negedge clk);
      if (tick) exp_seed = {exp_seed[15:0], adc_data};
      checks++;
      if (seed !== exp_seed) begin
        failures++; $display("seed %h expected %h", seed, exp_seed);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
