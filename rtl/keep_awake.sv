// keep_awake: stops the battery module from switching itself off.
//
// The charge/discharge module turns off after about 30 s of low current and
// treats a falling edge on its button pin as a press; a press after a long
// pause restarts its timer. On every 5 s strobe this block toggles onpin, so
// the pin falls every 10 s, and toggles the status LED output clk5 with it.
// Once keepon has been cleared (both dice buttons pressed together) both
// outputs are driven low on the next strobe and stay low, so the module times
// out and shuts the dice down. This follows the published design; there the
// reset was sampled only on the slow clock, here it is asynchronous, active
// low, and sets onpin high and clk5 low.
module keep_awake (
  input  logic clk,
  input  logic rst_n,
  input  logic tick,     // 5 s strobe
  input  logic keepon,
  output logic onpin,
  output logic clk5
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      onpin <= 1'b1;
      clk5  <= 1'b0;
    end else if (tick) begin
      if (keepon) begin
        onpin <= ~onpin;
        clk5  <= ~clk5;
      end else begin
        onpin <= 1'b0;
        clk5  <= 1'b0;
      end
    end
  end
endmodule
