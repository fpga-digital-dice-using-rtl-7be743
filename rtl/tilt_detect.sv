// tilt_detect: decides whether the dice is lying upright and still.
//
// On every sample strobe (10 Hz in the dice) the tilt-switch level is shifted
// into a LOG_LEN-bit history register, the oldest sample dropping out. In the
// same strobe the ones in the history are counted, and upright is set when
// the count is at least THRESHOLD, cleared otherwise. As in the published
// design the count is taken from the history as it stood before the new
// sample enters, so upright follows the switch with one extra sample of delay:
// a switch that closes from a cleared history raises upright on the
// (THRESHOLD+1)-th strobe and, once the history is full, a switch that opens
// drops it on the (LOG_LEN-THRESHOLD+2)-th strobe.
//
// Interface: clk/rst_n (asynchronous, active low, clears history and flag),
// sample (one-cycle enable), tilt (switch level, 1 = upright), upright.
// The history length 10 and threshold 7 are the published values.
module tilt_detect #(
  parameter int unsigned LOG_LEN   = 10,
  parameter int unsigned THRESHOLD = 7
) (
  input  logic clk,
  input  logic rst_n,
  input  logic sample,
  input  logic tilt,
  output logic upright
);
  localparam int unsigned CW = $clog2(LOG_LEN + 1);

  logic [LOG_LEN-1:0] tiltlog;
  logic [CW-1:0]      sumtilt;

  always_comb begin
    sumtilt = '0;
    for (int i = 0; i < int'(LOG_LEN); i++) sumtilt = sumtilt + CW'(tiltlog[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tiltlog <= '0;
      upright <= 1'b0;
    end else if (sample) begin
      tiltlog <= {tiltlog[LOG_LEN-2:0], tilt};
      upright <= (sumtilt >= CW'(THRESHOLD));
    end
  end
endmodule
