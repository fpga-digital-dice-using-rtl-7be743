// clock_gen_tb: self-checking test of the rate dividers.
//
// A small instance (half periods 3, 4, 5, 7 and 9 clocks) is checked for many
// periods: each strobe must come exactly 2*HALF clocks after the previous one,
// must coincide with the square wave rising, and the square wave must stay in
// each level for HALF clocks. A second instance with the published counts is
// checked for the first rising strobe of every output (at HALF clocks after
// reset) and for the full period of the 1000 Hz, 1500 Hz, 500 Hz and 10 Hz
// outputs (12000, 8000, 24000 and 1200048 clocks at 12 MHz).
module clock_gen_tb;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  longint cyc = 0;

  localparam int unsigned SH [5] = '{3, 4, 5, 7, 9};
  localparam int unsigned DH [5] = '{6000, 4000, 12000, 600024, 30001200};

  logic [4:0] s_clk, s_tick, d_clk, d_tick;

  clock_gen #(.HALF_1000HZ(3), .HALF_1500HZ(4), .HALF_500HZ(5), .HALF_10HZ(7), .HALF_5S(9)) u_small (
    .clk, .rst_n,
    .clk1000_clk(s_clk[0]), .clk1000_tick(s_tick[0]),
    .clk1500_clk(s_clk[1]), .clk1500_tick(s_tick[1]),
    .clk500_clk(s_clk[2]),  .clk500_tick(s_tick[2]),
    .clk10_clk(s_clk[3]),   .clk10_tick(s_tick[3]),
    .clk5s_clk(s_clk[4]),   .clk5s_tick(s_tick[4]));

  clock_gen u_full (
    .clk, .rst_n,
    .clk1000_clk(d_clk[0]), .clk1000_tick(d_tick[0]),
    .clk1500_clk(d_clk[1]), .clk1500_tick(d_tick[1]),
    .clk500_clk(d_clk[2]),  .clk500_tick(d_tick[2]),
    .clk10_clk(d_clk[3]),   .clk10_tick(d_tick[3]),
    .clk5s_clk(d_clk[4]),   .clk5s_tick(d_tick[4]));

  always #5 clk = ~clk;

  initial begin
    #400ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint s_last_tick [5], s_last_edge [5], d_first [5], d_second [5];
  logic   s_prev [5];
  int     s_ticks [5];

  // Cycle index of the sysclk edge that is about to happen.
  always @(posedge clk) if (rst_n) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n) begin
    for (int k = 0; k < 5; k++) begin
      // Strobe means the square wave is low now and high after this edge.
      if (s_tick[k] && cyc < 5000) begin
        checks++;
        if (s_clk[k] !== 1'b0) begin failures++; $display("small %0d: strobe while high", k); end
        if (s_ticks[k] > 0 && cyc - s_last_tick[k] != 2 * SH[k]) begin
          failures++; $display("small %0d: strobe spacing %0d", k, cyc - s_last_tick[k]);
        end
        s_last_tick[k] = cyc;
        s_ticks[k]++;
      end
      if (d_tick[k]) begin
        if (d_first[k] < 0) d_first[k] = cyc;
        else if (d_second[k] < 0) d_second[k] = cyc;
      end
    end
  end

  // Half-period length of the small instance's square waves.
  always @(negedge clk) if (rst_n) begin
    for (int k = 0; k < 5; k++) begin
      if (s_clk[k] !== s_prev[k] && cyc < 5000) begin
        if (s_last_edge[k] >= 0) begin
          checks++;
          if (cyc - s_last_edge[k] != SH[k]) begin
            failures++; $display("small %0d: half period %0d", k, cyc - s_last_edge[k]);
          end
        end
        s_last_edge[k] = cyc;
        s_prev[k] = s_clk[k];
      end
    end
  end

  initial begin
    for (int k = 0; k < 5; k++) begin
      s_last_tick[k] = -1; s_last_edge[k] = -1; d_first[k] = -1; d_second[k] = -1;
      s_prev[k] = 1'b0; s_ticks[k] = 0;
    end
    repeat (3) @(negedge clk);
    checks++;
    if (s_clk !== '0 || d_clk !== '0) begin failures++; $display("clocks not low in reset"); end
    rst_n = 1'b1;
    wait (d_first[4] >= 0 && d_second[3] >= 0);
    @(negedge clk);
    for (int k = 0; k < 5; k++) begin
      checks++;
      if (s_ticks[k] < 10) begin failures++; $display("small %0d: only %0d strobes", k, s_ticks[k]); end
      // First strobe: the edge after HALF-1 counted cycles, cycle index HALF-1.
      checks++;
      if (d_first[k] != longint'(DH[k]) - 1) begin
        failures++; $display("full %0d: first strobe at %0d, expected %0d", k, d_first[k], DH[k] - 1);
      end
      if (k < 4) begin
        checks++;
        if (d_second[k] - d_first[k] != 2 * longint'(DH[k])) begin
          failures++; $display("full %0d: period %0d", k, d_second[k] - d_first[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
