// uart_tx_tb: self-checking test of the serial transmitter.
//
// Bit strobes come every 4 clocks. For each of many random bytes, with and
// without parity, the testbench raises ap_ready, and checks that the start bit
// appears on the very next strobe, then reads the line once per strobe: eight
// data bits, least significant first, the even parity bit when enabled, and a
// high stop bit with ap_valid high. Data and parity inputs are scrambled once
// the frame has started, to check that they were captured. The line must stay
// high while idle and the frame must last 10 (11 with parity) bit times.
module uart_tx_tb;
  logic clk = 1'b0, rst_n = 1'b0, tick = 1'b0;
  logic ap_ready = 1'b0, parity = 1'b0, ap_valid, tx;
  logic [7:0] data = '0;
  int checks = 0, failures = 0, frames = 0, par_frames = 0;

  uart_tx dut (.clk, .rst_n, .tick, .ap_ready, .ap_valid, .tx, .parity, .data);

  always #5 clk = ~clk;

  initial begin
    #10ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One bit time: strobe, then let the registered line settle.
  task automatic bit_time();
    @(negedge clk) tick = 1'b1;
    @(negedge clk) tick = 1'b0;
    repeat (2) @(negedge clk);
  endtask

  initial begin
    logic [7:0] d;
    logic       p;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 5; i++) begin
      bit_time();
      checks++;
      if (tx !== 1'b1 || ap_valid !== 1'b0) begin failures++; $display("line not idle"); end
    end
    for (int f = 0; f < 200; f++) begin
      d = 8'($urandom); p = ($urandom % 2);
      data = d; parity = p; ap_ready = 1'b1;
      bit_time();
      checks++;
      if (tx !== 1'b0) begin failures++; $display("frame %0d: no start bit", f); end
      ap_ready = 1'b0; data = ~d; parity = ~p;
      for (int b = 0; b < 8; b++) begin
        bit_time();
        checks++;
        if (tx !== d[b] || ap_valid !== 1'b0) begin failures++; $display("frame %0d bit %0d: %b expected %b", f, b, tx, d[b]); end
      end
      if (p) begin
        bit_time();
        checks++;
        if (tx !== ^d) begin failures++; $display("frame %0d: parity %b expected %b", f, tx, ^d); end
        par_frames++;
      end
      bit_time();
      checks++;
      if (tx !== 1'b1 || ap_valid !== 1'b1) begin failures++; $display("frame %0d: stop bit %b valid %b", f, tx, ap_valid); end
      bit_time();   // back in IDLE
      checks++;
      if (tx !== 1'b1 || ap_valid !== 1'b0) begin failures++; $display("frame %0d: not idle after stop", f); end
      frames++;
      repeat ($urandom % 3) begin
        bit_time();
        checks++;
        if (tx !== 1'b1) begin failures++; $display("line low while idle"); end
      end
    end
    // Synchronous reset in mid-frame returns the line to idle.
    data = 8'h00; ap_ready = 1'b1; bit_time(); ap_ready = 1'b0; bit_time();
    @(negedge clk) rst_n = 1'b0;
    @(negedge clk) rst_n = 1'b1;
    checks++;
    if (tx !== 1'b1) begin failures++; $display("reset did not idle the line"); end
    checks++;
    if (par_frames == 0 || par_frames == frames) begin failures++; $display("parity mix not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
