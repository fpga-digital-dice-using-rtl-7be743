// dice_env: stimulus and checking environment for the whole dice.
//
// It plays a user: power-up, setting the dice upright, stepping the dice type
// with the up and down buttons (with wrap-around in both directions), rolling
// several dice types by opening the tilt switch while feeding random analog
// samples, pressing a button while the dice tumbles (ignored), and finally
// pressing both buttons to disable the keep-awake pulse. It watches only the
// pins of the dice:
//   * the display is rebuilt from the multiplexed an/seg pins with its own
//     glyph table, and checked for "dddd" after reset, for the dice-type
//     patterns in set mode and for the rolled value afterwards;
//   * the rolled value is predicted from the analog samples: the last samples
//     of each tumble are held at a constant A, so the result must be
//     xorshift({A, A}) mod sides + 1, leading zeros blanked;
//   * a UART receiver decodes the serial output and checks that the last byte
//     after a roll is {tens, units} of the result;
//   * the colon (dp) must be lit (low) while tumbling and dark once settled,
//     the digit scan must advance every 2*T500 clocks, a message must leave
//     every 12 bit times, and the keep-awake pin must toggle every T5S clocks
//     and go and stay low once disabled.
// Every mechanism is counted and one that never happened counts as a failure.
// Parameters give the strobe periods of the connected dice in sysclk cycles;
// the clock period is 10 time units.
module dice_env #(
  parameter longint T10   = 1200048,    // 10 Hz strobe period
  parameter longint T5S   = 60002400,   // keep-awake strobe period
  parameter longint T500  = 24000,      // scan strobe period
  parameter longint T1000 = 12000,      // UART bit period
  parameter int     ROLLS = 3           // extra random rolls
) (
  output logic        sysclk,
  output logic        tilt,
  output logic        btnU,
  output logic        btnD,
  output logic [1:0]  btn,
  input  logic        onpin,
  input  logic [6:0]  seg,
  input  logic        dp,
  input  logic [3:0]  an,
  input  logic [1:0]  led,
  input  logic        uart_rxd_out,
  input  logic [6:0]  xadc_daddr,
  input  logic        xadc_den,
  output logic        xadc_eoc,
  output logic [15:0] xadc_do
);
  localparam longint CP = 10;
  int checks = 0, failures = 0;

  // Mechanism counters.
  int n_upright = 0, n_tumble = 0, n_setmode = 0, n_up = 0, n_down = 0;
  int n_wrap_up = 0, n_wrap_down = 0, n_ignored = 0, n_scramble = 0;
  int n_blank = 0, n_three = 0, n_uart = 0, n_keep_toggle = 0, n_keep_off = 0;

  int unsigned sides_tab [8] = '{2, 4, 6, 8, 10, 12, 20, 100};
  logic [15:0] label_tab [8] = '{16'hD2FF, 16'hD4FF, 16'hD6FF, 16'hD8FF,
                                 16'hD10F, 16'hD12F, 16'hD20F, 16'hD100};
  logic [6:0] glyph_tab [16] = '{7'b0111111, 7'b0000110, 7'b1011011, 7'b1001111,
                                 7'b1100110, 7'b1101101, 7'b1111101, 7'b0000111,
                                 7'b1111111, 7'b1101111, 7'b1110111, 7'b1111100,
                                 7'b0111001, 7'b1011110, 7'b1111001, 7'b0000000};

  initial sysclk = 1'b0;
  always #5 sysclk = ~sysclk;

  // Watchdog: well beyond the scenario length.
  initial begin
    #(CP * (T10 * (360 + 40 * ROLLS) + 3 * T5S));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] ref_xs(logic [31:0] x);
    logic [31:0] a, b;
    a = x ^ {7'b0, x[31:7]};
    b = a ^ {a[22:0], 9'b0};
    return b ^ {13'b0, b[31:13]};
  endfunction

  // ---------------------------------------------------------------- display
  logic [3:0] shown [4];          // index 3 = leftmost digit
  longint     last_scan = -1;
  int         scan_bad = 0;

  function automatic logic [3:0] decode(logic [6:0] s);
    for (int c = 0; c < 16; c++) if (~s == glyph_tab[c]) return 4'(c);
    return 4'hE;  // unknown pattern; never a legal result
  endfunction

  always @(an) begin
    #1;
    if ($onehot(an)) begin
      for (int j = 0; j < 4; j++) if (an[j]) shown[3 - j] = decode(seg);
      if (last_scan >= 0 && ($time - last_scan) != CP * T500) scan_bad++;
      last_scan = $time;
    end
  end

  function automatic logic [15:0] display();
    return {shown[3], shown[2], shown[1], shown[0]};
  endfunction

  // ------------------------------------------------------------------- UART
  logic [7:0] last_byte;
  longint     last_frame = -1;
  int         frame_bad = 0;
  logic       uart_armed = 1'b0;

  initial begin
    logic [7:0] b;
    forever begin
      @(negedge uart_rxd_out);
      if (!uart_armed) continue;
      if (last_frame >= 0 && ($time - last_frame) != 12 * CP * T1000) frame_bad++;
      last_frame = $time;
      #(CP * T1000 / 2);
      if (uart_rxd_out !== 1'b0) begin frame_bad++; continue; end
      for (int i = 0; i < 8; i++) begin
        #(CP * T1000);
        b[i] = uart_rxd_out;
      end
      #(CP * T1000);
      if (uart_rxd_out !== 1'b1) frame_bad++;
      last_byte = b;
      n_uart++;
    end
  end

  // ------------------------------------------------------------- keep-awake
  logic   keep_disabled = 1'b0;
  longint last_keep = -1;
  int     keep_bad = 0;

  logic released = 1'b0;

  always @(onpin) if (released) begin
    if (keep_disabled) begin
      if (onpin !== 1'b0) keep_bad++;
    end else begin
      if (last_keep >= 0 && ($time - last_keep) != CP * T5S) keep_bad++;
      last_keep = $time;
      n_keep_toggle++;
    end
    #1;
    if (!keep_disabled && led[0] !== ~onpin) keep_bad++;
  end

  // --------------------------------------------------------------- helpers
  task automatic ticks(input longint n);
    #(CP * T10 * n);
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int unsigned sel;   // expected dice type index

  task automatic press(input logic u, input logic d, input int n);
    btnU = u; btnD = d;
    ticks(n);
    btnU = 1'b0; btnD = 1'b0;
  endtask

  task automatic step_up(input int n);
    for (int i = 0; i < n; i++) begin
      if (sel == 7) n_wrap_up++;
      sel = (sel + 1) % 8;
    end
    n_up += n;
    press(1'b1, 1'b0, n);
    ticks(3);
    check(display() == label_tab[sel], $sformatf("set mode shows %h, expected %h", display(), label_tab[sel]));
    n_setmode++;
  endtask

  task automatic step_down(input int n);
    for (int i = 0; i < n; i++) begin
      if (sel == 0) n_wrap_down++;
      sel = (sel + 7) % 8;
    end
    n_down += n;
    press(1'b0, 1'b1, n);
    ticks(3);
    check(display() == label_tab[sel], $sformatf("set mode shows %h, expected %h", display(), label_tab[sel]));
    n_setmode++;
  endtask

  // Roll the selected dice; the last samples are A.
  task automatic roll(input logic [15:0] a, input bit press_while_tumbling);
    int unsigned sides, face;
    logic [15:0] exp_disp, prev;
    logic [7:0]  exp_byte;
    int distinct;
    sides = sides_tab[sel];
    face  = ref_xs({a, a}) % sides + 1;
    exp_disp = {(face >= 100) ? 4'(face / 100) : 4'hF,
                (face >= 10) ? 4'((face / 10) % 10) : 4'hF,
                4'(face % 10), 4'hF};
    exp_byte = {4'((face / 10) % 10), 4'(face % 10)};
    tilt = 1'b0;
    distinct = 0; prev = display();
    for (int i = 0; i < 14; i++) begin
      xadc_do = (i < 9) ? 16'($urandom) : a;
      if (press_while_tumbling && i >= 6 && i < 8) btnU = 1'b1; else btnU = 1'b0;
      ticks(1);
      if (display() != prev) distinct++;
      prev = display();
    end
    btnU = 1'b0;
    if (press_while_tumbling) n_ignored++;
    check(dp == 1'b0, "colon dark while tumbling");
    if (dp == 1'b0) n_tumble++;
    if (distinct >= 2) n_scramble++;
    tilt = 1'b1;
    ticks(12);
    check(dp == 1'b1, "colon still lit after settling");
    if (dp == 1'b1) n_upright++;
    check(display() == exp_disp,
          $sformatf("d%0d roll with A=%h shows %h, expected %h (face %0d)", sides, a, display(), exp_disp, face));
    check(last_byte == exp_byte, $sformatf("UART byte %h, expected %h", last_byte, exp_byte));
    if (face < 10) n_blank++;
    if (face == 100) n_three++;
    $display("rolled d%0d: %0d", sides, face);
  endtask

  function automatic logic [15:0] pick(input int unsigned sides, input int unsigned want);
    logic [15:0] a;
    do a = 16'($urandom); while (ref_xs({a, a}) % sides + 1 != want);
    return a;
  endfunction

  initial begin
    tilt = 1'b0; btnU = 1'b0; btnD = 1'b0; btn = 2'b01; xadc_eoc = 1'b0; xadc_do = 16'h1234;
    sel = 0;
    for (int j = 0; j < 4; j++) shown[j] = 4'h0;
    #23;
    btn = 2'b00;                         // release reset
    released = 1'b1;
    uart_armed = 1'b1;
    // Until the first 10 Hz strobe the reset pattern is on the display.
    #(CP * T500 * 5);
    check(display() == 16'hDDDD, $sformatf("after reset display %h, expected dddd", display()));
    ticks(1);
    check(xadc_daddr == 7'h14, "XADC address");
    xadc_eoc = 1'b1; #1;
    check(xadc_den == 1'b1, "XADC enable follows end of conversion");
    // Set it upright; buttons act only once upright.
    tilt = 1'b1;
    #1;
    check(led[1] == 1'b1, "led[1] mirrors the tilt switch");
    ticks(12);
    check(dp == 1'b1, "upright detected");
    if (dp == 1'b1) n_upright++;
    step_up(3);                          // d8
    step_up(6);                          // wraps to d4
    step_down(3);                        // wraps to d20
    roll(pick(20, 1 + $urandom % 9), 1'b1);     // one-digit result
    step_up(1);                          // d100
    roll(pick(100, 100), 1'b0);          // three digits
    step_down(5);                        // d6
    roll(16'($urandom), 1'b0);
    for (int r = 0; r < ROLLS; r++) begin
      int k;
      k = $urandom % 7 + 1;
      if ($urandom % 2) step_up(k); else step_down(k);
      roll(16'($urandom), 1'b0);
    end
    // Disable keep-awake, wait out two keep-awake periods.
    press(1'b1, 1'b1, 2);
    ticks(1);
    keep_disabled = 1'b1;
    #(CP * T5S + CP * T10);
    check(onpin == 1'b0 && led[0] == 1'b0, "keep-awake still running after disable");
    if (onpin == 1'b0) n_keep_off++;
    #(CP * T5S);
    check(onpin == 1'b0, "keep-awake restarted");
    check(scan_bad == 0, $sformatf("%0d scan steps off the 500 Hz period", scan_bad));
    check(frame_bad == 0, $sformatf("%0d UART frames malformed or off pace", frame_bad));
    check(keep_bad == 0, $sformatf("%0d keep-awake edges off period or after disable", keep_bad));
    check(n_upright > 0, "upright never detected");
    check(n_tumble > 0, "tumble never detected");
    check(n_setmode > 0, "set mode never entered");
    check(n_up > 0 && n_down > 0, "dice type never stepped both ways");
    check(n_wrap_up > 0 && n_wrap_down > 0, "dice type never wrapped both ways");
    check(n_ignored > 0, "no press while tumbling");
    check(n_scramble > 0, "display never scrambled");
    check(n_blank > 0, "leading-zero blanking never exercised");
    check(n_three > 0, "three-digit result never shown");
    check(n_uart > 0, "no UART frame");
    check(n_keep_toggle >= 2, "keep-awake never toggled");
    check(n_keep_off > 0, "keep-awake never disabled");
    $display("mechanisms: upright=%0d tumble=%0d setmode=%0d up=%0d down=%0d wrap_up=%0d wrap_down=%0d ignored=%0d scramble=%0d blank=%0d three=%0d uart=%0d keep_toggle=%0d keep_off=%0d",
             n_upright, n_tumble, n_setmode, n_up, n_down, n_wrap_up, n_wrap_down, n_ignored,
             n_scramble, n_blank, n_three, n_uart, n_keep_toggle, n_keep_off);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
