// dice_select_tb: self-checking test of the button logic.
//
// Applies random button and upright patterns (with runs of held buttons so
// that both wrap-arounds happen), one 10 Hz strobe every 3 clocks, and after
// each strobe compares set mode, keepon, the side count and the set-mode
// display pattern with a reference model that holds its own dice table.
module dice_select_tb;
  import dice_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, tick = 1'b0;
  logic btn_u = 1'b0, btn_d = 1'b0, upright = 1'b0;
  logic setmode, keepon;
  sides_t diceval;
  digits4_t set_digits;
  dice_idx_t dselect;
  int checks = 0, failures = 0;
  int n_wrap_up = 0, n_wrap_down = 0, n_off = 0;

  // Reference state.
  int unsigned m_sel;
  logic m_bu, m_bd, m_set, m_keep;
  int unsigned m_val;
  logic [15:0] m_lab;
  int unsigned sides_tab [8] = '{2, 4, 6, 8, 10, 12, 20, 100};
  logic [15:0] label_tab [8] = '{16'hD2FF, 16'hD4FF, 16'hD6FF, 16'hD8FF,
                                 16'hD10F, 16'hD12F, 16'hD20F, 16'hD100};

  dice_select dut (.clk, .rst_n, .tick, .btn_u, .btn_d, .upright,
                   .setmode, .keepon, .diceval, .set_digits, .dselect);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input logic u, input logic d, input logic up);
    btn_u = u; btn_d = d; upright = up;
    @(negedge clk) tick = 1'b1;
    @(negedge clk) tick = 1'b0;
    if (up) begin
      if (m_bu && m_bd) begin
        if (m_keep) n_off++;
        m_keep = 1'b0;
      end else if (m_bu) begin
        m_set = 1'b1;
        if (m_sel == 7) n_wrap_up++;
        m_sel = (m_sel + 1) % 8;
      end else if (m_bd) begin
        m_set = 1'b1;
        if (m_sel == 0) n_wrap_down++;
        m_sel = (m_sel + 7) % 8;
      end
      // Pattern and side count follow the index as it was before the step.
      m_lab = label_tab[(m_bu && !m_bd) ? (m_sel + 7) % 8 :
                        (m_bd && !m_bu) ? (m_sel + 1) % 8 : m_sel];
      m_val = sides_tab[(m_bu && !m_bd) ? (m_sel + 7) % 8 :
                        (m_bd && !m_bu) ? (m_sel + 1) % 8 : m_sel];
    end else begin
      m_set = 1'b0;
    end
    m_bu = u; m_bd = d;
    @(negedge clk);
    checks++;
    if (setmode !== m_set || keepon !== m_keep || int'(diceval) != m_val ||
        set_digits !== m_lab || int'(dselect) != m_sel) begin
      failures++;
      $display("mismatch: setmode %b/%b keepon %b/%b diceval %0d/%0d digits %h/%h sel %0d/%0d",
               setmode, m_set, keepon, m_keep, diceval, m_val, set_digits, m_lab,
               dselect, m_sel);
    end
  endtask

  initial begin
    logic u, d, up;
    m_sel = 0; m_bu = 0; m_bd = 0; m_set = 0; m_keep = 1; m_val = 2; m_lab = 16'h0000;
    repeat (3) @(negedge clk);
    checks++;
    if (diceval != 7'd2 || keepon !== 1'b1 || setmode !== 1'b0) begin
      failures++; $display("reset values wrong");
    end
    rst_n = 1'b1;
    // Buttons ignored while tumbling.
    for (int i = 0; i < 5; i++) step(1'b1, 1'b0, 1'b0);
    // Hold up for 10 strobes (wraps 7 -> 0), then down for 10 (wraps 0 -> 7).
    for (int i = 0; i < 10; i++) step(1'b1, 1'b0, 1'b1);
    for (int i = 0; i < 10; i++) step(1'b0, 1'b0, 1'b1);
    for (int i = 0; i < 10; i++) step(1'b0, 1'b1, 1'b1);
    step(1'b0, 1'b0, 1'b0);
    step(1'b0, 1'b0, 1'b0);
    // Random activity without the two-button shutdown.
    for (int i = 0; i < 300; i++) begin
      up = ($urandom % 10) < 8;
      u  = ($urandom % 3) == 0;
      d  = !u && (($urandom % 3) == 0);
      step(u, d, up);
    end
    // Both buttons: keep-awake off, and it stays off.
    step(1'b1, 1'b1, 1'b1);
    step(1'b1, 1'b1, 1'b1);
    for (int i = 0; i < 100; i++) step(($urandom % 2) == 0, ($urandom % 2) == 0, ($urandom % 4) != 0);
    checks++;
    if (n_wrap_up == 0 || n_wrap_down == 0 || n_off == 0) begin
      failures++;
      $display("scenario not reached: wrap_up=%0d wrap_down=%0d off=%0d", n_wrap_up, n_wrap_down, n_off);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
