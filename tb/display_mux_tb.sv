// display_mux_tb: self-checking test of the display source selection.
//
// In set mode the set pattern must pass unchanged; otherwise leading zeros of
// the roll digits must be blanked. Checks the cases a dice produces (1, 9, 10,
// 20, 99, 100 and the reset pattern) with hand-written expected values, then
// random digit combinations against a reference.
module display_mux_tb;
  import dice_pkg::*;
  logic setmode;
  digits4_t set_digits, rand_digits, bcd;
  int checks = 0, failures = 0;

  display_mux dut (.setmode, .set_digits, .rand_digits, .bcd);

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic sm, input logic [15:0] s, input logic [15:0] r, input logic [15:0] e);
    setmode = sm; set_digits = s; rand_digits = r;
    #1;
    checks++;
    if (bcd !== e) begin failures++; $display("setmode %b set %h rand %h: bcd %h expected %h", sm, s, r, bcd, e); end
  endtask

  function automatic logic [15:0] ref_blank(logic [15:0] r);
    logic [15:0] o = r;
    if (r[15:12] == 0) o[15:12] = 4'hF;
    if (r[15:12] == 0 && r[11:8] == 0) o[11:8] = 4'hF;
    if (r[15:12] == 0 && r[11:8] == 0 && r[7:4] == 0) o[7:4] = 4'hF;
    if (r[3:0] == 0) o[3:0] = 4'hF;
    return o;
  endfunction

  initial begin
    logic [15:0] s, r;
    check(1'b0, 16'hD6FF, 16'h001F, 16'hFF1F);   // roll 1
    check(1'b0, 16'hD6FF, 16'h009F, 16'hFF9F);   // roll 9
    check(1'b0, 16'hD6FF, 16'h010F, 16'hF10F);   // roll 10
    check(1'b0, 16'hD6FF, 16'h020F, 16'hF20F);   // roll 20
    check(1'b0, 16'hD6FF, 16'h099F, 16'hF99F);   // roll 99
    check(1'b0, 16'hD6FF, 16'h100F, 16'h100F);   // roll 100
    check(1'b0, 16'hD6FF, 16'hDDDD, 16'hDDDD);   // after reset
    check(1'b1, 16'hD100, 16'h020F, 16'hD100);   // set mode
    check(1'b1, 16'hD2FF, 16'h000F, 16'hD2FF);
    for (int i = 0; i < 1000; i++) begin
      s = 16'($urandom); r = 16'($urandom);
      if ($urandom % 2) r[15:8] = '0;
      if ($urandom % 2) r[3:0] = '0;
      check(1'b1, s, r, s);
      check(1'b0, s, r, ref_blank(r));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
