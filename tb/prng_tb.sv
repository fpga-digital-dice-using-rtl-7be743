// prng_tb: self-checking test of the XORshift scrambler.
//
// Checks fixed vectors worked out by hand-independent arithmetic
// (1 -> 0x00000201, 0x12345678 -> 0x326C05B8, 0xDEADBEEF -> 0xFEDC374C,
// 0xFFFFFFFF -> 0xFE07F000, 0x80000000 -> 0x81040800), then random seeds
// against a reference written out in the testbench, and that the output is
// registered: it changes one clock after the seed.
module prng_tb;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [31:0] seed = '0, rand_o;
  int checks = 0, failures = 0;

  prng dut (.clk, .rst_n, .seed, .rand_o);

  always #5 clk = ~clk;

  initial begin
    #100000;
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

  task automatic check(input logic [31:0] s, input logic [31:0] e);
    seed = s;
    @(negedge clk);
    checks++;
    if (rand_o !== e) begin failures++; $display("seed %h: rand %h expected %h", s, rand_o, e); end
  endtask

  initial begin
    logic [31:0] s;
    repeat (2) @(negedge clk);
    checks++;
    if (rand_o !== 32'h0) begin failures++; $display("rand not cleared in reset"); end
    rst_n = 1'b1;
    check(32'h00000001, 32'h00000201);
    check(32'h12345678, 32'h326C05B8);
    check(32'hDEADBEEF, 32'hFEDC374C);
    check(32'hFFFFFFFF, 32'hFE07F000);
    check(32'h80000000, 32'h81040800);
    for (int i = 0; i < 500; i++) begin
      s = $urandom;
      check(s, ref_xs(s));
    end
    // Registered: a seed change just after an edge is not visible until the next one.
    @(posedge clk); #1 seed = 32'h12345678;
    @(posedge clk); #1 seed = 32'h00000001;
    checks++;
    if (rand_o !== 32'h326C05B8) begin failures++; $display("output not registered"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
