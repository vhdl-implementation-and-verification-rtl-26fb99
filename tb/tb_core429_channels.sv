// tb_core429_channels: the core in its multi-channel configurations. One harness builds
// the largest configuration the core allows, 16 receivers and 16 transmitters on an 8-bit
// CPU bus; a second builds 2 + 2 channels on a 32-bit bus. In both, every transmitter is
// wired to a different receiver, half the channels run at each bit rate, and every
// received word is checked (see core429_loop_harness).
module tb_core429_channels;
  logic clk = 0;
  int checks_a, failures_a, checks_b, failures_b;
  logic done_a, done_b;
  int checks = 0, failures = 0;

  always #50 clk = ~clk;    // 10 MHz

  core429_loop_harness #(.NUM(16), .W(8))  u_a (.clk, .checks_o(checks_a),
                                               .failures_o(failures_a), .done_o(done_a));
  core429_loop_harness #(.NUM(2),  .W(32)) u_b (.clk, .checks_o(checks_b),
                                               .failures_o(failures_b), .done_o(done_b));

  initial begin
    repeat (500_000) @(posedge clk);
    checks = checks_a + checks_b;
    failures = failures_a + failures_b + 1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (done_a && done_b);
    checks = checks_a + checks_b;
    failures = failures_a + failures_b;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
