// tb_rx_clock_recovery: sends random bipolar RZ bits at 100 and 12.5 kbit/s (10 MHz
// clock), plus a short glitch that must be ignored and a both-lines-high pulse that must
// raise line_error. Checks every recovered bit value and that each bit strobe comes
// exactly quarter-bit + 3 clocks after the rising line edge.
module tb_rx_clock_recovery;
  localparam int CLK_HZ = 10_000_000;
  localparam int BIT_HI = CLK_HZ / 100_000;
  localparam int BIT_LO = CLK_HZ / 12_500;
  logic clk = 0, rst_n = 0;
  logic low_speed = 0, rx_hi = 0, rx_lo = 0;
  logic bit_valid, bit_o, line_error;
  int checks = 0, failures = 0;
  bit exp_q[$];
  longint cyc = 0, edge_cyc = 0;
  int line_errors = 0;

  rx_clock_recovery #(.CLK_FREQ_HZ(CLK_HZ)) dut (
    .clk, .rst_n, .low_speed_i(low_speed), .rx_hi_i(rx_hi), .rx_lo_i(rx_lo),
    .bit_valid_o(bit_valid), .bit_o(bit_o), .line_error_o(line_error)
  );

  always #50 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Drive one bit: first half of the bit time on RxHi (one) or RxLo (zero), second null.
  task automatic send_bit(input bit b, input int bit_clks);
    @(negedge clk);
    rx_hi = b; rx_lo = !b;
    edge_cyc = cyc;
    exp_q.push_back(b);
    repeat (bit_clks / 2) @(negedge clk);
    rx_hi = 0; rx_lo = 0;
    repeat (bit_clks / 2 - 1) @(negedge clk);
  endtask

  always @(posedge clk) begin
    if (rst_n && bit_valid) begin
      automatic int q = (low_speed ? BIT_LO : BIT_HI) / 4;
      if (exp_q.size() == 0) begin
        chk(0, "unexpected bit");
      end else begin
        automatic bit e = exp_q.pop_front();
        chk(bit_o == e, $sformatf("bit value got %b exp %b", bit_o, e));
        // bit_valid seen at this edge was set at the edge edge_cyc + q + 3 - 1.
        chk(cyc - edge_cyc == longint'(q + 3), $sformatf("latency %0d exp %0d",
            cyc - edge_cyc, q + 3));
      end
    end
    if (rst_n && line_error) line_errors++;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    for (int i = 0; i < 200; i++) send_bit($urandom_range(1), BIT_HI);
    // Glitch of 5 clocks: shorter than a quarter bit, must not give a bit.
    @(negedge clk); rx_hi = 1; repeat (5) @(negedge clk); rx_hi = 0;
    repeat (BIT_HI) @(negedge clk);
    // Both lines high: line error, no bit.
    @(negedge clk); rx_hi = 1; rx_lo = 1; repeat (BIT_HI / 2) @(negedge clk);
    rx_hi = 0; rx_lo = 0; repeat (BIT_HI) @(negedge clk);
    chk(line_errors == 1, "one line error");
    low_speed = 1;
    for (int i = 0; i < 60; i++) send_bit($urandom_range(1), BIT_LO);
    repeat (BIT_LO) @(negedge clk);
    chk(exp_q.size() == 0, "all bits recovered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
