// core429_loop_harness: test harness for multi-channel configurations of core429.
//
// Instantiates core429 with NUM channels of each kind and a CPU bus of W bits, and
// cross-wires the transmitters into the receivers in reverse order (transmitter j drives
// receiver NUM-1-j), so that a word can only arrive in the right place if the channel
// number of every access is decoded correctly. Odd-numbered transmitters run at
// 12.5 kbit/s, even ones at 100 kbit/s, all with parity insertion; each receiver is set to
// the rate of its transmitter. One word with the transmitter's number as label is sent on
// every channel at once, then every receiver is read and checked. Reports its checks and
// failures on its ports and raises done_o at the end.
module core429_loop_harness #(
  parameter int NUM = 2,
  parameter int W   = 16
) (
  input  logic clk,
  output int   checks_o,
  output int   failures_o,
  output logic done_o
);
  import arinc_pkg::*;
  logic rst_n = 0;
  logic cpu_ren = 1, cpu_wen = 1, cpu_wait, int_out;
  logic [8:0] cpu_add = 0;
  logic [W-1:0] cpu_din = '0, cpu_dout;
  logic [NUM-1:0] rx_hi, rx_lo, tx_hi, tx_lo;
  int checks = 0, failures = 0;

  core429 #(.CPU_DATA_WIDTH(W), .NUM_RX(NUM), .NUM_TX(NUM)) dut (
    .clk, .rst_n, .cpu_ren, .cpu_wen, .cpu_add, .cpu_din, .cpu_dout, .cpu_wait, .int_out,
    .rx_hi, .rx_lo, .tx_hi, .tx_lo
  );

  for (genvar i = 0; i < NUM; i++) begin : g_wire
    assign rx_hi[i] = tx_hi[NUM - 1 - i];
    assign rx_lo[i] = tx_lo[NUM - 1 - i];
  end

  assign checks_o   = checks;
  assign failures_o = failures;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL [%0d ch, %0d-bit] %s at %0t", NUM, W, what, $time);
    end
  endtask

  task automatic cpu_access(input bit write, input logic [8:0] a, input logic [W-1:0] d,
                            output logic [W-1:0] q);
    @(negedge clk);
    cpu_add = a; cpu_din = d;
    if (write) cpu_wen = 0; else cpu_ren = 0;
    do @(negedge clk); while (cpu_wait);
    q = cpu_dout;
    cpu_wen = 1; cpu_ren = 1;
  endtask

  function automatic logic [8:0] addr(input int ch, input bit tx, input reg_sel_e sel,
                                      input int off);
    return {4'(ch), tx, 2'(sel), 2'(off)};
  endfunction

  task automatic write_word(input int ch, input logic [31:0] w);
    logic [W-1:0] q;
    for (int p = 0; p < 32 / W; p++)
      cpu_access(1, addr(ch, 1, REG_DATA, p * W / 8), w[p * W +: W], q);
  endtask

  task automatic read_word(input int ch, output logic [31:0] w);
    logic [W-1:0] q;
    for (int p = 0; p < 32 / W; p++) begin
      cpu_access(0, addr(ch, 0, REG_DATA, p * W / 8), '0, q);
      w[p * W +: W] = q;
    end
  endtask

  initial begin
    logic [31:0] sent[NUM];
    logic [31:0] got;
    logic [W-1:0] q;
    done_o = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    for (int j = 0; j < NUM; j++) begin
      cpu_access(1, addr(j, 1, REG_CTRL, 0), W'((j % 2) ? 8'h03 : 8'h02), q);
      // Receiver i listens to transmitter NUM-1-i and must use its rate.
      cpu_access(1, addr(j, 0, REG_CTRL, 0), W'(((NUM - 1 - j) % 2) ? 8'h05 : 8'h04), q);
    end
    for (int j = 0; j < NUM; j++) begin
      sent[j] = ($urandom & 32'h7FFF_FF00) | 32'(j);
      sent[j][31] = ($countones(sent[j][30:0]) % 2) == 0;
      write_word(j, sent[j]);
    end
    repeat (37 * 800 + 200) @(negedge clk);       // one low-speed word plus margin
    for (int i = 0; i < NUM; i++) begin
      cpu_access(0, addr(i, 0, REG_STATUS, 0), '0, q);
      chk(q[0] == 0 && q[3] == 0, $sformatf("receiver %0d has a good word (status %b)",
                                           i, q[7:0]));
      read_word(i, got);
      chk(got == sent[NUM - 1 - i], $sformatf("receiver %0d got %h exp %h", i, got,
                                              sent[NUM - 1 - i]));
      cpu_access(0, addr(i, 0, REG_STATUS, 0), '0, q);
      chk(q[0] == 1, $sformatf("receiver %0d empty after one read", i));
    end
    // A channel number beyond NUM reads as zero.
    if (NUM < 16) begin
      cpu_access(0, addr(NUM, 1, REG_STATUS, 0), '0, q);
      chk(q == '0, "missing channel reads 0");
    end
    done_o = 1;
  end
endmodule
