// tb_core429: end-to-end test of the whole core at its default parameters (16-bit CPU
// bus, 10 MHz clock, one receiver, one transmitter, 64-word Rx FIFO, 512-word Tx FIFO).
// The testbench plays the host CPU through the cpu_* port, loops the transmitter's
// TxHi/TxLo back into the receiver, and can switch the receiver over to its own bus model
// to send words with wrong parity or broken-off words. Every word read from the Rx FIFO is
// compared with the word the testbench expects from its own bookkeeping.
// Mechanisms made to happen and counted: word transfer, Tx parity insertion, Rx parity
// drop, label reject, label reload, SDI reject, gap error, low-speed mode, Tx FIFO full,
// Rx FIFO half full, Rx FIFO full with overflow, interrupt. One that never happened
// counts as a failure.
module tb_core429;
  import arinc_pkg::*;
  localparam int CLK_HZ = 10_000_000;
  localparam int W = 16;
  logic clk = 0, rst_n = 0;
  logic cpu_ren = 1, cpu_wen = 1, cpu_wait, int_out;
  logic [8:0] cpu_add = 0;
  logic [W-1:0] cpu_din = 0, cpu_dout;
  logic [0:0] rx_hi, rx_lo, tx_hi, tx_lo;
  logic use_model = 0, m_hi = 0, m_lo = 0;
  int checks = 0, failures = 0;

  typedef enum int {
    M_XFER, M_TX_PARITY, M_RX_PARITY_DROP, M_LABEL_REJECT, M_LABEL_RELOAD, M_SDI_REJECT,
    M_GAP_ERROR, M_LOW_SPEED, M_TX_FULL, M_RX_HALF, M_RX_FULL_OVF, M_INTERRUPT, M_COUNT
  } mech_e;
  int mech[M_COUNT];

  core429 dut (
    .clk, .rst_n, .cpu_ren, .cpu_wen, .cpu_add, .cpu_din, .cpu_dout, .cpu_wait, .int_out,
    .rx_hi, .rx_lo, .tx_hi, .tx_lo
  );

  assign rx_hi = use_model ? m_hi : tx_hi;
  assign rx_lo = use_model ? m_lo : tx_lo;

  always #50 clk = ~clk;     // 10 MHz

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic logic [8:0] addr(input bit tx, input reg_sel_e sel, input int off);
    return {4'd0, tx, 2'(sel), 2'(off)};
  endfunction

  task automatic cpu_access(input bit write, input logic [8:0] a, input logic [W-1:0] d,
                            output logic [W-1:0] q);
    @(negedge clk);
    cpu_add = a; cpu_din = d;
    if (write) cpu_wen = 0; else cpu_ren = 0;
    do @(negedge clk); while (cpu_wait);
    q = cpu_dout;
    cpu_wen = 1; cpu_ren = 1;
  endtask

  task automatic wr_reg(input bit tx, input reg_sel_e sel, input logic [7:0] d);
    logic [W-1:0] q;
    cpu_access(1, addr(tx, sel, 0), W'(d), q);
  endtask

  task automatic rd_reg(input bit tx, input reg_sel_e sel, output logic [7:0] d);
    logic [W-1:0] q;
    cpu_access(0, addr(tx, sel, 0), 0, q);
    d = q[7:0];
  endtask

  task automatic tx_word(input logic [31:0] w);
    logic [W-1:0] q;
    cpu_access(1, addr(1, REG_DATA, 0), w[15:0], q);
    cpu_access(1, addr(1, REG_DATA, 2), w[31:16], q);
  endtask

  task automatic rx_word(output logic [31:0] w);
    logic [W-1:0] q;
    cpu_access(0, addr(0, REG_DATA, 0), 0, q);
    w[15:0] = q;
    cpu_access(0, addr(0, REG_DATA, 2), 0, q);
    w[31:16] = q;
  endtask

  function automatic logic [31:0] odd(input logic [31:0] w);
    w[31] = ($countones(w[30:0]) % 2) == 0;
    return w;
  endfunction

  task automatic expect_rx(input logic [31:0] e, input string what);
    logic [31:0] w;
    rx_word(w);
    chk(w == e, $sformatf("%s: got %h exp %h", what, w, e));
  endtask

  task automatic expect_rx_empty(input string what);
    logic [7:0] s;
    rd_reg(0, REG_STATUS, s);
    chk(s[0] == 1, $sformatf("%s: Rx FIFO empty (status %b)", what, s));
  endtask

  // Wait until the transmitter has sent everything (status busy and empty).
  task automatic wait_tx_idle();
    logic [7:0] s;
    do begin
      repeat (200) @(negedge clk);
      rd_reg(1, REG_STATUS, s);
    end while (s[3] || !s[0]);
  endtask

  // Receiver-side bus model, used instead of the loop-back.
  task automatic model_word(input logic [31:0] w, input int nbits, input int bc);
    for (int k = 0; k < nbits; k++) begin
      automatic bit b = (k < 8) ? w[7 - k] : w[k];
      @(negedge clk);
      m_hi = b; m_lo = !b;
      repeat (bc / 2) @(negedge clk);
      m_hi = 0; m_lo = 0;
      repeat (bc / 2 - 1) @(negedge clk);
    end
    repeat (4 * bc) @(negedge clk);
  endtask

  // Bit period seen on the transmitter lines.
  longint cyc = 0, last_rise = -1, last_period = 0;
  logic prev_act = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if ((tx_hi[0] | tx_lo[0]) && !prev_act) begin
      if (last_rise >= 0) last_period = cyc - last_rise;
      last_rise = cyc;
    end
    prev_act = tx_hi[0] | tx_lo[0];
    if (int_out) mech[M_INTERRUPT]++;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] w[4];
    logic [31:0] big[$];
    logic [7:0] s;
    longint t0;
    repeat (4) @(posedge clk);
    rst_n = 1;

    // 1. Loop-back at 100 kbit/s with parity insertion.
    wr_reg(1, REG_CTRL, 8'h02);
    wr_reg(0, REG_CTRL, 8'h04);
    for (int i = 0; i < 3; i++) begin
      w[i] = (i == 0) ? 32'h0 : $urandom & 32'h7FFF_FFFF;
      if ($countones(w[i][30:0]) % 2 == 0) mech[M_TX_PARITY]++;  // bit 32 must become 1
      tx_word(w[i]);
    end
    wait_tx_idle();
    chk(last_period == 100, $sformatf("bit period %0d clocks at 100 kbit/s", last_period));
    for (int i = 0; i < 3; i++) begin
      expect_rx(odd(w[i]), "loop-back word");
      mech[M_XFER]++;
    end
    expect_rx_empty("after loop-back");

    // 2. Label compare with labels 0x21 and 0x43.
    wr_reg(0, REG_CTRL, 8'h02);
    wr_reg(0, REG_LABEL, 8'h21);
    wr_reg(0, REG_LABEL, 8'h43);
    w[0] = ($urandom & 32'hFFFF_FF00) | 32'h21;
    w[1] = ($urandom & 32'hFFFF_FF00) | 32'h99;
    w[2] = ($urandom & 32'hFFFF_FF00) | 32'h43;
    for (int i = 0; i < 3; i++) tx_word(w[i]);
    wait_tx_idle();
    expect_rx(odd(w[0]), "label 0x21");
    expect_rx(odd(w[2]), "label 0x43");
    rd_reg(0, REG_STATUS, s);
    chk(s[0], "label 0x99 rejected");
    if (s[0]) mech[M_LABEL_REJECT]++;

    // 3. Reload the label memory with 0x99 only.
    wr_reg(0, REG_CTRL, 8'h82);
    wr_reg(0, REG_LABEL, 8'h99);
    tx_word(w[0]);
    tx_word(w[1]);
    wait_tx_idle();
    expect_rx(odd(w[1]), "label 0x99 after reload");
    rd_reg(0, REG_STATUS, s);
    chk(s[0], "old label 0x21 ignored after reload");
    if (s[0]) mech[M_LABEL_RELOAD]++;

    // 4. SDI compare: keep SDI 3.
    wr_reg(0, REG_CTRL, 8'h38);
    w[0] = $urandom | 32'h0000_0300;
    w[1] = $urandom & 32'hFFFF_FCFF;
    tx_word(w[0]);
    tx_word(w[1]);
    wait_tx_idle();
    expect_rx(odd(w[0]), "SDI 3");
    rd_reg(0, REG_STATUS, s);
    chk(s[0], "SDI 0 rejected");
    if (s[0]) mech[M_SDI_REJECT]++;

    // 5. Parity check: the transmitter sends bit 32 as written, one word is wrong.
    wr_reg(1, REG_CTRL, 8'h00);
    wr_reg(0, REG_CTRL, 8'h04);
    w[0] = odd($urandom);
    w[1] = w[0] ^ 32'h8000_0000;
    tx_word(w[1]);
    tx_word(w[0]);
    wait_tx_idle();
    rd_reg(0, REG_STATUS, s);
    chk(s[3] == 1, "parity error flagged");
    expect_rx(w[0], "good-parity word kept");
    rd_reg(0, REG_STATUS, s);
    chk(s == 8'h01, $sformatf("parity error cleared, FIFO empty: %b", s));
    mech[M_RX_PARITY_DROP]++;

    // 6. Gap error from a broken-off word on the receiver's own bus model.
    use_model = 1;
    model_word($urandom, 9, 100);
    repeat (300) @(negedge clk);
    rd_reg(0, REG_STATUS, s);
    chk(s[4] == 1 && s[0] == 1, $sformatf("gap error, nothing stored: %b", s));
    if (s[4]) mech[M_GAP_ERROR]++;
    use_model = 0;

    // 7. Low speed on both sides.
    wr_reg(1, REG_CTRL, 8'h03);
    wr_reg(0, REG_CTRL, 8'h01);
    w[0] = $urandom;
    w[1] = $urandom;
    t0 = cyc;
    tx_word(w[0]);
    tx_word(w[1]);
    wait_tx_idle();
    chk(last_period == 800, $sformatf("bit period %0d clocks at 12.5 kbit/s", last_period));
    chk(cyc - t0 >= 2 * 36 * 800, "two low-speed words take at least 72 bit times");
    expect_rx(odd(w[0]), "low-speed word 1");
    expect_rx(odd(w[1]), "low-speed word 2");
    mech[M_LOW_SPEED]++;

    // 8. FIFO limits and interrupt: fill the 512-word Tx FIFO at high speed, let the
    //    receiver fill its 64-word FIFO and overflow.
    @(negedge clk);
    chk(int_out == 0, "no interrupt while both are disabled");
    wr_reg(1, REG_CTRL, 8'h04);
    @(negedge clk);
    chk(int_out == 1, "interrupt from empty Tx FIFO alone");
    wr_reg(1, REG_CTRL, 8'h00);
    wr_reg(0, REG_CTRL, 8'h40);
    @(negedge clk);
    chk(int_out == 1, "interrupt from empty Rx FIFO alone");
    wr_reg(1, REG_CTRL, 8'h04);
    for (int i = 0; i < 513; i++) begin
      automatic logic [31:0] x = $urandom;
      big.push_back(x);
      tx_word(x);
    end
    rd_reg(1, REG_STATUS, s);
    chk(s[2] && s[1] && s[3], $sformatf("Tx FIFO full, half full, busy: %b", s));
    if (s[2]) mech[M_TX_FULL]++;
    chk(int_out == 1, "interrupt while Tx FIFO full");
    // 33 words in: Rx FIFO past its level of 32.
    repeat (33 * 3601 + 500) @(negedge clk);
    rd_reg(0, REG_STATUS, s);
    chk(s[1] && !s[2], $sformatf("Rx FIFO half full: %b", s));
    if (s[1]) mech[M_RX_HALF]++;
    repeat (33 * 3601) @(negedge clk);
    rd_reg(0, REG_STATUS, s);
    chk(s[2] && s[5], $sformatf("Rx FIFO full with overflow: %b", s));
    if (s[2] && s[5]) mech[M_RX_FULL_OVF]++;
    for (int i = 0; i < 64; i++) expect_rx(big[i], "word from the full Rx FIFO");

    for (int m = 0; m < M_COUNT; m++) begin
      chk(mech[m] > 0, $sformatf("mechanism %s happened", mech_e'(m)));
      $display("mechanism %-18s %0d", mech_e'(m), mech[m]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
