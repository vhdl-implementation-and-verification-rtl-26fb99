// tb_tx_serializer: gives the serializer queued random words, with and without parity
// insertion and at both rates, and decodes TxHi/TxLo with an independent bus monitor.
// Checks each received word (bit order 8..1, 9..32; odd parity in bit 32 when enabled),
// that every pulse lasts half a bit time and pulses are one bit time apart, that
// back-to-back words start 36 bit times + 1 clock apart (32 bits + 4 null bit times),
// and that both lines are never high together.
module tb_tx_serializer;
  localparam int CLK_HZ = 10_000_000;
  logic clk = 0, rst_n = 0;
  logic low_speed = 0, parity_en = 0;
  logic word_valid;
  logic [31:0] word_i;
  logic load, tx_hi, tx_lo, busy;
  int checks = 0, failures = 0;
  logic [31:0] src_q[$];    // words waiting for the serializer
  logic [31:0] exp_q[$];    // words expected on the bus
  longint cyc = 0;

  tx_serializer #(.CLK_FREQ_HZ(CLK_HZ)) dut (
    .clk, .rst_n, .low_speed_i(low_speed), .parity_enable_i(parity_en),
    .word_valid_i(word_valid), .word_i(word_i), .load_o(load),
    .tx_hi_o(tx_hi), .tx_lo_o(tx_lo), .busy_o(busy)
  );

  always #50 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  assign word_valid = src_q.size() > 0;
  assign word_i     = word_valid ? src_q[0] : 32'h0;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic int bit_clks();
    return low_speed ? CLK_HZ / 12_500 : CLK_HZ / 100_000;
  endfunction

  // The serializer takes the head word at the clock edge where load is high; the model
  // FIFO drops it half a cycle later so the word stays stable around that edge.
  logic load_q = 0;
  always @(posedge clk) load_q <= load;
  always @(negedge clk) if (rst_n && load_q) void'(src_q.pop_front());

  // Bus monitor.
  logic prev_act = 0;
  longint rise_cyc = 0, prev_rise = -1, word_start = -1, prev_word_start = -1;
  int nbits = 0;
  logic [31:0] rx_bits;
  int words_seen = 0, back_to_back = 0;
  always @(posedge clk) begin
    logic act;
    act = tx_hi | tx_lo;
    if (rst_n) begin
      chk(!(tx_hi && tx_lo), "lines never both high");
      if (act && !prev_act) begin
        if (nbits == 0) begin
          prev_word_start = word_start;
          word_start = cyc;
        end else begin
          chk(cyc - prev_rise == bit_clks(), "bit period");
        end
        rise_cyc  = cyc;
        prev_rise = cyc;
        rx_bits[nbits] = tx_hi;
        nbits++;
        if (nbits == 32) begin
          logic [31:0] w, e;
          for (int k = 0; k < 8; k++) w[7 - k] = rx_bits[k];
          for (int k = 8; k < 32; k++) w[k] = rx_bits[k];
          e = exp_q.pop_front();
          chk(w == e, $sformatf("word got %h exp %h", w, e));
          words_seen++;
          if (prev_word_start >= 0 && word_start - prev_word_start == 36 * bit_clks() + 1)
            back_to_back++;
          nbits = 0;
        end
      end
      if (!act && prev_act) chk(cyc - rise_cyc == bit_clks() / 2, "pulse is half a bit");
    end
    prev_act = act;
  end

  task automatic queue_word(input logic [31:0] w);
    logic [31:0] e = w;
    if (parity_en) e[31] = ($countones(w[30:0]) % 2) == 0;
    src_q.push_back(w);
    exp_q.push_back(e);
  endtask

  task automatic wait_idle();
    while (src_q.size() > 0 || busy) @(posedge clk);
    repeat (3) @(posedge clk);
  endtask

  initial begin
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    @(negedge clk);
    for (int i = 0; i < 6; i++) queue_word($urandom);
    wait_idle();
    @(negedge clk);
    parity_en = 1;
    queue_word(32'h0000_0000);
    queue_word(32'hFFFF_FFFF);
    for (int i = 0; i < 6; i++) queue_word($urandom);
    wait_idle();
    @(negedge clk);
    low_speed = 1;
    for (int i = 0; i < 3; i++) queue_word($urandom);
    wait_idle();
    chk(words_seen == 17, $sformatf("17 words sent, saw %0d", words_seen));
    chk(back_to_back >= 12, $sformatf("back-to-back word period, %0d", back_to_back));
    chk(exp_q.size() == 0, "no word missing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
