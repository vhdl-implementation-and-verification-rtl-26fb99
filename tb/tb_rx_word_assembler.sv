// tb_rx_word_assembler: feeds recovered-bit strobes for random words in bus order
// (label bits 8..1, then bits 9..32) one bit time apart, and checks the assembled word,
// that word_valid comes one clock after the 32nd bit, and that a word broken off for more
// than two bit times gives gap_error and is not delivered, at both bit rates.
module tb_rx_word_assembler;
  localparam int CLK_HZ = 10_000_000;
  logic clk = 0, rst_n = 0;
  logic low_speed = 0, bit_valid = 0, bit_i = 0;
  logic word_valid, gap_error;
  logic [31:0] word;
  int checks = 0, failures = 0;
  logic [31:0] exp_q[$];
  int gap_errors = 0;
  longint cyc = 0, last_bit_cyc = 0;

  rx_word_assembler #(.CLK_FREQ_HZ(CLK_HZ)) dut (
    .clk, .rst_n, .low_speed_i(low_speed), .bit_valid_i(bit_valid), .bit_i(bit_i),
    .word_valid_o(word_valid), .word_o(word), .gap_error_o(gap_error)
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

  function automatic int bit_clks();
    return low_speed ? CLK_HZ / 12_500 : CLK_HZ / 100_000;
  endfunction

  task automatic strobe(input bit b);
    @(negedge clk);
    bit_valid = 1; bit_i = b;
    @(negedge clk);
    bit_valid = 0;
    last_bit_cyc = cyc;
    repeat (bit_clks() - 2) @(negedge clk);
  endtask

  // Bus order written out by hand: positions 7 down to 0, then 8 up to 31.
  task automatic send_word(input logic [31:0] w, input int nbits);
    int order[32];
    for (int k = 0; k < 8; k++) order[k] = 7 - k;
    for (int k = 8; k < 32; k++) order[k] = k;
    if (nbits == 32) exp_q.push_back(w);
    for (int k = 0; k < nbits; k++) strobe(w[order[k]]);
  endtask

  always @(posedge clk) begin
    if (rst_n && word_valid) begin
      if (exp_q.size() == 0) chk(0, "unexpected word");
      else begin
        automatic logic [31:0] e = exp_q.pop_front();
        chk(word == e, $sformatf("word got %h exp %h", word, e));
        chk(cyc == last_bit_cyc, "word_valid one clock after the 32nd bit");
      end
    end
    if (rst_n && gap_error) gap_errors++;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1;
    send_word(32'h8000_0001, 32);
    send_word(32'h0000_0080, 32);
    for (int i = 0; i < 20; i++) begin
      send_word($urandom, 32);
      repeat (4 * bit_clks()) @(negedge clk);
    end
    send_word($urandom, 12);                      // broken word
    repeat (3 * bit_clks()) @(negedge clk);
    chk(gap_errors == 1, "gap error after broken word");
    send_word($urandom, 32);
    low_speed = 1;
    for (int i = 0; i < 4; i++) send_word($urandom, 32);
    send_word($urandom, 5);
    repeat (3 * bit_clks()) @(negedge clk);
    chk(gap_errors == 2, "gap error at low speed");
    repeat (10) @(negedge clk);
    chk(exp_q.size() == 0, "all words delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
