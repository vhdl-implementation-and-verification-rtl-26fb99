// tb_arinc_parity: checks the odd-parity generator and checker against $countones
// on fixed corner words and 2000 random words.
module tb_arinc_parity;
  import arinc_pkg::*;
  arinc_word_t word;
  logic parity_bit, parity_ok;
  int checks = 0, failures = 0;

  arinc_parity dut (.word_i(word), .parity_bit_o(parity_bit), .parity_ok_o(parity_ok));

  task automatic check_word(input arinc_word_t w);
    logic exp_bit, exp_ok;
    word = w;
    #1;
    exp_bit = ($countones(w[30:0]) % 2) == 0;   // bit that makes 31 bits + it odd
    exp_ok  = ($countones(w) % 2) == 1;
    checks += 2;
    if (parity_bit !== exp_bit) begin
      failures++;
      $display("FAIL parity_bit word=%h got %b exp %b", w, parity_bit, exp_bit);
    end
    if (parity_ok !== exp_ok) begin
      failures++;
      $display("FAIL parity_ok word=%h got %b exp %b", w, parity_ok, exp_ok);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check_word(32'h0000_0000);   // no ones: parity must be 1
    check_word(32'h8000_0000);
    check_word(32'h7FFF_FFFF);   // 31 ones: parity 0
    check_word(32'hFFFF_FFFF);
    check_word(32'h0000_0001);
    for (int i = 0; i < 2000; i++) check_word($urandom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
