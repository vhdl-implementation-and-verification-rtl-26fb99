// arinc_parity: odd-parity generator and checker for one ARINC 429 word.
//
// ARINC 429 puts in bit 32 (word[31]) the bit that makes the count of ones in the whole
// word odd. The transmitter uses parity_bit to fill bit 32 when parity insertion is on;
// the receiver uses parity_ok to check a received word. Purely combinational.
// That the parity is odd is taken from the ARINC 429 standard; the description of the
// core only says that parity is inserted and checked.
module arinc_parity
  import arinc_pkg::*;
(
  input  arinc_word_t word_i,
  output logic        parity_bit_o,  // odd parity of word_i[30:0]
  output logic        parity_ok_o    // word_i[31:0] holds an odd number of ones
);
  always_comb begin
    parity_bit_o = odd_parity(word_i[30:0]);
    parity_ok_o  = ^word_i;
  end
endmodule
