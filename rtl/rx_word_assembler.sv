// rx_word_assembler: 32-bit shift register, bit counter and word gap timer of a receiver.
//
// Recovered bits arrive in bus order 8,7,..,1,9,10,..,32. Each bit is shifted into a
// 32-bit register and counted. When the 32nd bit is in, the register is unscrambled so
// that word_o[0] is ARINC bit 1 and word_o[31] the parity bit, and word_valid_o pulses
// for one cycle (one clock after the 32nd bit strobe).
// The gap timer counts clocks since the last bit while a word is in progress. If no bit
// arrives within GAP_LIMIT_BITS bit times, the partial word is thrown away, the bit
// counter is cleared and gap_error_o pulses. Idle null between words is not an error.
// The bit order follows the description of the core; the two-bit-time limit of the gap
// check is this design's choice (the description names a "word gap timer" and a
// "gap check" without giving the limit).
module rx_word_assembler
  import arinc_pkg::*;
#(
  parameter int unsigned CLK_FREQ_HZ    = 10_000_000,
  parameter int unsigned GAP_LIMIT_BITS = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        low_speed_i,
  input  logic        bit_valid_i,
  input  logic        bit_i,
  output logic        word_valid_o,
  output arinc_word_t word_o,
  output logic        gap_error_o
);
  localparam int unsigned LIM_HI = GAP_LIMIT_BITS * (CLK_FREQ_HZ / HIGH_SPEED_BPS);
  localparam int unsigned LIM_LO = GAP_LIMIT_BITS * (CLK_FREQ_HZ / LOW_SPEED_BPS);
  localparam int unsigned TW     = $clog2(LIM_LO + 1);

  logic [31:0]   shreg;       // bit that came n-th is at shreg[n] once 32 are in
  logic [5:0]    bit_count;
  logic [TW-1:0] gap_timer;
  logic [TW-1:0] gap_limit;

  assign gap_limit = low_speed_i ? TW'(LIM_LO) : TW'(LIM_HI);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg        <= '0;
      bit_count    <= '0;
      gap_timer    <= '0;
      word_valid_o <= 1'b0;
      gap_error_o  <= 1'b0;
    end else begin
      word_valid_o <= 1'b0;
      gap_error_o  <= 1'b0;
      if (bit_valid_i) begin
        shreg     <= {bit_i, shreg[31:1]};
        gap_timer <= '0;
        if (bit_count == 6'd31) begin
          bit_count    <= '0;
          word_valid_o <= 1'b1;
        end else begin
          bit_count <= bit_count + 1'b1;
        end
      end else if (bit_count != '0) begin
        if (gap_timer >= gap_limit) begin
          bit_count   <= '0;
          gap_timer   <= '0;
          gap_error_o <= 1'b1;
        end else begin
          gap_timer <= gap_timer + 1'b1;
        end
      end
    end
  end

  always_comb begin
    for (int unsigned n = 0; n < 32; n++) word_o[wire_to_word_pos(n)] = shreg[n];
  end
endmodule
