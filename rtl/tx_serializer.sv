// tx_serializer: parallel-to-serial register, parity generator and waveform shaper of
// one ARINC 429 transmitter, with the control logic that loads and shifts it.
//
// When word_valid_i shows a word at the FIFO head and the serializer is idle, it takes
// the word (load_o pulses for one cycle, which pops the FIFO), puts odd parity into bit
// 32 if parity_enable_i is set, and reorders it into bus order 8,7,..,1,9,10,..,32 in a
// 32-bit shift register. Each bit then lasts one bit time (CLK_FREQ_HZ/100k or
// CLK_FREQ_HZ/12.5k clocks; the rate is latched at load): during the first half the
// waveform shaper drives tx_hi_o for a one or tx_lo_o for a zero, during the second half
// both are low (bipolar return-to-zero). The register shifts at the end of each bit.
// After bit 32 the lines stay null for TX_GAP_BITS (4) bit times before the next word can
// be loaded, so back-to-back words start every 36 bit times plus one clock: 360 us at
// 100 kbit/s, 2.88 ms at 12.5 kbit/s. The lines are registered: the first bit appears
// on them one clock after the cycle that follows load_o. busy_o is high from the cycle
// after load_o to the end of the gap.
// Coding, bit order and parity insertion follow the core's description and ARINC 429;
// the four-bit gap (the ARINC minimum) and odd parity are taken from the standard.
module tx_serializer
  import arinc_pkg::*;
#(
  parameter int unsigned CLK_FREQ_HZ = 10_000_000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        low_speed_i,
  input  logic        parity_enable_i,
  input  logic        word_valid_i,
  input  arinc_word_t word_i,
  output logic        load_o,
  output logic        tx_hi_o,
  output logic        tx_lo_o,
  output logic        busy_o
);
  localparam int unsigned BIT_HI = CLK_FREQ_HZ / HIGH_SPEED_BPS;
  localparam int unsigned BIT_LO = CLK_FREQ_HZ / LOW_SPEED_BPS;
  localparam int unsigned CW     = $clog2(BIT_LO + 1);

  typedef enum logic [1:0] {IDLE, SEND, GAP} state_e;

  state_e        state;
  logic [31:0]   shreg;      // next bit to send in shreg[0]
  logic [5:0]    bit_idx;    // bits sent in SEND, bit times of null in GAP
  logic [CW-1:0] clk_cnt;    // clocks into the current bit time
  logic          slow;       // rate latched at load
  logic [CW-1:0] bit_clks, half_clks;
  arinc_word_t   word_p;
  logic          parity_bit, parity_ok_unused;
  logic [31:0]   wire_order;

  arinc_parity u_parity (
    .word_i      (word_i),
    .parity_bit_o(parity_bit),
    .parity_ok_o (parity_ok_unused)
  );

  always_comb begin
    word_p = word_i;
    if (parity_enable_i) word_p[31] = parity_bit;
    for (int unsigned n = 0; n < 32; n++) wire_order[n] = word_p[wire_to_word_pos(n)];
    bit_clks  = slow ? CW'(BIT_LO) : CW'(BIT_HI);
    half_clks = bit_clks >> 1;
    load_o    = (state == IDLE) && word_valid_i;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= IDLE;
      shreg   <= '0;
      bit_idx <= '0;
      clk_cnt <= '0;
      slow    <= 1'b0;
      tx_hi_o <= 1'b0;
      tx_lo_o <= 1'b0;
    end else begin
      unique case (state)
        IDLE: begin
          tx_hi_o <= 1'b0;
          tx_lo_o <= 1'b0;
          if (word_valid_i) begin
            shreg   <= wire_order;
            slow    <= low_speed_i;
            bit_idx <= '0;
            clk_cnt <= '0;
            state   <= SEND;
          end
        end
        SEND: begin
          // Waveform shaper: first half of the bit time carries the bit, second half null.
          tx_hi_o <= (clk_cnt < half_clks) &&  shreg[0];
          tx_lo_o <= (clk_cnt < half_clks) && !shreg[0];
          if (clk_cnt == bit_clks - 1'b1) begin
            clk_cnt <= '0;
            shreg   <= {1'b0, shreg[31:1]};
            if (bit_idx == 6'd31) begin
              bit_idx <= '0;
              state   <= GAP;
            end else begin
              bit_idx <= bit_idx + 1'b1;
            end
          end else begin
            clk_cnt <= clk_cnt + 1'b1;
          end
        end
        GAP: begin
          tx_hi_o <= 1'b0;
          tx_lo_o <= 1'b0;
          if (clk_cnt == bit_clks - 1'b1) begin
            clk_cnt <= '0;
            if (bit_idx == 6'(TX_GAP_BITS - 1)) state <= IDLE;
            else bit_idx <= bit_idx + 1'b1;
          end else begin
            clk_cnt <= clk_cnt + 1'b1;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  assign busy_o = (state != IDLE);

  // Never both lines high.
  assert property (@(posedge clk) disable iff (!rst_n) !(tx_hi_o && tx_lo_o))
    else $error("tx_serializer: TxHi and TxLo both high");

  logic unused;
  assign unused = parity_ok_unused;
endmodule
