// rx_clock_recovery: data synchroniser and bit-clock recovery for one ARINC 429 receiver.
//
// The bus uses bipolar return-to-zero coding: during the first half of each bit time one
// of the two line-receiver outputs is high (RxHi for a one, RxLo for a zero), and during
// the second half both are low (null). The bit clock is therefore taken from the data:
// every rising edge of (RxHi | RxLo) starts a bit.
//
// How it works: RxHi and RxLo pass through two flip-flops each into the clock domain.
// After a rising edge the module waits a quarter of a bit time at the programmed rate,
// then samples both lines. Exactly one line high gives a bit (bit_valid_o pulses for one
// cycle with bit_o); both lines high gives line_error_o; both low counts as a glitch and
// is ignored. A new bit is only accepted after both lines have returned to null.
// Latency from the line edge to bit_valid_o: 2 synchroniser cycles + QUARTER + 1 cycles.
// The quarter-bit sampling point and the glitch rule are this design's choice; the
// description of the core gives only the block's name and its task of recovering the clock.
module rx_clock_recovery
  import arinc_pkg::*;
#(
  parameter int unsigned CLK_FREQ_HZ = 10_000_000
) (
  input  logic clk,
  input  logic rst_n,
  input  logic low_speed_i,   // 0: 100 kbit/s, 1: 12.5 kbit/s
  input  logic rx_hi_i,
  input  logic rx_lo_i,
  output logic bit_valid_o,   // one-cycle strobe: a bit was recovered
  output logic bit_o,         // value of that bit
  output logic line_error_o   // one-cycle strobe: both lines were high at the sample point
);
  localparam int unsigned Q_HI = CLK_FREQ_HZ / HIGH_SPEED_BPS / 4;
  localparam int unsigned Q_LO = CLK_FREQ_HZ / LOW_SPEED_BPS / 4;
  localparam int unsigned CW   = $clog2(Q_LO + 1);

  typedef enum logic [1:0] {WAIT_NULL, ARMED, SAMPLE} state_e;

  logic [1:0] hi_sync, lo_sync;
  logic       hi, lo;
  state_e     state;
  logic [CW-1:0] cnt;
  logic [CW-1:0] quarter;

  assign hi = hi_sync[1];
  assign lo = lo_sync[1];
  assign quarter = low_speed_i ? CW'(Q_LO) : CW'(Q_HI);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hi_sync <= '0;
      lo_sync <= '0;
    end else begin
      hi_sync <= {hi_sync[0], rx_hi_i};
      lo_sync <= {lo_sync[0], rx_lo_i};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= WAIT_NULL;
      cnt          <= '0;
      bit_valid_o  <= 1'b0;
      bit_o        <= 1'b0;
      line_error_o <= 1'b0;
    end else begin
      bit_valid_o  <= 1'b0;
      line_error_o <= 1'b0;
      unique case (state)
        WAIT_NULL: if (!hi && !lo) state <= ARMED;
        ARMED: if (hi || lo) begin
          state <= SAMPLE;
          cnt   <= '0;
        end
        SAMPLE: begin
          if (cnt >= quarter - 1'b1) begin
            state <= WAIT_NULL;
            if (hi && lo) begin
              line_error_o <= 1'b1;
            end else if (hi || lo) begin
              bit_valid_o <= 1'b1;
              bit_o       <= hi;
            end
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        default: state <= WAIT_NULL;
      endcase
    end
  end
endmodule
