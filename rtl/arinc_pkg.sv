// arinc_pkg: types and constants shared by the ARINC 429 core.
//
// An ARINC 429 word is 32 bits. Bit 1 of the standard's numbering is word[0] here:
//   word[7:0]   label (bits 1..8), word[9:8] SDI (bits 9..10), word[28:10] data (bits 11..29),
//   word[30:29] SSM (bits 30..31), word[31] parity (bit 32).
// On the bus the label goes out first, bit 8 first, then bits 9..32 (order 8,7,..,1,9,10,..,32).
//
// The register layout and the CPU address map below are this design's own choice; the
// field positions of the ARINC word, the bit order and the two 8-bit registers per
// channel follow the description of the core.
package arinc_pkg;

  typedef logic [31:0] arinc_word_t;
  typedef logic [7:0]  arinc_label_t;

  // Bit rates: 100 kbit/s (high speed) and 12.5 kbit/s (low speed).
  localparam int unsigned HIGH_SPEED_BPS = 100_000;
  localparam int unsigned LOW_SPEED_BPS  = 12_500;

  // Null time the transmitter leaves between words, in bit times (ARINC 429 minimum).
  localparam int unsigned TX_GAP_BITS = 4;

  // Position in the word (0-based) of the n-th bit on the bus (n = 0..31).
  function automatic int unsigned wire_to_word_pos(input int unsigned n);
    return (n < 8) ? 7 - n : n;
  endfunction

  // Odd parity bit for bits 1..31 of a word (makes the total count of ones odd).
  function automatic logic odd_parity(input logic [30:0] bits);
    return ~(^bits);
  endfunction

  // Rx control register (8 bits).
  typedef struct packed {
    logic       label_reload;   // [7] write 1: start a new label list (old entries ignored)
    logic       int_enable;     // [6] drive int_out_rx from the FIFO flags
    logic [1:0] sdi_value;      // [5:4] SDI a word must carry when sdi_compare is set
    logic       sdi_compare;    // [3] keep only words whose SDI equals sdi_value
    logic       parity_enable;  // [2] check odd parity, drop words that fail
    logic       label_compare;  // [1] keep only words whose label is in label memory
    logic       low_speed;      // [0] 0: 100 kbit/s, 1: 12.5 kbit/s
  } rx_ctrl_t;

  // Rx status register (8 bits). Bits 3, 4 and 5 are sticky and clear when the register is read.
  typedef struct packed {
    logic [1:0] reserved;       // [7:6]
    logic       overflow;       // [5] a word was dropped because the FIFO was full
    logic       gap_error;      // [4] a word stopped before its 32nd bit, or both lines were high
    logic       parity_error;   // [3] a word failed the parity check
    logic       fifo_full;      // [2]
    logic       fifo_half_full; // [1] FIFO holds at least RX_FIFO_LEVEL words
    logic       fifo_empty;     // [0]
  } rx_status_t;

  // Tx control register (8 bits).
  typedef struct packed {
    logic [4:0] reserved;       // [7:3]
    logic       int_enable;     // [2] drive int_out_tx from the FIFO flags
    logic       parity_enable;  // [1] replace bit 32 by odd parity
    logic       low_speed;      // [0] 0: 100 kbit/s, 1: 12.5 kbit/s
  } tx_ctrl_t;

  // Tx status register (8 bits).
  typedef struct packed {
    logic [3:0] reserved;       // [7:4]
    logic       busy;           // [3] a word is on the bus
    logic       fifo_full;      // [2]
    logic       fifo_half_full; // [1] FIFO holds at least TX_FIFO_LEVEL words
    logic       fifo_empty;     // [0]
  } tx_status_t;

  // CPU address map, cpu_add[8:0]:
  //   [8:5] channel number (0..15)
  //   [4]   0: receiver, 1: transmitter
  //   [3:2] register: 0 data (FIFO word), 1 control, 2 status, 3 label memory (Rx only)
  //   [1:0] byte offset inside the 32-bit data word for 8- and 16-bit CPU buses
  typedef enum logic [1:0] {
    REG_DATA   = 2'd0,
    REG_CTRL   = 2'd1,
    REG_STATUS = 2'd2,
    REG_LABEL  = 2'd3
  } reg_sel_e;

  // One register access from the CPU interface to a channel. wdata carries a whole word
  // for the data register (assembled from the CPU pieces); control and label writes use [7:0].
  typedef struct packed {
    logic        wr;     // single-cycle write strobe
    logic        rd;     // single-cycle read strobe (side effects: FIFO pop, sticky clear)
    reg_sel_e    sel;
    arinc_word_t wdata;
  } chan_req_t;

endpackage
