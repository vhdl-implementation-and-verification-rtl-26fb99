// core429: ARINC 429 bus interface core, top level.
//
// Connects a host processor to ARINC 429 buses: NUM_RX independent receive channels and
// NUM_TX independent transmit channels (one of each by default, up to 16 of each, the
// channel number being cpu_add[8:5]), all behind one synchronous CPU port.
// Receivers recover the bit clock from RxHi/RxLo, assemble 32-bit words, check parity,
// filter by label and SDI and buffer the words in a FIFO for the CPU. Transmitters take
// words the CPU writes into a 512-word FIFO and send them as bipolar return-to-zero
// pulses on TxHi/TxLo. The analog line receivers and drivers sit outside the core.
// int_out is the OR of every channel's interrupt (int_out_rx, int_out_tx), high while
// a channel's interrupt is enabled and one of its FIFO flags (empty, half full, full)
// is set.
// Default sizes: 16-bit CPU bus, 10 MHz clock, 64-word Rx FIFOs with level 32, 512-word
// Tx FIFOs with level 256, 256-entry label memories. The 512-word Tx FIFO, one channel
// of each kind, the 16-channel limit, the 9-bit address and the OR of the interrupts
// follow the core's description; the other sizes are this design's choice.
module core429
  import arinc_pkg::*;
#(
  parameter int unsigned CPU_DATA_WIDTH = 16,
  parameter int unsigned NUM_RX         = 1,
  parameter int unsigned NUM_TX         = 1,
  parameter int unsigned CLK_FREQ_HZ    = 10_000_000,
  parameter int unsigned RX_FIFO_DEPTH  = 64,
  parameter int unsigned RX_FIFO_LEVEL  = 32,
  parameter int unsigned TX_FIFO_DEPTH  = 512,
  parameter int unsigned TX_FIFO_LEVEL  = 256,
  parameter int unsigned LABEL_DEPTH    = 256
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // CPU port
  input  logic                      cpu_ren,    // active low
  input  logic                      cpu_wen,    // active low
  input  logic [8:0]                cpu_add,
  input  logic [CPU_DATA_WIDTH-1:0] cpu_din,
  output logic [CPU_DATA_WIDTH-1:0] cpu_dout,
  output logic                      cpu_wait,
  output logic                      int_out,
  // ARINC 429 line receiver outputs and line driver inputs
  input  logic [NUM_RX-1:0]         rx_hi,
  input  logic [NUM_RX-1:0]         rx_lo,
  output logic [NUM_TX-1:0]         tx_hi,
  output logic [NUM_TX-1:0]         tx_lo
);
  chan_req_t   rx_req   [NUM_RX];
  arinc_word_t rx_rdata [NUM_RX];
  logic [NUM_RX-1:0] int_rx;
  chan_req_t   tx_req   [NUM_TX];
  arinc_word_t tx_rdata [NUM_TX];
  logic [NUM_TX-1:0] int_tx;

  initial begin
    assert (NUM_RX >= 1 && NUM_RX <= 16 && NUM_TX >= 1 && NUM_TX <= 16)
      else $error("core429: 1 to 16 channels of each kind");
  end

  cpu_interface #(
    .CPU_DATA_WIDTH(CPU_DATA_WIDTH), .NUM_RX(NUM_RX), .NUM_TX(NUM_TX)
  ) u_cpu (
    .clk, .rst_n,
    .cpu_ren, .cpu_wen, .cpu_add, .cpu_din, .cpu_dout, .cpu_wait,
    .rx_req_o  (rx_req),
    .rx_rdata_i(rx_rdata),
    .tx_req_o  (tx_req),
    .tx_rdata_i(tx_rdata)
  );

  for (genvar i = 0; i < NUM_RX; i++) begin : g_rx
    rx_channel #(
      .CLK_FREQ_HZ(CLK_FREQ_HZ), .FIFO_DEPTH(RX_FIFO_DEPTH),
      .FIFO_LEVEL(RX_FIFO_LEVEL), .LABEL_DEPTH(LABEL_DEPTH)
    ) u_rx (
      .clk, .rst_n,
      .rx_hi_i(rx_hi[i]),
      .rx_lo_i(rx_lo[i]),
      .req_i  (rx_req[i]),
      .rdata_o(rx_rdata[i]),
      .int_o  (int_rx[i])
    );
  end

  for (genvar i = 0; i < NUM_TX; i++) begin : g_tx
    tx_channel #(
      .CLK_FREQ_HZ(CLK_FREQ_HZ), .FIFO_DEPTH(TX_FIFO_DEPTH), .FIFO_LEVEL(TX_FIFO_LEVEL)
    ) u_tx (
      .clk, .rst_n,
      .req_i  (tx_req[i]),
      .rdata_o(tx_rdata[i]),
      .int_o  (int_tx[i]),
      .tx_hi_o(tx_hi[i]),
      .tx_lo_o(tx_lo[i])
    );
  end

  assign int_out = (|int_rx) || (|int_tx);
endmodule
