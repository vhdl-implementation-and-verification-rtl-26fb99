// tx_channel: one ARINC 429 transmit channel.
//
// The CPU writes whole 32-bit words into the Tx FIFO (FIFO_DEPTH words, 512 by default);
// tx_serializer takes the head word as soon as there is one and sends it on TxHi/TxLo,
// so transmission starts as soon as one complete word is in the FIFO and continues
// until the FIFO is empty. Words written while the FIFO is full are lost.
//
// Registers (8 bits each, see arinc_pkg): control (rate, parity insertion, interrupt
// enable) and status (fifo_empty, fifo_half_full = at least FIFO_LEVEL words, fifo_full,
// busy). int_o (int_out_tx) is high while int_enable is set and any of the three FIFO
// flags is high, as the core's description gives for int_out_tx.
// Register port: req_i carries one-cycle read/write strobes; a write strobe on the data
// register pushes req_i.wdata. rdata_o shows the selected register combinationally
// (the data register reads as the head of the FIFO, without popping it).
// The 512-word FIFO, the two 8-bit registers, the start rule and the interrupt rule
// follow the core's description; the register bits and their positions are this
// design's choice.
module tx_channel
  import arinc_pkg::*;
#(
  parameter int unsigned CLK_FREQ_HZ = 10_000_000,
  parameter int unsigned FIFO_DEPTH  = 512,
  parameter int unsigned FIFO_LEVEL  = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  input  chan_req_t   req_i,
  output arinc_word_t rdata_o,
  output logic        int_o,
  output logic        tx_hi_o,
  output logic        tx_lo_o
);
  tx_ctrl_t    ctrl;
  tx_status_t  status;
  logic        fifo_push, fifo_pop;
  arinc_word_t fifo_rdata;
  logic        fifo_empty, fifo_half, fifo_full, fifo_ovf;
  logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_count;
  logic        busy;

  assign fifo_push = req_i.wr && req_i.sel == REG_DATA;

  arinc_fifo #(.WIDTH(32), .DEPTH(FIFO_DEPTH), .LEVEL(FIFO_LEVEL)) u_fifo (
    .clk, .rst_n,
    .push_i     (fifo_push),
    .wdata_i    (req_i.wdata),
    .pop_i      (fifo_pop),
    .rdata_o    (fifo_rdata),
    .empty_o    (fifo_empty),
    .half_full_o(fifo_half),
    .full_o     (fifo_full),
    .overflow_o (fifo_ovf),
    .count_o    (fifo_count)
  );

  tx_serializer #(.CLK_FREQ_HZ(CLK_FREQ_HZ)) u_serializer (
    .clk, .rst_n,
    .low_speed_i    (ctrl.low_speed),
    .parity_enable_i(ctrl.parity_enable),
    .word_valid_i   (!fifo_empty),
    .word_i         (fifo_rdata),
    .load_o         (fifo_pop),
    .tx_hi_o, .tx_lo_o,
    .busy_o         (busy)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ctrl <= '0;
    else if (req_i.wr && req_i.sel == REG_CTRL) ctrl <= tx_ctrl_t'(req_i.wdata[7:0]);
  end

  always_comb begin
    status                = '0;
    status.fifo_empty     = fifo_empty;
    status.fifo_half_full = fifo_half;
    status.fifo_full      = fifo_full;
    status.busy           = busy;
    unique case (req_i.sel)
      REG_DATA:   rdata_o = fifo_rdata;
      REG_CTRL:   rdata_o = 32'(ctrl);
      REG_STATUS: rdata_o = 32'(status);
      default:    rdata_o = '0;
    endcase
    int_o = ctrl.int_enable && (fifo_empty || fifo_half || fifo_full);
  end

  logic unused;
  assign unused = ^{fifo_count, fifo_ovf, req_i.rd};
endmodule
