// rx_channel: one ARINC 429 receive channel.
//
// Data path: RxHi/RxLo -> rx_clock_recovery -> rx_word_assembler (shift register, bit
// counter, gap timer) -> parity check, label compare and SDI compare -> Rx FIFO -> CPU.
// A finished word is written into the FIFO at the clock edge that ends the cycle in which
// the assembler reports it, unless one of the enabled checks rejects it:
//   - parity_enable: a word whose 32 bits do not hold an odd number of ones is dropped
//     and the sticky parity_error status bit is set;
//   - label_compare: a word whose label is not in the label memory is dropped;
//   - sdi_compare:   a word whose SDI bits differ from ctrl.sdi_value is dropped.
// A word that passes while the FIFO is full is lost and sets the sticky overflow bit.
//
// Registers (8 bits each, see arinc_pkg): a control register and a status register. The
// label_reload bit of the control register acts when written with 1 and reads back 0.
// The status flags fifo_empty, fifo_half_full (at least FIFO_LEVEL words) and fifo_full
// come straight from the FIFO; the sticky bits clear when the status register is read.
// int_o (int_out_rx) is high while int_enable is set and any of the three FIFO flags is
// high, the rule the core's description gives for int_out_rx.
//
// Register port: req_i carries one-cycle read and write strobes from the CPU interface.
// rdata_o shows the selected register combinationally; a read strobe on the data
// register pops the FIFO head shown in rdata_o.
// The two 8-bit registers, the label compare, the reload bit 7 and the FIFO flags follow
// the core's description; the other control and status bits and their positions, the
// drop-on-error rule and the FIFO sizes are this design's choice.
module rx_channel
  import arinc_pkg::*;
#(
  parameter int unsigned CLK_FREQ_HZ = 10_000_000,
  parameter int unsigned FIFO_DEPTH  = 64,
  parameter int unsigned FIFO_LEVEL  = 32,
  parameter int unsigned LABEL_DEPTH = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        rx_hi_i,
  input  logic        rx_lo_i,
  input  chan_req_t   req_i,
  output arinc_word_t rdata_o,
  output logic        int_o
);
  rx_ctrl_t    ctrl;
  rx_status_t  status;
  logic        parity_error, gap_error, overflow;

  logic        bit_valid, bit_val, line_error;
  logic        word_valid, asm_gap_error;
  arinc_word_t word;
  logic        parity_bit_unused, parity_ok;
  logic        label_match;
  logic [$clog2(LABEL_DEPTH+1)-1:0] label_count;

  logic        fifo_push, fifo_pop;
  arinc_word_t fifo_rdata;
  logic        fifo_empty, fifo_half, fifo_full, fifo_ovf;
  logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_count;

  logic wr_ctrl, wr_label, rd_status, reload;
  logic parity_reject, label_reject, sdi_reject;

  assign wr_ctrl   = req_i.wr && req_i.sel == REG_CTRL;
  assign wr_label  = req_i.wr && req_i.sel == REG_LABEL;
  assign rd_status = req_i.rd && req_i.sel == REG_STATUS;
  assign fifo_pop  = req_i.rd && req_i.sel == REG_DATA;
  assign reload    = wr_ctrl && req_i.wdata[7];

  rx_clock_recovery #(.CLK_FREQ_HZ(CLK_FREQ_HZ)) u_recovery (
    .clk, .rst_n,
    .low_speed_i (ctrl.low_speed),
    .rx_hi_i, .rx_lo_i,
    .bit_valid_o (bit_valid),
    .bit_o       (bit_val),
    .line_error_o(line_error)
  );

  rx_word_assembler #(.CLK_FREQ_HZ(CLK_FREQ_HZ)) u_assembler (
    .clk, .rst_n,
    .low_speed_i (ctrl.low_speed),
    .bit_valid_i (bit_valid),
    .bit_i       (bit_val),
    .word_valid_o(word_valid),
    .word_o      (word),
    .gap_error_o (asm_gap_error)
  );

  arinc_parity u_parity (
    .word_i      (word),
    .parity_bit_o(parity_bit_unused),
    .parity_ok_o (parity_ok)
  );

  label_memory #(.DEPTH(LABEL_DEPTH)) u_labels (
    .clk, .rst_n,
    .reload_i (reload),
    .wr_i     (wr_label),
    .wlabel_i (req_i.wdata[7:0]),
    .label_i  (word[7:0]),
    .match_o  (label_match),
    .count_o  (label_count)
  );

  always_comb begin
    parity_reject = ctrl.parity_enable && !parity_ok;
    label_reject  = ctrl.label_compare && !label_match;
    sdi_reject    = ctrl.sdi_compare && (word[9:8] != ctrl.sdi_value);
    fifo_push     = word_valid && !parity_reject && !label_reject && !sdi_reject;
  end

  arinc_fifo #(.WIDTH(32), .DEPTH(FIFO_DEPTH), .LEVEL(FIFO_LEVEL)) u_fifo (
    .clk, .rst_n,
    .push_i     (fifo_push),
    .wdata_i    (word),
    .pop_i      (fifo_pop),
    .rdata_o    (fifo_rdata),
    .empty_o    (fifo_empty),
    .half_full_o(fifo_half),
    .full_o     (fifo_full),
    .overflow_o (fifo_ovf),
    .count_o    (fifo_count)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctrl         <= '0;
      parity_error <= 1'b0;
      gap_error    <= 1'b0;
      overflow     <= 1'b0;
    end else begin
      if (wr_ctrl) begin
        ctrl              <= rx_ctrl_t'(req_i.wdata[7:0]);
        ctrl.label_reload <= 1'b0;
      end
      // Sticky error bits: set by an event, cleared by a status read; a new event wins.
      parity_error <= (word_valid && parity_reject) || (parity_error && !rd_status);
      gap_error    <= asm_gap_error || line_error || (gap_error && !rd_status);
      overflow     <= fifo_ovf || (overflow && !rd_status);
    end
  end

  always_comb begin
    status                = '0;
    status.fifo_empty     = fifo_empty;
    status.fifo_half_full = fifo_half;
    status.fifo_full      = fifo_full;
    status.parity_error   = parity_error;
    status.gap_error      = gap_error;
    status.overflow       = overflow;

    unique case (req_i.sel)
      REG_DATA:   rdata_o = fifo_rdata;
      REG_CTRL:   rdata_o = 32'(ctrl);
      REG_STATUS: rdata_o = 32'(status);
      REG_LABEL:  rdata_o = 32'(label_count);
      default:    rdata_o = '0;
    endcase

    int_o = ctrl.int_enable && (fifo_empty || fifo_half || fifo_full);
  end

  // Unused here: the FIFO word count (the flags carry what the CPU sees).
  logic unused;
  assign unused = ^{fifo_count, parity_bit_unused};
endmodule
