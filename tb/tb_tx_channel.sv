// tb_tx_channel: writes words into one transmit channel (10 MHz clock, 8-word FIFO with
// level 4 so the flags are reached quickly) through its register port and decodes
// TxHi/TxLo with an independent bus monitor. Checks: transmission starts within four
// clocks of the first complete word, words come out in order with parity inserted when
// enabled, a word written into a full FIFO is lost, the status flags (empty, half full,
// full, busy), the interrupt rule, and the low-speed bit time.
module tb_tx_channel;
  import arinc_pkg::*;
  localparam int CLK_HZ = 10_000_000;
  logic clk = 0, rst_n = 0;
  chan_req_t req;
  arinc_word_t rdata;
  logic int_o, tx_hi, tx_lo;
  int checks = 0, failures = 0;
  logic [31:0] exp_q[$];
  longint cyc = 0, first_write_cyc = -1, first_edge_cyc = -1;
  bit slow = 0;

  tx_channel #(.CLK_FREQ_HZ(CLK_HZ), .FIFO_DEPTH(8), .FIFO_LEVEL(4)) dut (
    .clk, .rst_n, .req_i(req), .rdata_o(rdata), .int_o, .tx_hi_o(tx_hi), .tx_lo_o(tx_lo)
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

  // Bus monitor: collects 32 pulses per word and checks the bit period.
  logic prev_act = 0;
  longint prev_rise = 0;
  int nbits = 0, words_seen = 0;
  logic [31:0] rx_bits;
  always @(posedge clk) begin
    automatic logic act = tx_hi | tx_lo;
    if (rst_n && act && !prev_act) begin
      if (first_edge_cyc < 0) first_edge_cyc = cyc;
      if (nbits > 0) chk(cyc - prev_rise == (slow ? 800 : 100), "bit period");
      prev_rise = cyc;
      rx_bits[nbits] = tx_hi;
      nbits++;
      if (nbits == 32) begin
        automatic logic [31:0] w, e;
        for (int k = 0; k < 8; k++) w[7 - k] = rx_bits[k];
        for (int k = 8; k < 32; k++) w[k] = rx_bits[k];
        e = exp_q.pop_front();
        chk(w == e, $sformatf("word got %h exp %h", w, e));
        words_seen++;
        nbits = 0;
      end
    end
    prev_act = act;
  end

  task automatic reg_write(input reg_sel_e sel, input logic [31:0] d);
    @(negedge clk);
    req = '{wr: 1'b1, rd: 1'b0, sel: sel, wdata: d};
    if (sel == REG_DATA && first_write_cyc < 0) first_write_cyc = cyc;
    @(negedge clk);
    req.wr = 0;
  endtask

  task automatic status(output logic [7:0] s);
    @(negedge clk);
    req = '{wr: 1'b0, rd: 1'b1, sel: REG_STATUS, wdata: '0};
    #1 s = rdata[7:0];
    @(negedge clk);
    req.rd = 0;
  endtask

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] s;
    logic [31:0] w;
    req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    status(s);
    chk(s == 8'b0000_0001, "empty after reset");
    chk(int_o == 0, "interrupt disabled after reset");
    reg_write(REG_CTRL, 32'h04);                  // interrupt enable
    @(negedge clk);
    chk(int_o == 1, "interrupt while empty");

    // Ten words back to back: one goes to the serializer, eight fill the FIFO, one is lost.
    for (int i = 0; i < 10; i++) begin
      w = $urandom;
      reg_write(REG_DATA, w);
      if (i < 9) exp_q.push_back(w);
    end
    chk(first_edge_cyc >= 0 && first_edge_cyc - first_write_cyc <= 4,
        $sformatf("start latency %0d", first_edge_cyc - first_write_cyc));
    status(s);
    chk(s == 8'b0000_1110, $sformatf("busy, full, half full: %b", s));
    chk(int_o == 1, "interrupt while full");
    // After five words have gone the FIFO holds three: below the level, no flag.
    repeat (5 * 3601 + 50) @(negedge clk);
    status(s);
    chk(s == 8'b0000_1000, $sformatf("busy only: %b", s));
    chk(int_o == 0, "no interrupt between flags");
    wait (exp_q.size() == 0);
    repeat (5 * 100) @(negedge clk);
    status(s);
    chk(s == 8'b0000_0001, $sformatf("idle and empty: %b", s));

    // Parity insertion and low speed.
    reg_write(REG_CTRL, 32'h03);
    slow = 1;
    for (int i = 0; i < 2; i++) begin
      w = $urandom;
      reg_write(REG_DATA, w);
      w[31] = ($countones(w[30:0]) % 2) == 0;
      exp_q.push_back(w);
    end
    wait (exp_q.size() == 0);
    repeat (5 * 800) @(negedge clk);
    chk(words_seen == 11, $sformatf("11 words on the bus, saw %0d", words_seen));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
