// tb_rx_channel: drives an ARINC bus model into one receive channel (10 MHz clock,
// 4-word FIFO with level 2 to reach the flags quickly) and reads it through the register
// port. Covers: plain reception at 100 and 12.5 kbit/s, parity check (bad word dropped,
// sticky status bit cleared by a status read), label compare and reload through control
// bit 7, SDI compare, FIFO half-full / full / overflow, gap error and the interrupt rule.
module tb_rx_channel;
  import arinc_pkg::*;
  localparam int CLK_HZ = 10_000_000;
  logic clk = 0, rst_n = 0;
  logic rx_hi = 0, rx_lo = 0;
  chan_req_t req;
  arinc_word_t rdata;
  logic int_o;
  int checks = 0, failures = 0;
  bit slow = 0;

  rx_channel #(.CLK_FREQ_HZ(CLK_HZ), .FIFO_DEPTH(4), .FIFO_LEVEL(2), .LABEL_DEPTH(16)) dut (
    .clk, .rst_n, .rx_hi_i(rx_hi), .rx_lo_i(rx_lo), .req_i(req), .rdata_o(rdata), .int_o
  );

  always #50 clk = ~clk;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic logic [31:0] with_parity(input logic [31:0] w);
    w[31] = ($countones(w[30:0]) % 2) == 0;
    return w;
  endfunction

  // Bus model: bits 8..1 then 9..32, RZ, then 4 null bit times.
  task automatic send_word(input logic [31:0] w, input int nbits = 32);
    int bc = slow ? CLK_HZ / 12_500 : CLK_HZ / 100_000;
    for (int k = 0; k < nbits; k++) begin
      bit b = (k < 8) ? w[7 - k] : w[k];
      @(negedge clk);
      rx_hi = b; rx_lo = !b;
      repeat (bc / 2) @(negedge clk);
      rx_hi = 0; rx_lo = 0;
      repeat (bc / 2 - 1) @(negedge clk);
    end
    repeat (4 * bc) @(negedge clk);
  endtask

  task automatic reg_write(input reg_sel_e sel, input logic [31:0] d);
    @(negedge clk);
    req = '{wr: 1'b1, rd: 1'b0, sel: sel, wdata: d};
    @(negedge clk);
    req.wr = 0;
  endtask

  task automatic reg_read(input reg_sel_e sel, output logic [31:0] d);
    @(negedge clk);
    req = '{wr: 1'b0, rd: 1'b1, sel: sel, wdata: '0};
    #1 d = rdata;
    @(negedge clk);
    req.rd = 0;
  endtask

  task automatic expect_word(input logic [31:0] e);
    logic [31:0] d;
    reg_read(REG_DATA, d);
    chk(d == e, $sformatf("FIFO word got %h exp %h", d, e));
  endtask

  task automatic expect_status(input logic [7:0] e, input string what);
    logic [31:0] d;
    reg_read(REG_STATUS, d);
    chk(d[7:0] == e, $sformatf("%s: status got %b exp %b", what, d[7:0], e));
  endtask

  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] w[4];
    logic [31:0] d;
    req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    expect_status(8'b0000_0001, "after reset");
    chk(int_o == 0, "no interrupt while disabled");

    // Plain reception, no checks enabled.
    for (int i = 0; i < 2; i++) begin
      w[i] = $urandom;
      send_word(w[i]);
    end
    expect_status(8'b0000_0010, "two words, half full");
    expect_word(w[0]);
    expect_word(w[1]);
    expect_status(8'b0000_0001, "drained");

    // Parity check: control = parity_enable.
    reg_write(REG_CTRL, 32'h04);
    reg_read(REG_CTRL, d);
    chk(d[7:0] == 8'h04, "control read back");
    w[0] = with_parity($urandom);
    w[1] = w[0] ^ 32'h0000_0400;                  // one data bit flipped: bad parity
    send_word(w[0]);
    send_word(w[1]);
    expect_status(8'b0000_1000, "parity error, one word kept");
    expect_status(8'b0000_0000, "parity error cleared by read");
    expect_word(w[0]);

    // Label compare: labels 0x12 and 0x34 loaded.
    reg_write(REG_CTRL, 32'h02);
    reg_write(REG_LABEL, 32'h12);
    reg_write(REG_LABEL, 32'h34);
    reg_read(REG_LABEL, d);
    chk(d == 2, "two labels loaded");
    w[0] = {$urandom} & 32'hFFFF_FF00 | 32'h12;
    w[1] = {$urandom} & 32'hFFFF_FF00 | 32'h55;
    w[2] = {$urandom} & 32'hFFFF_FF00 | 32'h34;
    for (int i = 0; i < 3; i++) send_word(w[i]);
    expect_word(w[0]);
    expect_word(w[2]);
    expect_status(8'b0000_0001, "label 0x55 rejected");

    // Reload: control bit 7, then label 0x55 only.
    reg_write(REG_CTRL, 32'h82);
    reg_read(REG_CTRL, d);
    chk(d[7] == 0, "reload bit reads back 0");
    reg_write(REG_LABEL, 32'h55);
    for (int i = 0; i < 3; i++) send_word(w[i]);
    expect_word(w[1]);
    expect_status(8'b0000_0001, "old labels no longer match");

    // SDI compare: keep SDI = 2.
    reg_write(REG_CTRL, 32'h28);
    w[0] = ({$urandom} & 32'hFFFF_FCFF) | 32'h0000_0200;
    w[1] = ({$urandom} & 32'hFFFF_FCFF) | 32'h0000_0100;
    send_word(w[0]);
    send_word(w[1]);
    expect_word(w[0]);
    expect_status(8'b0000_0001, "SDI 1 rejected");

    // Low speed, interrupt enabled: empty FIFO gives an interrupt.
    reg_write(REG_CTRL, 32'h41);
    slow = 1;
    @(negedge clk);
    chk(int_o == 1, "interrupt on empty");
    w[0] = $urandom;
    send_word(w[0]);
    chk(int_o == 0, "one word: no flag high, no interrupt");
    expect_word(w[0]);

    // Fill: 5 words into a 4-word FIFO.
    reg_write(REG_CTRL, 32'h40);
    slow = 0;
    for (int i = 0; i < 4; i++) begin
      w[i] = $urandom;
      send_word(w[i]);
    end
    send_word($urandom);
    chk(int_o == 1, "interrupt on full");
    expect_status(8'b0010_0110, "full, half full, overflow");
    for (int i = 0; i < 4; i++) expect_word(w[i]);

    // Gap error: 10 bits, then silence.
    send_word($urandom, 10);
    expect_status(8'b0001_0001, "gap error");
    expect_status(8'b0000_0001, "gap error cleared");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
