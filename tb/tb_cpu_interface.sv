// tb_cpu_interface: 16-bit CPU bus, two receive and two transmit channels replaced by
// simple models (each returns a fixed pattern per channel and register and logs the
// strobes it gets). Checks address decoding, that a 32-bit word written in two halves
// reaches only the addressed transmitter as one write strobe, that a word read in two
// halves returns both halves and pops only on the second, control/label writes, the
// status-read strobe, an unused channel number, and that every access holds cpu_wait
// high for exactly two clock edges.
module tb_cpu_interface;
  import arinc_pkg::*;
  localparam int W = 16;
  logic clk = 0, rst_n = 0;
  logic cpu_ren = 1, cpu_wen = 1;
  logic [8:0] cpu_add = 0;
  logic [W-1:0] cpu_din = 0, cpu_dout;
  logic cpu_wait;
  chan_req_t rx_req[2], tx_req[2];
  arinc_word_t rx_rdata[2], tx_rdata[2];
  int checks = 0, failures = 0;

  typedef struct { bit tx; int ch; bit wr; reg_sel_e sel; logic [31:0] wdata; } strobe_t;
  strobe_t log_q[$];

  cpu_interface #(.CPU_DATA_WIDTH(W), .NUM_RX(2), .NUM_TX(2)) dut (
    .clk, .rst_n, .cpu_ren, .cpu_wen, .cpu_add, .cpu_din, .cpu_dout, .cpu_wait,
    .rx_req_o(rx_req), .rx_rdata_i(rx_rdata), .tx_req_o(tx_req), .tx_rdata_i(tx_rdata)
  );

  always #5 clk = ~clk;

  function automatic logic [31:0] pattern(input bit tx, input int ch, input reg_sel_e sel);
    return {8'hA0 | 8'(ch), 7'd0, tx, 14'd0, 2'(sel)} ^ 32'h1234_5678;
  endfunction

  always_comb begin
    for (int i = 0; i < 2; i++) begin
      rx_rdata[i] = pattern(0, i, rx_req[i].sel);
      tx_rdata[i] = pattern(1, i, tx_req[i].sel);
    end
  end

  always @(posedge clk) begin
    for (int i = 0; i < 2; i++) begin
      if (rx_req[i].wr || rx_req[i].rd)
        log_q.push_back('{0, i, rx_req[i].wr, rx_req[i].sel, rx_req[i].wdata});
      if (tx_req[i].wr || tx_req[i].rd)
        log_q.push_back('{1, i, tx_req[i].wr, tx_req[i].sel, tx_req[i].wdata});
    end
  end

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic logic [8:0] addr(input int ch, input bit tx, input reg_sel_e sel,
                                      input int byte_off);
    return {4'(ch), tx, 2'(sel), 2'(byte_off)};
  endfunction

  // One CPU access; returns read data and checks the wait time.
  task automatic access(input bit write, input logic [8:0] a, input logic [W-1:0] d,
                        output logic [W-1:0] q);
    int waits = 0;
    @(negedge clk);
    cpu_add = a; cpu_din = d;
    if (write) cpu_wen = 0; else cpu_ren = 0;
    #1;
    chk(cpu_wait == 1, "cpu_wait rises with the enable");
    forever begin
      @(posedge clk);
      if (cpu_wait) waits++;
      @(negedge clk);
      if (!cpu_wait) break;
    end
    q = cpu_dout;
    cpu_wen = 1; cpu_ren = 1;
    chk(waits == 2, $sformatf("cpu_wait held for %0d edges", waits));
    @(negedge clk);
  endtask

  task automatic expect_strobe(input bit tx, input int ch, input bit wr, input reg_sel_e sel,
                               input logic [31:0] wdata, input bit check_data);
    strobe_t s;
    chk(log_q.size() == 1, $sformatf("one strobe, got %0d", log_q.size()));
    if (log_q.size() > 0) begin
      s = log_q.pop_front();
      chk(s.tx == tx && s.ch == ch && s.wr == wr && s.sel == sel,
          $sformatf("strobe to tx=%b ch=%0d wr=%b sel=%0d", s.tx, s.ch, s.wr, s.sel));
      if (check_data) chk(s.wdata == wdata, $sformatf("wdata %h exp %h", s.wdata, wdata));
    end
    log_q.delete();
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] q;
    logic [31:0] w, p;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 20; rep++) begin
      int ch = rep % 2;
      // Data word to transmitter ch, low half then high half.
      w = $urandom;
      access(1, addr(ch, 1, REG_DATA, 0), w[15:0], q);
      chk(log_q.size() == 0, "no strobe on the first half");
      access(1, addr(ch, 1, REG_DATA, 2), w[31:16], q);
      expect_strobe(1, ch, 1, REG_DATA, w, 1);
      // Data word from receiver ch.
      p = pattern(0, ch, REG_DATA);
      access(0, addr(ch, 0, REG_DATA, 0), 0, q);
      chk(q == p[15:0], $sformatf("low half %h exp %h", q, p[15:0]));
      chk(log_q.size() == 0, "no pop on the first half");
      access(0, addr(ch, 0, REG_DATA, 2), 0, q);
      chk(q == p[31:16], $sformatf("high half %h exp %h", q, p[31:16]));
      expect_strobe(0, ch, 0, REG_DATA, 0, 0);
      // Control write to receiver ch, label write, status read of transmitter ch.
      w = 32'($urandom_range(255));
      access(1, addr(ch, 0, REG_CTRL, 0), 16'hFF00 | 16'(w), q);
      expect_strobe(0, ch, 1, REG_CTRL, w, 1);
      access(1, addr(ch, 0, REG_LABEL, 0), 16'(w), q);
      expect_strobe(0, ch, 1, REG_LABEL, w, 1);
      access(0, addr(ch, 1, REG_STATUS, 0), 0, q);
      p = pattern(1, ch, REG_STATUS);
      chk(q == p[15:0], "status read data");
      expect_strobe(1, ch, 0, REG_STATUS, 0, 0);
    end
    // Channel 3 does not exist: nothing happens, reads give 0.
    access(1, addr(3, 1, REG_CTRL, 0), 16'h00FF, q);
    chk(log_q.size() == 0, "no strobe for a missing channel");
    access(0, addr(3, 0, REG_STATUS, 0), 0, q);
    chk(q == 0 && log_q.size() == 0, "missing channel reads 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
