// tb_arinc_fifo: drives random pushes and pops into a 16-word FIFO with level 5 and
// compares data, count and the empty / half-full / full / overflow flags with a
// queue-based reference model every cycle.
module tb_arinc_fifo;
  localparam int DEPTH = 16;
  localparam int LEVEL = 5;
  logic clk = 0, rst_n = 0;
  logic push, pop;
  logic [31:0] wdata, rdata;
  logic empty, half, full, ovf;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [31:0] model[$];
  bit saw_full = 0, saw_ovf = 0, exp_ovf = 0;

  arinc_fifo #(.WIDTH(32), .DEPTH(DEPTH), .LEVEL(LEVEL)) dut (
    .clk, .rst_n, .push_i(push), .wdata_i(wdata), .pop_i(pop), .rdata_o(rdata),
    .empty_o(empty), .half_full_o(half), .full_o(full), .overflow_o(ovf), .count_o(count)
  );

  always #5 clk = ~clk;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t (model size %0d, count %0d)", what, $time, model.size(), count);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      // Phases bias toward filling, then draining, so every flag is reached.
      automatic int p_push = ((cyc / 500) % 2 == 0) ? 80 : 20;
      @(negedge clk);
      chk(empty == (model.size() == 0), "empty");
      chk(full == (model.size() == DEPTH), "full");
      chk(half == (model.size() >= LEVEL), "half_full");
      chk(int'(count) == model.size(), "count");
      chk(ovf == exp_ovf, "overflow");
      if (model.size() > 0) chk(rdata == model[0], "head data");
      if (full) saw_full = 1;
      if (ovf) saw_ovf = 1;
      push  = ($urandom_range(99) < p_push);
      pop   = ($urandom_range(99) >= p_push);
      wdata = $urandom;
      @(posedge clk);
      #1;
      // Reference: pop applies to the old contents, push is refused when full.
      begin
        automatic bit was_full = (model.size() == DEPTH);
        automatic bit was_empty = (model.size() == 0);
        automatic logic [31:0] w = wdata;
        if (pop && !was_empty) void'(model.pop_front());
        if (push && !was_full) model.push_back(w);
        exp_ovf = push && was_full;
      end
    end
    chk(saw_full && saw_ovf, "full and overflow reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
