// tb_label_memory: loads a random set of labels, then checks the match output for all
// 256 labels against a reference set; reloads (bit 7 of the Rx control register) with a
// smaller set and checks that labels of the old set no longer match; fills the memory to
// its depth and checks that an extra write is ignored.
module tb_label_memory;
  localparam int DEPTH = 256;
  logic clk = 0, rst_n = 0;
  logic reload = 0, wr = 0;
  logic [7:0] wlabel = 0, label = 0;
  logic match;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  bit ref_set[256];

  label_memory #(.DEPTH(DEPTH)) dut (
    .clk, .rst_n, .reload_i(reload), .wr_i(wr), .wlabel_i(wlabel), .label_i(label),
    .match_o(match), .count_o(count)
  );

  always #5 clk = ~clk;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic write_label(input logic [7:0] l);
    @(negedge clk); wr = 1; wlabel = l;
    @(negedge clk); wr = 0;
  endtask

  task automatic do_reload();
    @(negedge clk); reload = 1;
    @(negedge clk); reload = 0;
    foreach (ref_set[i]) ref_set[i] = 0;
  endtask

  task automatic check_all();
    for (int l = 0; l < 256; l++) begin
      label = 8'(l);
      #1;
      chk(match == ref_set[l], $sformatf("label %0d match %b exp %b", l, match, ref_set[l]));
    end
  endtask

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (ref_set[i]) ref_set[i] = 0;
    check_all();                                   // empty memory matches nothing
    for (int i = 0; i < 40; i++) begin
      automatic logic [7:0] l = 8'($urandom);
      write_label(l);
      ref_set[l] = 1;
    end
    chk(count == 40, "count after 40 writes");
    check_all();
    do_reload();
    chk(count == 0, "count after reload");
    check_all();                                   // old labels ignored
    for (int i = 0; i < 5; i++) begin
      automatic logic [7:0] l = 8'($urandom);
      write_label(l);
      ref_set[l] = 1;
    end
    check_all();
    do_reload();
    for (int i = 0; i < DEPTH; i++) write_label(8'(i ^ 8'h5A));
    foreach (ref_set[i]) ref_set[i] = 1;
    chk(count == DEPTH, "full count");
    check_all();
    write_label(8'h00);                            // ignored, list full
    chk(count == DEPTH, "write to full list ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
