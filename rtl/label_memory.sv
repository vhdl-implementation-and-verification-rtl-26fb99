// label_memory: label memory and label compare of one ARINC 429 receiver.
//
// The CPU writes the labels it wants to receive, one per write, into a list of DEPTH
// entries; an entry counter marks how many of them are in use. A receiver asking about
// a label gets match_o = 1 when the label equals one of the entries in use. The compare
// is done against all entries in parallel and is combinational, so the answer is ready in
// the cycle the label is presented.
// Writing bit 7 of the Rx control register (reload_i here) starts a new list: the entry
// counter goes back to zero, the old entries stay in the memory but are no longer used in
// the compare, and later writes overwrite them from the first entry on. This reload rule
// follows the description of the core; the list organisation, the depth of 256 (one
// entry for each possible label) and ignoring writes to a full list are this design's.
module label_memory
  import arinc_pkg::*;
#(
  parameter int unsigned DEPTH = 256
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         reload_i,     // start a new list
  input  logic         wr_i,         // append wlabel_i to the list
  input  arinc_label_t wlabel_i,
  input  arinc_label_t label_i,      // label to look up
  output logic         match_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);
  localparam int unsigned CW = $clog2(DEPTH + 1);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  arinc_label_t  mem [DEPTH];
  logic [CW-1:0] count;

  always_ff @(posedge clk) begin
    if (wr_i && !reload_i && count < CW'(DEPTH)) mem[count[AW-1:0]] <= wlabel_i;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
    end else if (reload_i) begin
      count <= '0;
    end else if (wr_i && count < CW'(DEPTH)) begin
      count <= count + 1'b1;
    end
  end

  always_comb begin
    match_o = 1'b0;
    for (int unsigned i = 0; i < DEPTH; i++) begin
      if (CW'(i) < count && mem[i] == label_i) match_o = 1'b1;
    end
    count_o = count;
  end
endmodule
