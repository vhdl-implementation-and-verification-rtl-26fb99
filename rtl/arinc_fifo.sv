// arinc_fifo: synchronous first-in first-out buffer for ARINC words.
//
// A circular buffer of DEPTH words with separate read and write pointers and a word
// count. The head word is always visible on rdata_o (show-ahead), so a pop in one cycle
// takes the word the caller has just seen. A push and a pop in the same cycle are both
// done; a push into a full FIFO and a pop from an empty one are ignored (the push sets
// overflow_o for one cycle).
// Flags, as named by the core's description: empty_o, half_full_o (count >= LEVEL,
// the "programmed FIFO level") and full_o. All are registered state or derived from the
// count; they change the cycle after the push or pop.
// The 512-word depth of the Tx FIFO comes from the description of the core; the Rx depth
// and both levels are parameters chosen by this design.
module arinc_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 512,
  parameter int unsigned LEVEL = DEPTH / 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push_i,
  input  logic [WIDTH-1:0] wdata_i,
  input  logic             pop_i,
  output logic [WIDTH-1:0] rdata_o,
  output logic             empty_o,
  output logic             half_full_o,
  output logic             full_o,
  output logic             overflow_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic [$clog2(DEPTH+1)-1:0] count;

  logic do_push, do_pop;
  assign do_push = push_i && (count != DEPTH[$bits(count)-1:0]);
  assign do_pop  = pop_i  && (count != '0);

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= wdata_i;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr     <= '0;
      rd_ptr     <= '0;
      count      <= '0;
      overflow_o <= 1'b0;
    end else begin
      if (do_push) wr_ptr <= next_ptr(wr_ptr);
      if (do_pop)  rd_ptr <= next_ptr(rd_ptr);
      case ({do_push, do_pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
      overflow_o <= push_i && !do_push;
    end
  end

  always_comb begin
    rdata_o     = mem[rd_ptr];
    count_o     = count;
    empty_o     = (count == '0);
    full_o      = (count == DEPTH[$bits(count)-1:0]);
    half_full_o = (count >= LEVEL[$bits(count)-1:0]);
  end

  // The count never leaves 0..DEPTH.
  assert property (@(posedge clk) disable iff (!rst_n) 32'(count) <= DEPTH)
    else $error("arinc_fifo: count out of range");

endmodule
