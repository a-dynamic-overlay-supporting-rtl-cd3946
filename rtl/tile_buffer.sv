// tile_buffer: the word buffer between the In Mux and the PR region / Out Mux.
//
// A synchronous first-in first-out queue of DEPTH words with show-ahead
// output: the head word is visible on head/not-empty and is removed by pop in
// the same cycle. A word pushed into an empty buffer is visible one clock
// later. Links carry no back-pressure, so a push into a full buffer (with no
// pop in that cycle) loses the word and sets the sticky overflow flag, which
// only reset clears. The buffer is only named in the tile diagram; the
// queue organisation, DEPTH and the overflow flag are this design's choices.
module tile_buffer
  import overlay_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  push,
  input  word_t din,
  input  logic  pop,
  output word_t head,
  output logic  not_empty,
  output logic  full,
  output logic  overflow
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  word_t              mem [DEPTH];
  logic [AW-1:0]      rd_ptr, wr_ptr;
  logic [AW:0]        count;
  logic               do_push, do_pop;

  assign not_empty = (count != '0);
  assign full      = (count == (AW+1)'(DEPTH));
  assign head      = mem[rd_ptr];
  assign do_pop    = pop & not_empty;
  assign do_push   = push & (~full | do_pop);

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rd_ptr   <= '0;
      wr_ptr   <= '0;
      count    <= '0;
      overflow <= 1'b0;
    end else begin
      if (do_push) wr_ptr <= inc(wr_ptr);
      if (do_pop)  rd_ptr <= inc(rd_ptr);
      case ({do_push, do_pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
      if (push && !do_push) overflow <= 1'b1;
    end
  end

  // Popping an empty buffer is a protocol error of the tile's own logic.
  a_no_empty_pop: assert property (@(posedge clk) disable iff (rst) pop |-> not_empty);
endmodule
