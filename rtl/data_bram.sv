// data_bram: one of the tile's two data memories ("Data BRAM").
//
// A true dual-port block RAM of DEPTH words. Port A belongs to the PR region
// (the loaded operator reads its operands and may write results); port B is
// shared by the host (to load input vectors and read results) and the tile
// controller (load and store instructions). Both ports read synchronously
// (rdata one clock after en) and return the old word when they read and write
// the same address in one clock. If both ports write the same address in one
// clock, port B wins. Two data BRAMs per tile and their link to the PR region
// are from the overlay description; DEPTH (4096 words, so that a 16 KByte
// vector of 32-bit words fits in one) and the port roles are this design's.
module data_bram
  import overlay_pkg::*;
#(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          a_en,
  input  logic          a_we,
  input  logic [AW-1:0] a_addr,
  input  word_t         a_wdata,
  output word_t         a_rdata,
  input  logic          b_en,
  input  logic          b_we,
  input  logic [AW-1:0] b_addr,
  input  word_t         b_wdata,
  output word_t         b_rdata
);
  word_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en) a_rdata <= mem[a_addr];
    if (b_en) b_rdata <= mem[b_addr];
    if (a_en && a_we) mem[a_addr] <= a_wdata;
    if (b_en && b_we) mem[b_addr] <= b_wdata;
  end
endmodule
