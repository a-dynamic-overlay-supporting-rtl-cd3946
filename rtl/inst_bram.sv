// inst_bram: the tile's instruction memory ("Inst. BRAM").
//
// A simple dual-port block RAM of DEPTH 32-bit instruction words: the host
// writes the tile's program through the write port, the controller fetches
// through the read port. Reads are synchronous: rdata holds the word at
// raddr one clock after ren. The memory is not reset. One instruction BRAM per
// tile is from the overlay description; its depth (1024 words, one 36 Kbit
// block RAM) and the port split are this design's choices.
module inst_bram #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [31:0]   wdata,
  input  logic          ren,
  input  logic [AW-1:0] raddr,
  output logic [31:0]   rdata
);
  logic [31:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we)  mem[waddr] <= wdata;
    if (ren) rdata <= mem[raddr];
  end
endmodule
